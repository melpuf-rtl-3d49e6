// melpuf_sig_ram: the RAM that receives the MeLPUF response and from which the
// signature is read out.
//
// A simple dual-port memory of WORDS words of SIG_W bits: one synchronous write
// port, used by the capture controller, and one synchronous read port, through
// which an external reader (a debug/JTAG memory editor, a host processor or an
// authentication engine) fetches the signature.
//
// Ports: clk, we, waddr, wdata; raddr, rdata.
// Timing: a write takes effect at the clk edge where we is high; rdata shows
// the word at raddr one clk edge after raddr is applied. A read of the word
// being written in the same cycle returns the old contents.
//
// That the response is routed into a RAM for read-out follows the paper; the
// word width and the port arrangement are this design's own choices. The array
// has no reset: its contents are only meaningful after a capture.
module melpuf_sig_ram
  import melpuf_pkg::*;
#(
  parameter int unsigned SIG_W = SIG_W_DEFAULT,
  parameter int unsigned WORDS = N_PUF_DEFAULT / SIG_W_DEFAULT,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [SIG_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [SIG_W-1:0] rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [SIG_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

// melpuf_ctrl: drives the shared control signal of all MeLPUF cells and copies
// the response into the signature RAM.
//
// After reset the controller holds ctrl low (PUF mode), so every cell presents
// its power-up state on its output line. It waits SETTLE_CYCLES clock cycles,
// long enough for the inverter pairs to resolve and for the balancing registers
// to take the result, then writes the N_PUF response bits into the RAM, SIG_W
// bits per cycle, word w holding bits [w*SIG_W +: SIG_W]. When the last word is
// written it raises ctrl (functional mode) and sets sig_valid. A pulse on
// reread, in functional mode, returns to PUF mode and captures again; the pairs
// keep their state while powered, so a re-read gives the same signature.
//
// Ports: clk, rst_n (asynchronous, active low), reread, puf_bits (the cells'
// outputs), ctrl, we/waddr/wdata (RAM write port), sig_valid.
// Timing: from reset release (or a reread pulse) the signature is in the RAM
// and ctrl is high after SETTLE_CYCLES + N_PUF/SIG_W cycles.
//
// That the control signal is low at start-up, that the PUF outputs are sampled
// in that mode and routed to a RAM, and that ctrl high restores normal operation
// follow the paper. The settling time, the word-per-cycle write order and the
// reread request are this design's own choices.
module melpuf_ctrl
  import melpuf_pkg::*;
#(
  parameter int unsigned N_PUF         = N_PUF_DEFAULT,
  parameter int unsigned SIG_W         = SIG_W_DEFAULT,
  parameter int unsigned SETTLE_CYCLES = SETTLE_CYCLES_DEFAULT,
  localparam int unsigned WORDS        = N_PUF / SIG_W,
  localparam int unsigned AW           = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             reread,
  input  logic [N_PUF-1:0] puf_bits,
  output logic             ctrl,
  output logic             we,
  output logic [AW-1:0]    waddr,
  output logic [SIG_W-1:0] wdata,
  output logic             sig_valid
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned CW = (SETTLE_CYCLES > 1) ? $clog2(SETTLE_CYCLES) : 1;

  ctrl_state_e   state;
  logic [CW-1:0] settle_cnt;
  logic [AW-1:0] word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_SETTLE;
      settle_cnt <= '0;
      word       <= '0;
      sig_valid  <= 1'b0;
    end else begin
      unique case (state)
        ST_SETTLE: begin
          if (settle_cnt == CW'(SETTLE_CYCLES - 1)) begin
            settle_cnt <= '0;
            word       <= '0;
            state      <= ST_CAPTURE;
          end else begin
            settle_cnt <= settle_cnt + 1'b1;
          end
        end
        ST_CAPTURE: begin
          if (word == AW'(WORDS - 1)) begin
            state     <= ST_FUNC;
            sig_valid <= 1'b1;
          end else begin
            word <= word + 1'b1;
          end
        end
        ST_FUNC: begin
          if (reread) begin
            state     <= ST_SETTLE;
            sig_valid <= 1'b0;
          end
        end
        default: state <= ST_SETTLE;
      endcase
    end
  end

  assign ctrl      = (state == ST_FUNC);
  assign we        = (state == ST_CAPTURE);
  assign waddr     = word;
  assign wdata     = puf_bits[word * SIG_W +: SIG_W];

  // A RAM write only ever happens with the cells in PUF mode.
  a_we_in_puf_mode: assert property (@(posedge clk) disable iff (!rst_n) we |-> !ctrl);
  // The signature is only announced in functional mode.
  a_valid_func: assert property (@(posedge clk) disable iff (!rst_n) sig_valid |-> ctrl);

  initial begin
    assert (N_PUF % SIG_W == 0) else $error("N_PUF must be a multiple of SIG_W");
    assert (SETTLE_CYCLES >= 2) else $error("SETTLE_CYCLES must be at least 2");
  end

endmodule

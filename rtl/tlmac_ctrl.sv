// tlmac_ctrl: the processing element's state machine.
//
// IDLE: in_ready is high; an offered operation is accepted (load), which
//       captures activations and partial sums and reads both mapping ROMs.
// RUN:  B_A cycles of accumulation with b = 0, 1, .., B_A-1 (LSB first).
// DONE: out_valid is high until out_ready. In the cycle the result is taken
//       a new operation may be accepted, so back-to-back operations take
//       B_A + 1 cycles each.
// Latency from accept to out_valid is B_A + 1 cycles. Synchronous reset,
// active low. The valid/ready protocol is this design's choice; the paper
// connects the processing element through FIFOs.
module tlmac_ctrl
  import tlmac_pkg::*;
#(
  parameter int B_A = DEF_B_A,
  localparam int BIDX_W = (B_A > 1) ? $clog2(B_A) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              load,      // capture inputs this cycle
  output logic              acc_en,    // accumulate this cycle
  output logic [BIDX_W-1:0] b          // current activation bit
);

  ctrl_state_t state;

  assign in_ready  = (state == ST_IDLE) || (state == ST_DONE && out_ready);
  assign load      = in_valid && in_ready;
  assign acc_en    = (state == ST_RUN);
  assign out_valid = (state == ST_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      b     <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (load) begin
          state <= ST_RUN;
          b     <= '0;
        end
        ST_RUN: begin
          if (b == BIDX_W'(B_A - 1)) state <= ST_DONE;
          else                       b     <= b + 1'b1;
        end
        ST_DONE: if (out_ready) begin
          state <= load ? ST_RUN : ST_IDLE;
          b     <= '0;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A result stays offered until it is taken.
  a_hold_result: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid);
  // b never leaves 0 .. B_A-1.
  a_b_range: assert property (@(posedge clk) disable iff (!rst_n)
    int'(b) < B_A);

endmodule

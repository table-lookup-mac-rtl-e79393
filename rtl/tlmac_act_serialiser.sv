// tlmac_act_serialiser: turns the G activations of an operation into bit planes.
//
// The activations are captured on load and held for the operation; abit[g]
// is bit b of activation g, so the pool sees the LSB plane first when the
// controller counts b up from 0. Capture is registered, selection is
// combinational.
module tlmac_act_serialiser
  import tlmac_pkg::*;
#(
  parameter int G   = DEF_G,
  parameter int B_A = DEF_B_A,
  localparam int BIDX_W = (B_A > 1) ? $clog2(B_A) : 1
) (
  input  logic                    clk,
  input  logic                    load,
  input  logic [G-1:0][B_A-1:0]   act,   // unsigned activations, act[g] pairs with weight g
  input  logic [BIDX_W-1:0]       b,
  output logic [G-1:0]            abit
);

  logic [G-1:0][B_A-1:0] act_q;

  always_ff @(posedge clk) begin
    if (load) act_q <= act;
  end

  for (genvar g = 0; g < G; g++) begin : g_bit
    assign abit[g] = act_q[g][b];
  end

endmodule

// tlmac_pool: the LUT pool of a TLMAC processing element.
//
// N_ARR LUT arrays all see the same G activation bits and the same select
// index s, so in every cycle the pool produces the bit-plane MAC result of
// one weight group per array. s is read from the step map when an operation
// is accepted (en) and stays constant for the operation. The weight groups of
// array e come from tlmac_layer_pkg::layer_weight and are folded into the
// LUT truth tables at elaboration.
//
// Timing: mac is combinational in abit and valid from the cycle after en.
module tlmac_pool
  import tlmac_pkg::*;
#(
  parameter int G      = DEF_G,
  parameter int B_W    = DEF_B_W,
  parameter int N_ARR  = DEF_N_ARR,
  parameter int D_S    = DEF_D_S,
  parameter int LAYER  = 0,
  localparam int N_CLUS = n_clus(G),
  localparam int B_L    = lut_array_bits(B_W, G),
  localparam int STEP_W = $clog2(D_S)
) (
  input  logic                        clk,
  input  logic                        en,    // operation accepted: read step map
  input  logic [STEP_W-1:0]           step,
  input  logic [G-1:0]                abit,  // current activation bit plane
  output logic [N_ARR-1:0][B_L-1:0]   mac    // result of every LUT array
);

  logic [LUT_INPUTS-G-1:0] sel;

  tlmac_step_map #(.D_S(D_S), .N_CLUS(N_CLUS), .LAYER(LAYER)) u_map (
    .clk (clk),
    .en  (en),
    .step(step),
    .sel (sel)
  );

  // Weight groups of LUT array e, packed as tlmac_lut_array expects.
  function automatic logic [N_CLUS*G*B_W-1:0] array_weights(int e);
    logic [N_CLUS*G*B_W-1:0] w;
    w = '0;
    for (int s = 0; s < N_CLUS; s++)
      for (int g = 0; g < G; g++)
        w[(s*G+g)*B_W +: B_W] = B_W'(tlmac_layer_pkg::layer_weight(LAYER, e, s, g, B_W));
    return w;
  endfunction

  for (genvar e = 0; e < N_ARR; e++) begin : g_arr
    tlmac_lut_array #(
      .G(G), .B_W(B_W), .N_CLUS(N_CLUS), .B_L(B_L),
      .WEIGHTS(array_weights(e))
    ) u_arr (
      .abit(abit),
      .sel (sel),
      .mac (mac[e])
    );
  end

endmodule

// tlmac_pe: Table-Lookup MAC processing element for one convolution layer.
//
// The layer's weights are not stored in a memory: they are part of the truth
// tables of N_ARR LUT arrays (the pool). One operation takes a 1 x G window of
// unsigned activations, the index `step` along the layer's sequential
// dimension, and D_P partial sums, and returns the D_P partial sums with
//   psum_out[p] = psum_in[p] + sum_g act[g] * W[step][p][g]
// added. The MAC is bit-serial over the activation bits: in cycle b the pool
// sees bit b of every activation, every LUT array produces the sum of the
// weights of its selected weight group whose activation bit is set, the
// switches route one array result to each output, and each accumulator adds
// it shifted left by b.
//
// Which weight group the arrays use (select s) and which array each switch
// forwards depend only on the step and are read from two ROMs when the
// operation is accepted. The effective weight tensor is therefore
//   W[t][p] = weight group at index layer_step_sel(t) of array
//             layer_conn(p, layer_switch_sel(t, p))
// with the tables of tlmac_layer_pkg. For a 3x3 layer, G = 3 (one kernel
// row), D_P = 64 * 3 (three kernel rows for 64 output channels, output
// p = row * 64 + channel) and D_S = D_i * D_o / 64.
//
// Interface: valid/ready on the input (act, step, psum_in) and on the output
// (psum_out), synchronous active-low reset. Latency B_A + 1 cycles from
// accept to out_valid; one operation per B_A + 1 cycles when back to back.
// psum_out is the accumulator register and is valid while out_valid is high.
//
// Structure and arithmetic follow the paper's processing element. The
// handshake, the one-cycle ROM read, reset, signed weights/unsigned
// activations and the defaults of B_P, N_ARR and MUX_IN are this design's
// own choices.
module tlmac_pe
  import tlmac_pkg::*;
#(
  parameter int G      = DEF_G,       // weights per group (kernel width)
  parameter int B_W    = DEF_B_W,     // weight bits
  parameter int B_A    = DEF_B_A,     // activation bits
  parameter int B_P    = DEF_B_P,     // partial-sum bits
  parameter int N_ARR  = DEF_N_ARR,   // LUT arrays
  parameter int D_S    = DEF_D_S,     // sequential steps
  parameter int D_P    = DEF_D_P,     // parallel outputs
  parameter int MUX_IN = DEF_MUX_IN,  // LUT arrays per switch multiplexer
  parameter int LAYER  = 0,           // which compiled layer the tables hold
  localparam int B_L    = lut_array_bits(B_W, G),
  localparam int STEP_W = $clog2(D_S),
  localparam int BIDX_W = (B_A > 1) ? $clog2(B_A) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [G-1:0][B_A-1:0]     act,       // activation window
  input  logic [STEP_W-1:0]         step,      // 0 .. D_S-1
  input  logic [D_P-1:0][B_P-1:0]   psum_in,   // partial sums to continue
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [D_P-1:0][B_P-1:0]   psum_out
);

  logic                       load, acc_en;
  logic [BIDX_W-1:0]          b;
  logic [G-1:0]               abit;
  logic [N_ARR-1:0][B_L-1:0]  pool_mac;
  logic [D_P-1:0][B_L-1:0]    sw_mac;

  tlmac_ctrl #(.B_A(B_A)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .load     (load),
    .acc_en   (acc_en),
    .b        (b)
  );

  tlmac_act_serialiser #(.G(G), .B_A(B_A)) u_act (
    .clk (clk),
    .load(load),
    .act (act),
    .b   (b),
    .abit(abit)
  );

  tlmac_pool #(
    .G(G), .B_W(B_W), .N_ARR(N_ARR), .D_S(D_S), .LAYER(LAYER)
  ) u_pool (
    .clk (clk),
    .en  (load),
    .step(step),
    .abit(abit),
    .mac (pool_mac)
  );

  tlmac_switches #(
    .N_ARR(N_ARR), .D_P(D_P), .MUX_IN(MUX_IN), .B_L(B_L), .D_S(D_S), .LAYER(LAYER)
  ) u_sw (
    .clk (clk),
    .en  (load),
    .step(step),
    .mac (pool_mac),
    .out (sw_mac)
  );

  for (genvar p = 0; p < D_P; p++) begin : g_acc
    tlmac_accumulator #(.B_L(B_L), .B_P(B_P), .B_A(B_A)) u_acc (
      .clk    (clk),
      .load   (load),
      .acc_en (acc_en),
      .b      (b),
      .mac    (sw_mac[p]),
      .psum_in(psum_in[p]),
      .psum   (psum_out[p])
    );
  end

  // The offered operation must not change while it waits to be accepted.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(step) && $stable(act));

endmodule

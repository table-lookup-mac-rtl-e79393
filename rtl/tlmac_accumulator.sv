// tlmac_accumulator: one partial-sum accumulator of the TLMAC processing element.
//
// On load the register takes the partial sum handed in from outside. In each
// bit-serial cycle (acc_en) the signed switch result of bit plane b is sign
// extended, shifted left by b and added, so after B_A cycles the register
// holds psum_in + sum_b 2^b * mac_b. Activations are unsigned, so every bit
// plane adds with a positive weight. The sum wraps at B_P bits; B_P is meant
// to be chosen large enough that it never does.
//
// Following the paper: shift by b, add, B_P-bit PSUM register. Own choice:
// B_P = 18 by default and no saturation.
module tlmac_accumulator
  import tlmac_pkg::*;
#(
  parameter int B_L = lut_array_bits(DEF_B_W, DEF_G),
  parameter int B_P = DEF_B_P,
  parameter int B_A = DEF_B_A,
  localparam int BIDX_W = (B_A > 1) ? $clog2(B_A) : 1
) (
  input  logic              clk,
  input  logic              load,     // take psum_in
  input  logic              acc_en,   // add mac << b
  input  logic [BIDX_W-1:0] b,        // current activation bit
  input  logic [B_L-1:0]    mac,      // signed switch result
  input  logic [B_P-1:0]    psum_in,
  output logic [B_P-1:0]    psum
);

  logic signed [B_P-1:0] ext;

  assign ext = {{(B_P-B_L){mac[B_L-1]}}, mac};

  always_ff @(posedge clk) begin
    if (load)        psum <= psum_in;
    else if (acc_en) psum <= psum + (ext <<< b);
  end

  initial begin
    assert (B_P > B_L) else $error("B_P must exceed B_L");
  end

endmodule

// tlmac_lut_array: one LUT array of the TLMAC pool.
//
// A LUT array multiplies one bit plane of G activations with a stored weight
// group and sums the products: mac = sum_g abit[g] * w[sel][g]. It stores
// N_CLUS = 2^(6-G) weight groups; the six inputs of every LUT are the G
// activation bits (address bits G-1..0, bit g pairs with weight g) and the
// 6-G select bits (address bits 5..G). Each of the B_L = B_W + ceil(log2 G)
// LUTs produces one bit of the two's-complement result, so the truth tables
// are computed here, at elaboration, from the weights. Purely combinational.
//
// Following the paper: the LUT count, the split of LUT inputs into G
// activation bits and 6-G select bits, and N_CLUS. Own choices: signed
// weights and the order of the LUT address bits.
//
// WEIGHTS packs weight g of group s at bits [(s*G+g)*B_W +: B_W].
module tlmac_lut_array
  import tlmac_pkg::*;
#(
  parameter int G      = DEF_G,
  parameter int B_W    = DEF_B_W,
  parameter int N_CLUS = n_clus(G),
  parameter int B_L    = lut_array_bits(B_W, G),
  parameter logic [N_CLUS*G*B_W-1:0] WEIGHTS = '0
) (
  input  logic [G-1:0]            abit,  // bit b of each activation
  input  logic [LUT_INPUTS-G-1:0] sel,   // weight group index s
  output logic [B_L-1:0]          mac    // signed MAC result of this bit plane
);

  // Truth table of result bit j.
  function automatic logic [63:0] lut_init(int j);
    logic [63:0] v;
    int s;
    int sum;
    logic signed [B_W-1:0] w;
    v = '0;
    for (int a = 0; a < 64; a++) begin
      s   = a >> G;
      sum = 0;
      if (s < N_CLUS) begin
        for (int g = 0; g < G; g++) begin
          w = WEIGHTS[(s*G+g)*B_W +: B_W];
          if (a[g]) sum += int'(w);
        end
      end
      v[a] = ((sum >> j) & 1) != 0;
    end
    return v;
  endfunction

  for (genvar j = 0; j < B_L; j++) begin : g_lut
    tlmac_lut6 #(.INIT(lut_init(j))) u_lut (
      .addr({sel, abit}),
      .o   (mac[j])
    );
  end

  initial begin
    assert (G >= 1 && G < LUT_INPUTS) else $error("G must be 1..5");
    assert (N_CLUS <= (1 << (LUT_INPUTS - G))) else $error("N_CLUS exceeds the free LUT inputs");
  end

endmodule

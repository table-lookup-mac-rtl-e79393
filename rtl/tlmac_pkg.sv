// tlmac_pkg: constants and types shared by the TLMAC processing element.
//
// The processing element maps a quantised convolution layer onto FPGA
// lookup tables. LUT_INPUTS is the fan-in of the LUT primitive (a LUT-6).
// The DEF_* values are the default configuration: a 3x3 convolution layer of
// a 3-bit ResNet-18 basic block with 256 input and 256 output channels.
// G, B_W, B_A, D_S and D_P follow the paper's formulas; B_P, N_ARR and MUX_IN
// are choices of this implementation (see the README).
package tlmac_pkg;

  // Inputs of one LUT primitive.
  localparam int LUT_INPUTS = 6;

  localparam int DEF_G      = 3;     // weights per weight group = kernel width D_k
  localparam int DEF_B_W    = 3;     // weight bits
  localparam int DEF_B_A    = 3;     // activation bits (bit-serial cycles)
  localparam int DEF_B_P    = 18;    // partial-sum bits (own choice, see README)
  localparam int DEF_N_ARR  = 512;   // LUT arrays in the pool (own choice, bound for 3-bit)
  localparam int DEF_D_S    = 1024;  // sequential steps = D_i * D_o / 64
  localparam int DEF_D_P    = 192;   // parallel outputs = 64 * D_k
  localparam int DEF_MUX_IN = 64;    // LUT arrays wired to each switch (own choice)

  // Weight groups one LUT array can hold: the LUT inputs not used by
  // activation bits select among them.
  function automatic int n_clus(int g);
    return 1 << (LUT_INPUTS - g);
  endfunction

  // Width of one LUT array result: the sum of G signed B_W-bit weights.
  function automatic int lut_array_bits(int b_w, int g);
    return b_w + $clog2(g);
  endfunction

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,  // waiting for an operation
    ST_RUN  = 2'd1,  // bit-serial accumulation, one activation bit per cycle
    ST_DONE = 2'd2   // result held until taken
  } ctrl_state_t;

endpackage

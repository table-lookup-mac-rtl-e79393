// tb_conv_check: drives one tlmac_conv_layer instance through two images and
// compares every output with a direct 3x3 convolution (stride STRIDE, zero
// padding 1) computed on integers.
//
// Input pixels are offered at negative clock edges with random gaps, and
// out_ready is dropped at random, so both streams see back-pressure. The
// checker sits in one posedge block and sees the values before the edge.
// Outputs are expected in order y, x, output-channel block, and out_last
// only on the final transfer of an image.
//
// The layer's weights are whatever the layer tables place:
// W[oc][ic][kr][kc] = weight kc of the group the element uses for output
// p = kr * OC_PAR + oc % OC_PAR at step t = ic * (D_O / OC_PAR) + oc / OC_PAR.
// The reference reads them through the same tables but multiplies integers.
//
// Reported counts: checks, failures, output transfers, output stalls and
// input waits (valid held while the layer was busy).
module tb_conv_check #(
  parameter int B_W    = 3,
  parameter int B_A    = 3,
  parameter int D_I    = 4,
  parameter int D_O    = 8,
  parameter int OC_PAR = 4,
  parameter int H      = 5,
  parameter int W      = 5,
  parameter int STRIDE = 1,
  parameter int N_ARR  = 24,
  parameter int MUX_IN = 8,
  parameter int LAYER  = 9,
  parameter int N_IMG  = 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   outs,
  output int   stalls,
  output int   waits
);
  import tlmac_pkg::*;
  localparam int G = 3, B_P = DEF_B_P;
  localparam int N_OB = D_O / OC_PAR;
  localparam int N_CLUS = n_clus(G);
  localparam int HO = (H - 1) / STRIDE + 1, WO = (W - 1) / STRIDE + 1;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [D_I-1:0][B_A-1:0] in_data;
  logic [OC_PAR-1:0][B_P-1:0] out_data;

  tlmac_conv_layer #(.B_W(B_W), .B_A(B_A), .B_P(B_P), .D_I(D_I), .D_O(D_O),
    .OC_PAR(OC_PAR), .H(H), .W(W), .STRIDE(STRIDE), .N_ARR(N_ARR), .MUX_IN(MUX_IN), .LAYER(LAYER)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_last(out_last));

  int fmap [N_IMG][D_I][H][W];
  int expect_v [N_IMG][D_O][HO][WO];

  function automatic int wgt(int oc, int ic, int kr, int kc);
    int t, p, s, k, e;
    t = ic * N_OB + oc / OC_PAR;
    p = kr * OC_PAR + oc % OC_PAR;
    s = tlmac_layer_pkg::layer_step_sel(LAYER, t, N_CLUS);
    k = tlmac_layer_pkg::layer_switch_sel(LAYER, t, p, MUX_IN);
    e = tlmac_layer_pkg::layer_conn(LAYER, p, k, N_ARR);
    return tlmac_layer_pkg::layer_weight(LAYER, e, s, kc, B_W);
  endfunction

  // stimulus and reference
  initial begin
    int v;
    in_valid = 0; in_data = '0; out_ready = 0;
    for (int n = 0; n < N_IMG; n++) begin
      for (int c = 0; c < D_I; c++) for (int i = 0; i < H; i++) for (int j = 0; j < W; j++)
        fmap[n][c][i][j] = $urandom_range((1 << B_A) - 1);
      for (int oc = 0; oc < D_O; oc++) for (int i = 0; i < HO; i++) for (int j = 0; j < WO; j++) begin
        int ii, jj;
        v = 0;
        for (int c = 0; c < D_I; c++) for (int kr = 0; kr < 3; kr++) for (int kc = 0; kc < 3; kc++) begin
          ii = STRIDE * i + kr - 1;
          jj = STRIDE * j + kc - 1;
          if (ii >= 0 && ii < H && jj >= 0 && jj < W)
            v += wgt(oc, c, kr, kc) * fmap[n][c][ii][jj];
        end
        expect_v[n][oc][i][j] = v;
      end
    end
    @(posedge rst_n);
    for (int n = 0; n < N_IMG; n++)
      for (int i = 0; i < H; i++)
        for (int j = 0; j < W; j++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) @(negedge clk);
          for (int c = 0; c < D_I; c++) in_data[c] = B_A'(fmap[n][c][i][j]);
          in_valid = 1;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
          in_valid = 0;
        end
  end

  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  // checker
  int img = 0, y = 0, x = 0, ob = 0;
  initial begin done = 0; checks = 0; failures = 0; outs = 0; stalls = 0; waits = 0; end
  always @(posedge clk) begin
    if (in_valid && !in_ready) waits++;
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready && !done) begin
      outs++;
      for (int c = 0; c < OC_PAR; c++) begin
        checks++;
        if (int'($signed(out_data[c])) != expect_v[img][ob*OC_PAR + c][y][x]) begin
          failures++;
          if (failures < 5) $display("B_W=%0d img %0d oc %0d (%0d,%0d): got %0d exp %0d", B_W, img,
            ob*OC_PAR + c, y, x, $signed(out_data[c]), expect_v[img][ob*OC_PAR + c][y][x]);
        end
      end
      checks++;
      if (out_last != (y == HO - 1 && x == WO - 1 && ob == N_OB - 1)) begin
        failures++;
        $display("B_W=%0d out_last wrong at (%0d,%0d) block %0d", B_W, y, x, ob);
      end
      if (ob == N_OB - 1) begin
        ob = 0;
        if (x == WO - 1) begin
          x = 0;
          if (y == HO - 1) begin
            y = 0;
            img++;
            if (img == N_IMG) done <= 1;
          end else y++;
        end else x++;
      end else ob++;
    end
  end
endmodule

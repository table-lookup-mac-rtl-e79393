// tb_tlmac_conv_layer_full: the layer engine at its default size, a 3x3
// layer of the 256-channel stage of a 3-bit ResNet-18: 256 input and 256
// output channels on a 14 x 14 map, one element with 512 LUT arrays serving
// 64 output channels x 3 kernel rows over 1024 steps per window position.
// One whole image is streamed in; all 14 x 14 x 256 output sums are compared
// with a direct convolution (stride 1, zero padding 1) on integers, whose
// weights are read once through the layer tables into an array. out_ready
// is dropped at random; out_last must mark only the final transfer.
module tb_tlmac_conv_layer_full;
  import tlmac_pkg::*;
  localparam int D_I = 256, D_O = 256, OC_PAR = 64, H = 14, W = 14;
  localparam int B_W = DEF_B_W, B_A = DEF_B_A, B_P = DEF_B_P;
  localparam int N_ARR = DEF_N_ARR, MUX_IN = DEF_MUX_IN, LAYER = 0;
  localparam int N_OB = D_O / OC_PAR, N_CLUS = n_clus(3);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [D_I-1:0][B_A-1:0] in_data = '0;
  logic [OC_PAR-1:0][B_P-1:0] out_data;
  int checks = 0, failures = 0, outs = 0, stalls = 0;

  always #5 clk = ~clk;

  tlmac_conv_layer dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_last(out_last));

  int fmap [D_I][H][W];
  int wt [D_O][D_I][3][3];

  function automatic int wgt(int oc, int ic, int kr, int kc);
    int t, p, s, k, e;
    t = ic * N_OB + oc / OC_PAR;
    p = kr * OC_PAR + oc % OC_PAR;
    s = tlmac_layer_pkg::layer_step_sel(LAYER, t, N_CLUS);
    k = tlmac_layer_pkg::layer_switch_sel(LAYER, t, p, MUX_IN);
    e = tlmac_layer_pkg::layer_conn(LAYER, p, k, N_ARR);
    return tlmac_layer_pkg::layer_weight(LAYER, e, s, kc, B_W);
  endfunction

  function automatic int conv(int oc, int i, int j);
    int v;
    v = 0;
    for (int c = 0; c < D_I; c++) for (int kr = 0; kr < 3; kr++) for (int kc = 0; kc < 3; kc++)
      if (i + kr - 1 >= 0 && i + kr - 1 < H && j + kc - 1 >= 0 && j + kc - 1 < W)
        v += wt[oc][c][kr][kc] * fmap[c][i + kr - 1][j + kc - 1];
    return v;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired after %0d outputs", outs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // stimulus
  initial begin
    for (int c = 0; c < D_I; c++) for (int i = 0; i < H; i++) for (int j = 0; j < W; j++)
      fmap[c][i][j] = $urandom_range((1 << B_A) - 1);
    for (int oc = 0; oc < D_O; oc++) for (int c = 0; c < D_I; c++)
      for (int kr = 0; kr < 3; kr++) for (int kc = 0; kc < 3; kc++)
        wt[oc][c][kr][kc] = wgt(oc, c, kr, kc);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++) begin
        @(negedge clk);
        for (int c = 0; c < D_I; c++) in_data[c] = B_A'(fmap[c][i][j]);
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
  end

  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  // checker: outputs in order y, x, channel block
  int y = 0, x = 0, ob = 0, n_bad = 0;
  always @(posedge clk) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      outs++;
      for (int c = 0; c < OC_PAR; c++) begin
        int e;
        e = conv(ob*OC_PAR + c, y, x);
        checks++;
        if (int'($signed(out_data[c])) != e) begin
          failures++;
          if (n_bad++ < 4) $display("oc %0d (%0d,%0d): got %0d exp %0d", ob*OC_PAR + c, y, x, $signed(out_data[c]), e);
        end
      end
      checks++;
      if (out_last != (y == H - 1 && x == W - 1 && ob == N_OB - 1)) begin
        failures++;
        $display("out_last wrong at (%0d,%0d) block %0d", y, x, ob);
      end
      if (ob == N_OB - 1) begin
        ob = 0;
        if (x == W - 1) begin
          x = 0;
          y++;
        end else x++;
      end else ob++;
      if (y == H) begin
        checks++;
        if (stalls == 0) failures++;
        $display("image done: %0d transfers, %0d output stalls", outs, stalls);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule

// tb_tlmac_pe_full: the processing element at its default size (3x3 layer of
// a 3-bit ResNet-18 block with 256 channels: D_S = 1024 steps, D_P = 192
// outputs, 512 LUT arrays, 64-input switches). A handful of operations at
// random steps, including the first and last step, are run back to back;
// all 192 partial sums of each are compared with an integer reference built
// from the layer tables, and the latency of B_A + 1 cycles is checked.
// Then one complete window position is processed: all 1024 steps, i.e. all
// 256 input channels for each of the 4 blocks of 64 output channels, with the
// partial sums of each block carried from step to step as the partial-sum
// buffer would. The final 4 x 192 sums are compared with the reference.
module tb_tlmac_pe_full;
  import tlmac_pkg::*;
  localparam int G = DEF_G, B_W = DEF_B_W, B_A = DEF_B_A, B_P = DEF_B_P;
  localparam int N_ARR = DEF_N_ARR, D_S = DEF_D_S, D_P = DEF_D_P, MUX_IN = DEF_MUX_IN;
  localparam int N_CLUS = n_clus(G), STEP_W = $clog2(D_S);
  localparam int N_OPS = 8;

  typedef logic [D_P-1:0][B_P-1:0] vec_t;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [G-1:0][B_A-1:0] act = '0;
  logic [STEP_W-1:0] step = '0;
  vec_t psum_in = '0, psum_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_pe dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .act(act), .step(step), .psum_in(psum_in),
    .out_valid(out_valid), .out_ready(out_ready), .psum_out(psum_out));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_w(int t, int p, int g);
    int s, k, e;
    s = tlmac_layer_pkg::layer_step_sel(0, t, N_CLUS);
    k = tlmac_layer_pkg::layer_switch_sel(0, t, p, MUX_IN);
    e = tlmac_layer_pkg::layer_conn(0, p, k, N_ARR);
    return tlmac_layer_pkg::layer_weight(0, e, s, g, B_W);
  endfunction

  initial begin
    vec_t exp;
    int sum, t, n_bad;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < N_OPS; op++) begin
      t = (op == 0) ? 0 : (op == 1) ? D_S - 1 : $urandom_range(D_S - 1);
      for (int g = 0; g < G; g++) act[g] = B_A'($urandom);
      for (int p = 0; p < D_P; p++) psum_in[p] = B_P'(int'($urandom_range(20000)) - 10000);
      step = STEP_W'(t);
      for (int p = 0; p < D_P; p++) begin
        sum = int'($signed(psum_in[p]));
        for (int g = 0; g < G; g++) sum += int'(act[g]) * ref_w(t, p, g);
        exp[p] = B_P'(sum);
      end
      in_valid = 1;
      #1;
      checks++;
      if (!in_ready) begin failures++; $display("op %0d not accepted", op); end
      @(negedge clk);
      in_valid = 0;
      act = '1; step = '1; psum_in = '1;
      repeat (B_A) begin
        checks++;
        if (out_valid) begin failures++; $display("op %0d: result too early", op); end
        @(negedge clk);
      end
      checks++;
      if (!out_valid) begin failures++; $display("op %0d: no result after B_A+1 cycles", op); end
      n_bad = 0;
      for (int p = 0; p < D_P; p++) begin
        checks++;
        if (psum_out[p] != exp[p]) begin
          failures++;
          if (n_bad++ < 4) $display("op %0d step %0d p %0d: got %0d exp %0d", op, t, p, $signed(psum_out[p]), $signed(exp[p]));
        end
      end
    end
    // one full window position over all D_S steps
    begin
      localparam int N_OB = D_S / 256;   // output-channel blocks for 256 input channels
      vec_t acc [N_OB];
      int   ref_acc [N_OB][D_P];
      int   ic, ob;
      for (int o = 0; o < N_OB; o++) begin
        acc[o] = '0;
        for (int p = 0; p < D_P; p++) ref_acc[o][p] = 0;
      end
      for (int t0 = 0; t0 < D_S; t0++) begin
        ic = t0 / N_OB;
        ob = t0 % N_OB;
        for (int g = 0; g < G; g++) act[g] = B_A'($urandom);
        for (int p = 0; p < D_P; p++)
          for (int g = 0; g < G; g++) ref_acc[ob][p] += int'(act[g]) * ref_w(t0, p, g);
        step = STEP_W'(t0);
        psum_in = acc[ob];
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        repeat (B_A) @(negedge clk);
        checks++;
        if (!out_valid) begin failures++; $display("window step %0d: no result", t0); end
        acc[ob] = psum_out;
      end
      n_bad = 0;
      for (int o = 0; o < N_OB; o++)
        for (int p = 0; p < D_P; p++) begin
          checks++;
          if (acc[o][p] != B_P'(ref_acc[o][p])) begin
            failures++;
            if (n_bad++ < 4) $display("window block %0d p %0d: got %0d exp %0d", o, p, $signed(acc[o][p]), ref_acc[o][p]);
          end
        end
      $display("window position: %0d steps, %0d partial sums checked", D_S, N_OB * D_P);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tlmac_pe: end-to-end test of the processing element at reduced size.
//
// A driver offers operations (random activations, steps and partial sums,
// with random gaps) and a monitor takes results with random back-pressure.
// A reference model computes every output independently: it looks up the
// effective weight W[t][p][g] in the layer tables and forms
// psum_in + sum_g act[g] * W on integers, wrapped to B_P bits. The test also
// checks the latency (B_A + 1 cycles from accept to out_valid), chains all
// D_S steps of one output position through psum_in to mimic a full
// accumulation over the sequential dimension, and counts the mechanisms it
// exercised: output stalls, input waits, back-to-back operations, results
// needing the sign (negative sums) and the top activation bit.
module tb_tlmac_pe;
  import tlmac_pkg::*;
  localparam int G = 3, B_W = 3, B_A = 3, B_P = 18;
  localparam int N_ARR = 32, D_S = 64, D_P = 12, MUX_IN = 8, LAYER = 1;
  localparam int N_CLUS = n_clus(G);
  localparam int N_RANDOM = 300;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [G-1:0][B_A-1:0] act = '0;
  logic [5:0] step = '0;
  logic [D_P-1:0][B_P-1:0] psum_in = '0, psum_out;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;

  tlmac_pe #(.G(G), .B_W(B_W), .B_A(B_A), .B_P(B_P), .N_ARR(N_ARR), .D_S(D_S),
             .D_P(D_P), .MUX_IN(MUX_IN), .LAYER(LAYER)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .act(act), .step(step), .psum_in(psum_in),
    .out_valid(out_valid), .out_ready(out_ready), .psum_out(psum_out));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_w(int t, int p, int g);
    int s, k, e;
    s = tlmac_layer_pkg::layer_step_sel(LAYER, t, N_CLUS);
    k = tlmac_layer_pkg::layer_switch_sel(LAYER, t, p, MUX_IN);
    e = tlmac_layer_pkg::layer_conn(LAYER, p, k, N_ARR);
    return tlmac_layer_pkg::layer_weight(LAYER, e, s, g, B_W);
  endfunction

  // expected results and accept times, in order
  typedef logic [D_P-1:0][B_P-1:0] vec_t;
  vec_t exp_q[$];
  int   t_q[$];
  int n_out_stall = 0, n_in_wait = 0, n_b2b = 0, n_neg = 0, n_msb = 0, n_chain = 0;
  int n_done = 0;
  bit chain_mode = 0;
  vec_t chain_acc;
  int last_accept = -100;

  // reference: one operation
  function automatic vec_t ref_op(logic [G-1:0][B_A-1:0] a, int t, vec_t pin);
    vec_t r;
    int sum;
    for (int p = 0; p < D_P; p++) begin
      sum = int'(signed'(pin[p]));
      for (int g = 0; g < G; g++) sum += int'(a[g]) * ref_w(t, p, g);
      r[p] = B_P'(sum);
    end
    return r;
  endfunction

  // monitor, sampling at the clock edge: latency, accepted operations and
  // results taken (pre-edge values, as the DUT sees them)
  logic out_valid_d = 0;
  always @(posedge clk) begin
    cyc++;
    out_valid_d <= out_valid;
    if (rst_n) begin
      if (out_valid && !out_valid_d) begin
        checks++;
        if (t_q.size() == 0 || cyc - t_q[0] != B_A + 1) begin
          failures++;
          $display("latency wrong at cycle %0d", cyc);
        end
      end
      if (out_valid && out_ready) begin
        vec_t e;
        e = exp_q.pop_front();
        void'(t_q.pop_front());
        checks++;
        if (psum_out != e) begin
          failures++;
          $display("result %0d mismatch", n_done);
          for (int p = 0; p < D_P; p++)
            if (psum_out[p] != e[p]) $display("  p %0d got %0d exp %0d", p, $signed(psum_out[p]), $signed(e[p]));
        end
        for (int p = 0; p < D_P; p++) if (psum_out[p][B_P-1]) begin n_neg++; break; end
        if (chain_mode) chain_acc = psum_out;
        n_done++;
      end
      if (out_valid && !out_ready) n_out_stall++;
      if (in_valid && in_ready) begin
        if (cyc - last_accept == B_A + 1) n_b2b++;
        last_accept = cyc;
        t_q.push_back(cyc);
      end
    end
  end

  // random back-pressure, changed between edges
  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  task automatic offer(logic [G-1:0][B_A-1:0] a, int t, vec_t pin);
    act = a; step = 6'(t); psum_in = pin; in_valid = 1;
    exp_q.push_back(ref_op(a, t, pin));
    for (int g = 0; g < G; g++) if (a[g][B_A-1]) n_msb++;
    forever begin
      @(posedge clk);
      if (in_ready) break;
      n_in_wait++;
    end
    @(negedge clk);
    in_valid = 0;
    act = '1; step = '1; psum_in = '1;  // must not matter after accept
  endtask

  initial begin
    logic [G-1:0][B_A-1:0] a;
    vec_t pin;
    int ref_chain [D_P];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random operations
    for (int i = 0; i < N_RANDOM; i++) begin
      for (int g = 0; g < G; g++) a[g] = B_A'($urandom);
      for (int p = 0; p < D_P; p++) pin[p] = B_P'(int'($urandom_range(4000)) - 2000);
      offer(a, (i < D_S) ? i : $urandom_range(D_S - 1), pin);
      if ($urandom_range(3) == 0) repeat ($urandom_range(3)) @(negedge clk);
    end
    wait (exp_q.size() == 0);
    // one output position through all D_S steps, chaining psum
    chain_mode = 1;
    chain_acc = '0;
    for (int p = 0; p < D_P; p++) ref_chain[p] = 0;
    for (int t = 0; t < D_S; t++) begin
      for (int g = 0; g < G; g++) a[g] = B_A'($urandom);
      for (int p = 0; p < D_P; p++)
        for (int g = 0; g < G; g++) ref_chain[p] += int'(a[g]) * ref_w(t, p, g);
      offer(a, t, chain_acc);
      wait (exp_q.size() == 0);
      @(negedge clk);
      n_chain++;
    end
    for (int p = 0; p < D_P; p++) begin
      checks++;
      if (chain_acc[p] != B_P'(ref_chain[p])) begin
        failures++;
        $display("chain p %0d got %0d exp %0d", p, $signed(chain_acc[p]), ref_chain[p]);
      end
    end
    // every mechanism must have happened
    checks += 6;
    if (n_out_stall == 0) begin failures++; $display("no output stall"); end
    if (n_in_wait == 0)   begin failures++; $display("no input wait"); end
    if (n_b2b == 0)       begin failures++; $display("no back-to-back operation"); end
    if (n_neg == 0)       begin failures++; $display("no negative result"); end
    if (n_msb == 0)       begin failures++; $display("no activation with top bit set"); end
    if (n_chain != D_S)   begin failures++; $display("chain incomplete"); end
    $display("results=%0d out_stalls=%0d in_waits=%0d back_to_back=%0d negative=%0d msb=%0d chain_steps=%0d",
             n_done, n_out_stall, n_in_wait, n_b2b, n_neg, n_msb, n_chain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

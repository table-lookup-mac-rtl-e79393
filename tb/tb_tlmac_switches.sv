// tb_tlmac_switches: checks the routing from LUT arrays to outputs. Random
// pool results are applied after each step is read; output p must equal the
// result of the array that the layer's wiring list connects to the input the
// switch table selects for that step. Also checks that the outputs' fan-ins
// differ, so multiplexers of several sizes are exercised.
module tb_tlmac_switches;
  localparam int N_ARR = 16, D_P = 8, MUX_IN = 8, B_L = 5, D_S = 32, LAYER = 5;
  logic clk = 0, en;
  logic [4:0] step;
  logic [N_ARR-1:0][B_L-1:0] mac;
  logic [D_P-1:0][B_L-1:0] out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_switches #(.N_ARR(N_ARR), .D_P(D_P), .MUX_IN(MUX_IN), .B_L(B_L), .D_S(D_S), .LAYER(LAYER)) dut (
    .clk(clk), .en(en), .step(step), .mac(mac), .out(out));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    // the wiring must give outputs different fan-ins, each at most MUX_IN
    begin
      int fi, fi_min, fi_max, n_bad;
      fi_min = MUX_IN; fi_max = 0; n_bad = 0;
      for (int p = 0; p < D_P; p++) begin
        fi = tlmac_layer_pkg::layer_fanin(LAYER, p, MUX_IN);
        if (fi < fi_min) fi_min = fi;
        if (fi > fi_max) fi_max = fi;
        if (fi < 1 || fi > MUX_IN) n_bad++;
      end
      checks += 2;
      if (fi_min == fi_max) begin failures++; $display("fan-in does not vary"); end
      if (n_bad != 0) begin failures++; $display("fan-in out of range"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, k, e;
    en = 0; step = 0; mac = '0;
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      t = (i < D_S) ? i : $urandom_range(D_S - 1);
      step = 5'(t); en = 1;
      @(negedge clk);
      en = 0;
      for (int r = 0; r < 3; r++) begin
        for (int a = 0; a < N_ARR; a++) mac[a] = B_L'($urandom);
        #1;
        for (int p = 0; p < D_P; p++) begin
          k = tlmac_layer_pkg::layer_switch_sel(LAYER, t, p, MUX_IN);
          e = tlmac_layer_pkg::layer_conn(LAYER, p, k, N_ARR);
          checks++;
          if (out[p] != mac[e]) begin
            failures++;
            $display("step %0d out %0d: got %0d exp arr %0d = %0d", t, p, out[p], e, mac[e]);
          end
        end
      end
      @(negedge clk);
    end
    // the wiring must give outputs different fan-ins, each at most MUX_IN
    begin
      int fi, fi_min, fi_max, n_bad;
      fi_min = MUX_IN; fi_max = 0; n_bad = 0;
      for (int p = 0; p < D_P; p++) begin
        fi = tlmac_layer_pkg::layer_fanin(LAYER, p, MUX_IN);
        if (fi < fi_min) fi_min = fi;
        if (fi > fi_max) fi_max = fi;
        if (fi < 1 || fi > MUX_IN) n_bad++;
      end
      checks += 2;
      if (fi_min == fi_max) begin failures++; $display("fan-in does not vary"); end
      if (n_bad != 0) begin failures++; $display("fan-in out of range"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

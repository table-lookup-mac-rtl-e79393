// tb_tlmac_pool: checks every LUT array of a reduced pool against the layer's
// weights. For random steps the select index is looked up independently, and
// for each activation bit pattern every array result is compared with the
// integer sum of the selected weight group's weights.
module tb_tlmac_pool;
  import tlmac_pkg::*;
  localparam int G = 3, B_W = 3, N_ARR = 16, D_S = 32, LAYER = 2;
  localparam int N_CLUS = n_clus(G), B_L = lut_array_bits(B_W, G);

  logic clk = 0, en;
  logic [4:0] step;
  logic [G-1:0] abit;
  logic [N_ARR-1:0][B_L-1:0] mac;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_pool #(.G(G), .B_W(B_W), .N_ARR(N_ARR), .D_S(D_S), .LAYER(LAYER)) dut (
    .clk(clk), .en(en), .step(step), .abit(abit), .mac(mac));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, exp;
    en = 0; step = 0; abit = 0;
    @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      step = 5'(i < D_S ? i : $urandom_range(D_S - 1));
      s = tlmac_layer_pkg::layer_step_sel(LAYER, int'(step), N_CLUS);
      en = 1;
      @(negedge clk);
      en = 0;
      step = 5'($urandom_range(D_S - 1));  // must not matter after the read
      for (int a = 0; a < (1 << G); a++) begin
        abit = G'(a);
        #1;
        for (int e = 0; e < N_ARR; e++) begin
          exp = 0;
          for (int g = 0; g < G; g++)
            if ((a >> g) & 1) exp += tlmac_layer_pkg::layer_weight(LAYER, e, s, g, B_W);
          checks++;
          if (int'(signed'(mac[e])) != exp) begin
            failures++;
            $display("arr %0d s %0d a %0d: got %0d exp %0d", e, s, a, signed'(mac[e]), exp);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

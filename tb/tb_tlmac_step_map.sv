// tb_tlmac_step_map: checks the step-to-select ROM. Random steps are read
// with en high and the output compared one cycle later with the layer table;
// cycles with en low must leave the output unchanged.
module tb_tlmac_step_map;
  localparam int D_S = 64, N_CLUS = 8, LAYER = 3;
  logic clk = 0, en;
  logic [5:0] step;
  logic [2:0] sel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_step_map #(.D_S(D_S), .N_CLUS(N_CLUS), .LAYER(LAYER)) dut (.clk(clk), .en(en), .step(step), .sel(sel));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    int distinct [8];
    en = 0; step = 0;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      step = 6'(i < D_S ? i : $urandom_range(D_S - 1));
      en = 1;
      exp = tlmac_layer_pkg::layer_step_sel(LAYER, int'(step), N_CLUS);
      distinct[exp] = 1;
      @(negedge clk);
      checks++;
      if (int'(sel) != exp) begin failures++; $display("step %0d: sel %0d exp %0d", step, sel, exp); end
      en = 0; step = 6'($urandom_range(D_S - 1));
      @(negedge clk);
      checks++;
      if (int'(sel) != exp) begin failures++; $display("hold failed: sel %0d exp %0d", sel, exp); end
    end
    // The table must actually use several clusters.
    checks++;
    if (distinct.sum() < 4) begin failures++; $display("too few clusters used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

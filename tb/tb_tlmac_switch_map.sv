// tb_tlmac_switch_map: checks the per-step multiplexer selects. After each
// read every output's select is compared with the layer table; with en low
// the word must be held.
module tb_tlmac_switch_map;
  localparam int D_S = 32, D_P = 6, MUX_IN = 4, LAYER = 4;
  logic clk = 0, en;
  logic [4:0] step;
  logic [D_P-1:0][1:0] sel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_switch_map #(.D_S(D_S), .D_P(D_P), .MUX_IN(MUX_IN), .LAYER(LAYER)) dut (
    .clk(clk), .en(en), .step(step), .sel(sel));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    en = 0; step = 0;
    @(negedge clk);
    for (int i = 0; i < 100; i++) begin
      t = (i < D_S) ? i : $urandom_range(D_S - 1);
      step = 5'(t); en = 1;
      @(negedge clk);
      en = 0; step = 5'($urandom_range(D_S - 1));
      @(negedge clk);
      for (int p = 0; p < D_P; p++) begin
        checks++;
        if (int'(sel[p]) != tlmac_layer_pkg::layer_switch_sel(LAYER, t, p, MUX_IN)) begin
          failures++;
          $display("step %0d out %0d: sel %0d", t, p, sel[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

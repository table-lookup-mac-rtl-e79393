// tb_tlmac_act_serialiser: loads random activations, then walks b over every
// bit and checks that abit[g] equals bit b of activation g, including after
// the input changes without a load.
module tb_tlmac_act_serialiser;
  localparam int G = 3, B_A = 4;
  logic clk = 0, load;
  logic [G-1:0][B_A-1:0] act;
  logic [1:0] b;
  logic [G-1:0] abit;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_act_serialiser #(.G(G), .B_A(B_A)) dut (.clk(clk), .load(load), .act(act), .b(b), .abit(abit));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [G];
    load = 0; act = '0; b = 0;
    @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      for (int g = 0; g < G; g++) begin v[g] = $urandom_range((1 << B_A) - 1); act[g] = B_A'(v[g]); end
      load = 1;
      @(negedge clk);
      load = 0;
      act = '1;  // not loaded, must be ignored
      for (int bb = 0; bb < B_A; bb++) begin
        b = 2'(bb);
        #1;
        for (int g = 0; g < G; g++) begin
          checks++;
          if (abit[g] != ((v[g] >> bb) & 1)) begin failures++; $display("g %0d b %0d wrong", g, bb); end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

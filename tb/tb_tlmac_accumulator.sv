// tb_tlmac_accumulator: random operations of one load followed by B_A
// accumulate cycles, with idle cycles mixed in. The register is compared
// every cycle with psum_in + sum_b 2^b * mac_b computed on integers and
// wrapped to B_P bits.
module tb_tlmac_accumulator;
  localparam int B_L = 5, B_P = 18, B_A = 3;
  logic clk = 0, load, acc_en;
  logic [1:0] b;
  logic [B_L-1:0] mac;
  logic [B_P-1:0] psum_in, psum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tlmac_accumulator #(.B_L(B_L), .B_P(B_P), .B_A(B_A)) dut (
    .clk(clk), .load(load), .acc_en(acc_en), .b(b), .mac(mac), .psum_in(psum_in), .psum(psum));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int exp);
    checks++;
    if (psum != B_P'(exp)) begin failures++; $display("psum %0d exp %0d", signed'(psum), exp); end
  endtask

  initial begin
    int exp, m;
    load = 0; acc_en = 0; b = 0; mac = 0; psum_in = 0;
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      exp = int'($urandom_range(2 * 65536)) - 65536;
      if (i == 1) exp = 131071;    // wrap past the top
      psum_in = B_P'(exp); load = 1;
      @(negedge clk);
      load = 0;
      check(exp);
      for (int bb = 0; bb < B_A; bb++) begin
        m = int'($urandom_range(31)) - 16;
        mac = B_L'(m); b = 2'(bb); acc_en = 1;
        exp += m * (1 << bb);
        @(negedge clk);
        acc_en = 0;
        check(exp);
        if ($urandom_range(3) == 0) begin
          mac = B_L'($urandom); @(negedge clk); check(exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

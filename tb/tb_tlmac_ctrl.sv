// tb_tlmac_ctrl: checks the controller's sequencing. For each operation the
// cycle of acceptance, the b sequence 0..B_A-1 with acc_en, the latency of
// B_A + 1 cycles to out_valid, holding of the result under back-pressure and
// acceptance of a new operation in the cycle a result is taken.
module tb_tlmac_ctrl;
  localparam int B_A = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, load, acc_en;
  logic [1:0] b;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_stall = 0, n_b2b = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  tlmac_ctrl #(.B_A(B_A)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .out_valid(out_valid), .out_ready(out_ready), .load(load), .acc_en(acc_en), .b(b));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("cycle %0d: %s", cyc, what); end
  endtask

  initial begin
    int t_acc, stall;
    bit b2b;
    b2b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_true(in_ready && !out_valid && !acc_en, "idle after reset");
    for (int op = 0; op < 60; op++) begin
      // offer an operation (already offered if taken back to back)
      in_valid = 1;
      #1;
      if (!b2b) begin
        expect_true(in_ready && load, "accept when idle");
      end
      t_acc = cyc;
      @(negedge clk);
      in_valid = 0;
      for (int bb = 0; bb < B_A; bb++) begin
        expect_true(acc_en && int'(b) == bb && !out_valid && !in_ready, $sformatf("run bit %0d", bb));
        @(negedge clk);
      end
      expect_true(out_valid && !acc_en, "result after B_A+1 cycles");
      expect_true(cyc - t_acc == B_A + 1, "latency");
      stall = $urandom_range(2);
      for (int s = 0; s < stall; s++) begin
        out_ready = 0;
        #1;
        expect_true(!in_ready, "no accept while result waits");
        @(negedge clk);
        expect_true(out_valid, "result held");
        n_stall++;
      end
      out_ready = 1;
      b2b = ($urandom_range(1) == 1);
      if (b2b) begin
        in_valid = 1;
        #1;
        expect_true(in_ready && load, "accept while result taken");
        n_b2b++;
        @(negedge clk);
        out_ready = 0;
        // the operation accepted above is now running; replay its checks
        t_acc = cyc - 1;
        in_valid = 0;
        for (int bb = 0; bb < B_A; bb++) begin
          expect_true(acc_en && int'(b) == bb, $sformatf("b2b run bit %0d", bb));
          @(negedge clk);
        end
        expect_true(out_valid && cyc - t_acc == B_A + 1, "b2b latency");
        out_ready = 1;
        @(negedge clk);
        out_ready = 0;
        b2b = 0;
      end else begin
        @(negedge clk);
        out_ready = 0;
        expect_true(!out_valid && in_ready, "idle after result taken");
      end
    end
    expect_true(n_stall > 0, "stall exercised");
    expect_true(n_b2b > 0, "back-to-back exercised");
    $display("stalls=%0d back_to_back=%0d", n_stall, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

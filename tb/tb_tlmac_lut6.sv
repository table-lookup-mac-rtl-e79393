// tb_tlmac_lut6: exhaustive check of the six-input lookup table.
// Two instances with different truth tables; every address is applied and
// the output compared with the truth-table bit computed by shifting INIT.
module tb_tlmac_lut6;
  localparam logic [63:0] INIT_A = 64'hDEAD_BEEF_0123_4567;
  localparam logic [63:0] INIT_B = 64'h8000_0000_0000_0001;

  logic [5:0] addr;
  logic       oa, ob;
  int checks = 0, failures = 0;

  tlmac_lut6 #(.INIT(INIT_A)) dut_a (.addr(addr), .o(oa));
  tlmac_lut6 #(.INIT(INIT_B)) dut_b (.addr(addr), .o(ob));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      addr = 6'(a);
      #1;
      checks += 2;
      if (oa !== ((INIT_A >> a) & 64'd1) != 0) begin failures++; $display("A addr %0d: got %0b", a, oa); end
      if (ob !== ((INIT_B >> a) & 64'd1) != 0) begin failures++; $display("B addr %0d: got %0b", a, ob); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

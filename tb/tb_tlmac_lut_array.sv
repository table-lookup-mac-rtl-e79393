// tb_tlmac_lut_array: checks that a LUT array computes the bit-plane MAC.
// Two configurations (G=3 with 3-bit weights, G=2 with 4-bit weights). For
// every select index and every activation bit pattern the output is compared
// with the integer sum of the weights whose activation bit is set.
module tb_tlmac_lut_array;
  import tlmac_pkg::*;

  // Configuration A: a 3x3 layer with 3-bit weights.
  localparam int GA = 3, BWA = 3, NCA = n_clus(GA), BLA = lut_array_bits(BWA, GA);
  // Configuration B: G = 2, 4-bit weights (the paper's LUT-count example).
  localparam int GB = 2, BWB = 4, NCB = n_clus(GB), BLB = lut_array_bits(BWB, GB);

  function automatic int wt(int cfg, int s, int g, int bw);
    return tlmac_layer_pkg::layer_weight(7 + cfg, 5, s, g, bw);
  endfunction

  function automatic logic [NCA*GA*BWA-1:0] pack_a();
    logic [NCA*GA*BWA-1:0] v;
    v = '0;
    for (int s = 0; s < NCA; s++) for (int g = 0; g < GA; g++)
      v[(s*GA+g)*BWA +: BWA] = BWA'(wt(0, s, g, BWA));
    return v;
  endfunction

  function automatic logic [NCB*GB*BWB-1:0] pack_b();
    logic [NCB*GB*BWB-1:0] v;
    v = '0;
    for (int s = 0; s < NCB; s++) for (int g = 0; g < GB; g++)
      v[(s*GB+g)*BWB +: BWB] = BWB'(wt(1, s, g, BWB));
    return v;
  endfunction

  logic [GA-1:0]   abit_a;  logic [5-GA:0] sel_a;  logic signed [BLA-1:0] mac_a;
  logic [GB-1:0]   abit_b;  logic [5-GB:0] sel_b;  logic signed [BLB-1:0] mac_b;
  int checks = 0, failures = 0;

  tlmac_lut_array #(.G(GA), .B_W(BWA), .WEIGHTS(pack_a())) dut_a (.abit(abit_a), .sel(sel_a), .mac(mac_a));
  tlmac_lut_array #(.G(GB), .B_W(BWB), .WEIGHTS(pack_b())) dut_b (.abit(abit_b), .sel(sel_b), .mac(mac_b));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    for (int s = 0; s < NCA; s++) for (int a = 0; a < (1 << GA); a++) begin
      sel_a = (6-GA)'(s); abit_a = GA'(a);
      #1;
      exp = 0;
      for (int g = 0; g < GA; g++) if ((a >> g) & 1) exp += wt(0, s, g, BWA);
      checks++;
      if (int'(mac_a) != exp) begin failures++; $display("A s=%0d a=%0d got %0d exp %0d", s, a, mac_a, exp); end
    end
    for (int s = 0; s < NCB; s++) for (int a = 0; a < (1 << GB); a++) begin
      sel_b = (6-GB)'(s); abit_b = GB'(a);
      #1;
      exp = 0;
      for (int g = 0; g < GB; g++) if ((a >> g) & 1) exp += wt(1, s, g, BWB);
      checks++;
      if (int'(mac_b) != exp) begin failures++; $display("B s=%0d a=%0d got %0d exp %0d", s, a, mac_b, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

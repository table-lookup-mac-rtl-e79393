// tb_tlmac_conv_layer: workload test of the layer engine. A reduced 3x3
// convolution layer (4 input channels, 8 output channels, 5 x 5 map, 4 output
// channels per element pass) is run with 2-, 3- and 4-bit weights and
// activations, the three precisions of the ResNet-18 blocks the design
// targets, two images each, under random input gaps and output back-pressure.
// A fourth run uses stride 2 on a 6 x 5 map (3 x 3 output), as in the first
// layer of a down-sampling ResNet block.
// Every output sum is compared with a direct convolution. The test also
// fails if any output is missing, or if back-pressure or input waiting never
// happened.
module tb_tlmac_conv_layer;
  logic clk = 0, rst_n = 0;
  logic d2, d3, d4, ds;
  int c2, c3, c4, cs, f2, f3, f4, fs, o2, o3, o4, os, s2, s3, s4, ss, w2, w3, w4, ws;
  int checks, failures;

  always #5 clk = ~clk;

  tb_conv_check #(.B_W(2), .B_A(2), .LAYER(12)) u2 (.clk(clk), .rst_n(rst_n), .done(d2),
    .checks(c2), .failures(f2), .outs(o2), .stalls(s2), .waits(w2));
  tb_conv_check #(.B_W(3), .B_A(3), .LAYER(13)) u3 (.clk(clk), .rst_n(rst_n), .done(d3),
    .checks(c3), .failures(f3), .outs(o3), .stalls(s3), .waits(w3));
  tb_conv_check #(.B_W(4), .B_A(4), .LAYER(14)) u4 (.clk(clk), .rst_n(rst_n), .done(d4),
    .checks(c4), .failures(f4), .outs(o4), .stalls(s4), .waits(w4));
  tb_conv_check #(.B_W(3), .B_A(3), .H(6), .W(5), .STRIDE(2), .LAYER(15)) us (.clk(clk), .rst_n(rst_n), .done(ds),
    .checks(cs), .failures(fs), .outs(os), .stalls(ss), .waits(ws));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3 + c4 + cs, f2 + f3 + f4 + fs + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d2 && d3 && d4 && ds);
    repeat (2) @(posedge clk);
    checks = c2 + c3 + c4 + cs + 3;
    failures = f2 + f3 + f4 + fs;
    // 2 images x 5 x 5 pixels x 2 channel blocks
    // stride 2: 2 images x 3 x 3 pixels x 2 channel blocks
    if (o2 != 100 || o3 != 100 || o4 != 100 || os != 36) failures++;
    if (s2 == 0 || s3 == 0 || s4 == 0 || ss == 0) failures++;
    if (w2 == 0 || w3 == 0 || w4 == 0 || ws == 0) failures++;
    $display("outputs %0d/%0d/%0d/%0d, output stalls %0d/%0d/%0d/%0d, input waits %0d/%0d/%0d/%0d",
             o2, o3, o4, os, s2, s3, s4, ss, w2, w3, w4, ws);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

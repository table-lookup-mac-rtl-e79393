// tlmac_lut6: one six-input lookup table.
//
// The output is bit `addr` of the 64-bit truth table INIT, so bit 0 of INIT is
// the output for address 0. This is the function of the LUT-6 primitive of the
// target FPGA fabric; written as a table read it maps onto exactly one LUT-6
// in synthesis, while staying vendor-neutral. Purely combinational.
module tlmac_lut6 #(
  parameter logic [63:0] INIT = 64'h0   // truth table, set per LUT at compile time
) (
  input  logic [5:0] addr,   // the six LUT inputs
  output logic       o       // INIT[addr]
);

  assign o = INIT[addr];

endmodule

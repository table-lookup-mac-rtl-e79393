// tlmac_step_map: the pool's mapping memory.
//
// Read-only memory that translates the step index of an operation into the
// weight-group select index s shared by all LUT arrays. The step-to-cluster
// assignment is fixed by the compile flow and comes from
// tlmac_layer_pkg::layer_step_sel. Synchronous read with enable, as block
// RAM: sel shows rom[step] one cycle after a cycle with en high and holds it
// until the next such cycle.
module tlmac_step_map
  import tlmac_pkg::*;
#(
  parameter int D_S    = DEF_D_S,
  parameter int N_CLUS = n_clus(DEF_G),
  parameter int LAYER  = 0,
  localparam int SEL_W  = $clog2(N_CLUS),
  localparam int STEP_W = $clog2(D_S)
) (
  input  logic              clk,
  input  logic              en,    // read strobe (operation accepted)
  input  logic [STEP_W-1:0] step,  // step index, 0 .. D_S-1
  output logic [SEL_W-1:0]  sel    // select index s
);

  logic [SEL_W-1:0] rom [D_S];

  initial begin
    for (int t = 0; t < D_S; t++)
      rom[t] = SEL_W'(tlmac_layer_pkg::layer_step_sel(LAYER, t, N_CLUS));
  end

  always_ff @(posedge clk) begin
    if (en) sel <= rom[step];
  end

endmodule

// tlmac_switches: the switch stage between LUT pool and accumulators.
//
// One multiplexer per parallel output. Multiplexer p is wired to only
// FANIN(p) <= MUX_IN of the N_ARR LUT arrays, a static subset fixed by the
// compile flow's routing optimisation (tlmac_layer_pkg::layer_fanin and
// layer_conn), rather than to all of them; each multiplexer is built with
// exactly its own number of inputs. Which input it forwards changes with the
// step and is read from the switch map when an operation is accepted.
//
// Following the paper: sparse static wiring with per-output fan-in and a
// step-indexed select ROM. Own choice: the switch map stores every select
// with the width of the largest fan-in, MUX_IN.
//
// Timing: out is combinational in mac and valid from the cycle after en.
module tlmac_switches
  import tlmac_pkg::*;
#(
  parameter int N_ARR  = DEF_N_ARR,
  parameter int D_P    = DEF_D_P,
  parameter int MUX_IN = DEF_MUX_IN,
  parameter int B_L    = lut_array_bits(DEF_B_W, DEF_G),
  parameter int D_S    = DEF_D_S,
  parameter int LAYER  = 0,
  localparam int MSEL_W = $clog2(MUX_IN),
  localparam int STEP_W = $clog2(D_S)
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic [STEP_W-1:0]          step,
  input  logic [N_ARR-1:0][B_L-1:0]  mac,   // LUT pool results
  output logic [D_P-1:0][B_L-1:0]    out    // selected result per output
);

  logic [D_P-1:0][MSEL_W-1:0] sel;

  tlmac_switch_map #(.D_S(D_S), .D_P(D_P), .MUX_IN(MUX_IN), .LAYER(LAYER)) u_map (
    .clk (clk),
    .en  (en),
    .step(step),
    .sel (sel)
  );

  for (genvar p = 0; p < D_P; p++) begin : g_mux
    localparam int FANIN = tlmac_layer_pkg::layer_fanin(LAYER, p, MUX_IN);
    localparam int FW    = (FANIN > 1) ? $clog2(FANIN) : 1;
    logic [FANIN-1:0][B_L-1:0] cand;
    for (genvar k = 0; k < FANIN; k++) begin : g_in
      localparam int E = tlmac_layer_pkg::layer_conn(LAYER, p, k, N_ARR);
      assign cand[k] = mac[E];
    end
    if (FANIN == 1) begin : g_wire
      assign out[p] = cand[0];
    end else begin : g_sel
      // the switch map only holds selects below FANIN
      assign out[p] = cand[sel[p][FW-1:0]];
    end
  end

  initial begin
    assert (MUX_IN >= 2 && MUX_IN <= N_ARR) else $error("MUX_IN must be 2..N_ARR");
  end

endmodule

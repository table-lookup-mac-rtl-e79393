// tlmac_conv_layer: one 3x3 convolution layer (stride 1 or 2, zero padding 1)
// computed by a single TLMAC processing element, with the layer control
// loops and the partial-sum buffer around it.
//
// What it does. The input feature map (H x W) arrives pixel by pixel in
// row-major order, each pixel carrying all D_I channels. The output feature
// map (HO x WO, HO = (H - 1) / STRIDE + 1) leaves in the same order, each
// transfer carrying OC_PAR channels of one pixel as raw B_P-bit signed sums
// (no batch normalisation or requantisation).
//
// How it works. One input row r is first taken into a line buffer. A 1 x 3
// window then slides along the row, centred on columns 0, STRIDE, 2*STRIDE..;
// at every window position all D_S = D_I * D_O / OC_PAR steps are issued to
// the element, step t covering input channel ic = t / N_OB and output-channel
// block ob = t % N_OB. Output p = kr * OC_PAR + c of the element is kernel
// row kr of output channel ob * OC_PAR + c and belongs to output row
// y = (r + 1 - kr) / STRIDE when that division is exact and y is inside the
// map; other kernel rows are dropped. With stride 1 one window thus serves
// three output rows at once. Partial sums live in a buffer of three row
// slots (slot y mod 3), each holding WO x N_OB words of OC_PAR sums. A sum is
// read as zero when its row is first touched (ic = 0 on input row
// max(STRIDE * y - 1, 0)), so no slot needs clearing. Output row y is
// complete after input row min(STRIDE * y + 1, H - 1); after each input row
// every row completed by it is sent out. Then the next image may start.
//
// Interface. in_valid/in_ready/in_data: one input pixel, in_data[c] is the
// unsigned activation of channel c. out_valid/out_ready/out_data: one block
// of OC_PAR output channels of one pixel, order y, x, ob; out_last marks the
// final transfer of an image. rst_n is synchronous, active low.
//
// Timing. Element operations are issued one at a time; each takes B_A + 2
// cycles here (issue, B_A bit-serial cycles, result), so a layer takes about
// H * WO * D_S * (B_A + 2) cycles plus the row loads and the output rows.
// Rows are not overlapped: loading, computing and sending alternate.
//
// Paper versus own choices. Following the paper: the window slides in
// row-major order and steps through D_S at each position, three output rows
// are computed in parallel, the first is then complete and the other two wait
// in a partial-sum memory outside the element; padding and stride are
// handled by the layer loops; the element is fed by valid/ready streams.
// Own choices, as the paper gives the controller only by its function: the
// step order (input channel major), the three-slot buffer, the line buffer,
// strides 1 and 2 only, the non-overlapped schedule, the stream formats and
// the default map size of 14 x 14 (the 256-channel stage of ResNet-18 on
// 224 x 224 images).
module tlmac_conv_layer
  import tlmac_pkg::*;
#(
  parameter int B_W    = DEF_B_W,
  parameter int B_A    = DEF_B_A,
  parameter int B_P    = DEF_B_P,
  parameter int D_I    = 256,          // input channels
  parameter int D_O    = 256,          // output channels
  parameter int OC_PAR = 64,           // output channels per element pass
  parameter int H      = 14,           // feature map height
  parameter int W      = 14,           // feature map width
  parameter int STRIDE = 1,            // 1 or 2
  parameter int N_ARR  = DEF_N_ARR,
  parameter int MUX_IN = DEF_MUX_IN,
  parameter int LAYER  = 0,
  localparam int G      = 3,
  localparam int D_P    = 3 * OC_PAR,
  localparam int N_OB   = D_O / OC_PAR,
  localparam int D_S    = D_I * N_OB,
  localparam int STEP_W = (D_S > 1) ? $clog2(D_S) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  output logic                            in_ready,
  input  logic [D_I-1:0][B_A-1:0]         in_data,
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic [OC_PAR-1:0][B_P-1:0]      out_data,
  output logic                            out_last
);
  localparam int HO  = (H - 1) / STRIDE + 1;    // output map height
  localparam int WO  = (W - 1) / STRIDE + 1;    // output map width
  localparam int XW  = (W > 1) ? $clog2(W) : 1;
  localparam int YW  = $clog2(H + 1);
  localparam int OBW = (N_OB > 1) ? $clog2(N_OB) : 1;
  localparam int NWD = WO * N_OB;                // words per row slot
  localparam int WDW = (NWD > 1) ? $clog2(NWD) : 1;

  typedef logic [OC_PAR-1:0][B_P-1:0] word_t;
  typedef enum logic [2:0] {S_LOAD, S_ISSUE, S_WAIT, S_EMIT} state_t;

  state_t            state;
  logic [YW-1:0]     r;          // input row being loaded or computed
  logic [XW-1:0]     x;          // load column
  logic [XW-1:0]     xo;         // window position (output column)
  logic [STEP_W-1:0] t;          // step
  logic [YW-1:0]     ey;         // output row being sent
  logic [XW-1:0]     ex;
  logic [OBW-1:0]    eob;

  logic [D_I-1:0][B_A-1:0] line [W];
  word_t                   pbuf [3][NWD];

  // processing element
  logic                    pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  logic [G-1:0][B_A-1:0]   pe_act;
  logic [D_P-1:0][B_P-1:0] pe_psum_in, pe_psum_out;

  tlmac_pe #(
    .G(G), .B_W(B_W), .B_A(B_A), .B_P(B_P), .N_ARR(N_ARR), .D_S(D_S),
    .D_P(D_P), .MUX_IN(MUX_IN), .LAYER(LAYER)
  ) u_pe (
    .clk(clk), .rst_n(rst_n),
    .in_valid(pe_in_valid), .in_ready(pe_in_ready),
    .act(pe_act), .step(t), .psum_in(pe_psum_in),
    .out_valid(pe_out_valid), .out_ready(pe_out_ready), .psum_out(pe_psum_out)
  );

  function automatic logic [1:0] slot(int y);
    return 2'(y % 3);
  endfunction

  // output row fed by kernel row kr from input row rr, or -1 if none
  function automatic int out_row(int rr, int kr);
    int n;
    n = rr + 1 - kr;
    return (n >= 0 && n % STRIDE == 0 && n / STRIDE < HO) ? n / STRIDE : -1;
  endfunction

  // input row after which output row y is complete
  function automatic int last_in_row(int y);
    return (STRIDE * y + 1 < H - 1) ? STRIDE * y + 1 : H - 1;
  endfunction

  // current step's input channel, output block and buffer word
  int ic, ob;
  logic [WDW-1:0] wd;
  assign ic = int'(t) / N_OB;
  assign ob = int'(t) % N_OB;
  assign wd = WDW'(int'(xo) * N_OB + ob);

  // window: three neighbouring pixels of channel ic, zero outside the map
  always_comb begin
    for (int g = 0; g < G; g++) begin
      int xx;
      xx = int'(xo) * STRIDE - 1 + g;
      pe_act[g] = (xx >= 0 && xx < W) ? line[xx][ic] : '0;
    end
  end

  // partial sums into the element: kernel row kr feeds output row
  // out_row(r, kr); a row's first contributor is input row
  // max(STRIDE * y - 1, 0) at ic = 0
  always_comb begin
    for (int kr = 0; kr < 3; kr++) begin
      int y;
      logic fresh;
      y = out_row(int'(r), kr);
      fresh = (ic == 0) && (int'(r) == ((STRIDE * y - 1 > 0) ? STRIDE * y - 1 : 0));
      for (int c = 0; c < OC_PAR; c++)
        pe_psum_in[kr*OC_PAR + c] = (y < 0 || fresh) ? '0 : pbuf[slot(y)][wd][c];
    end
  end

  assign in_ready     = (state == S_LOAD);
  assign pe_in_valid  = (state == S_ISSUE);
  assign pe_out_ready = (state == S_WAIT);
  assign out_valid    = (state == S_EMIT);
  assign out_data     = pbuf[slot(int'(ey))][int'(ex) * N_OB + int'(eob)];
  assign out_last     = (int'(ey) == HO - 1) && (int'(ex) == WO - 1) && (int'(eob) == N_OB - 1);

  // write back the element's results
  always_ff @(posedge clk) begin
    if (state == S_WAIT && pe_out_valid) begin
      for (int kr = 0; kr < 3; kr++) begin
        int y;
        y = out_row(int'(r), kr);
        if (y >= 0)
          for (int c = 0; c < OC_PAR; c++)
            pbuf[slot(y)][wd][c] <= pe_psum_out[kr*OC_PAR + c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) line[x] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      r <= '0; x <= '0; xo <= '0; t <= '0;
      ey <= '0; ex <= '0; eob <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (int'(x) == W - 1) begin
            x <= '0;
            state <= S_ISSUE;
          end else x <= x + 1'b1;
        end
        S_ISSUE: if (pe_in_ready) state <= S_WAIT;
        S_WAIT: if (pe_out_valid) begin
          state <= S_ISSUE;
          if (int'(t) == D_S - 1) begin
            t <= '0;
            if (int'(xo) == WO - 1) begin
              xo <= '0;
              if (last_in_row(int'(ey)) == int'(r)) begin
                state <= S_EMIT;                  // row ey is complete
              end else begin
                r <= r + 1'b1;
                state <= S_LOAD;
              end
            end else xo <= xo + 1'b1;
          end else t <= t + 1'b1;
        end
        S_EMIT: if (out_ready) begin
          if (int'(eob) == N_OB - 1) begin
            eob <= '0;
            if (int'(ex) == WO - 1) begin
              ex <= '0;
              if (int'(ey) == HO - 1) begin
                ey <= '0;                         // image done
                r <= '0;
                state <= S_LOAD;
              end else if (last_in_row(int'(ey) + 1) == int'(r)) begin
                ey <= ey + 1'b1;                  // next row is complete too
              end else begin
                ey <= ey + 1'b1;
                r <= r + 1'b1;
                state <= S_LOAD;
              end
            end else ex <= ex + 1'b1;
          end else eob <= eob + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  initial begin
    assert (D_O % OC_PAR == 0) else $error("D_O must be a multiple of OC_PAR");
    assert (H >= 2 && W >= 1) else $error("the map needs at least two rows");
    assert (STRIDE == 1 || STRIDE == 2) else $error("STRIDE must be 1 or 2");
  end
endmodule

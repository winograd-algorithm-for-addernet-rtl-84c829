// wino_adder_top: Winograd AdderNet layer engine.
//
// Computes one 3x3 adder layer (stride 1, one pixel of zero padding) on an
// H x W x CIN input map with a COUT x CIN kernel given in the Winograd
// domain, using the F(2x2,3x3) form with l1 distance in place of products:
//   Y_tile = A^T [ -| G (-) B^T d B | ] A     (A = A_0 by default)
// The default size is the layer the paper measures on FPGA: 28 x 28 pixels,
// 16 input and 16 output channels, 8-bit data, 256 lanes in the adder array.
//
// Structure: an input buffer, a weight buffer and an output buffer that the
// host reaches through the ports, and four stages that run one after the
// other under wino_ctrl, each handing its result to the next through an
// internal buffer:
//   pad_unit         input map   -> padded map      (H+2)*(W+2) cycles (900)
//   input_transform  padded map  -> V tiles         16*T cycles       (3136)
//   adder_calc       V, G        -> M tiles         16*T + 4 cycles   (3140)
//   output_transform M tiles     -> output map      16*T cycles       (3136)
// with T = (H/2)*(W/2) tiles. The stage list and the cycle counts are the
// paper's; the buffers, the port protocol and the bit widths are this
// design's own. A layer takes 10312 cycles at the default size, plus the
// loading and unloading done through the ports.
//
// Host interface (all synchronous to clk, active-low synchronous reset):
//  - in_we/in_waddr/in_wdata: write input pixel in_waddr = y*W + x, all CIN
//    channels in one word (channel c at [c*DW +: DW], two's complement).
//  - w_we/w_waddr/w_wdata: write the kernel words of output channel o and
//    Winograd element e = 4*i + j at address e*COUT + o; input channel c at
//    [c*DW +: DW].
//  - go: one-cycle pulse while busy is low starts a layer; stage shows the
//    running stage (wino_pkg::stage_e); layer_done pulses in the last cycle.
//  - out_row/out_col/out_rdata: combinational read of output pixel
//    (out_row, out_col), all COUT channels, channel o at [o*YW +: YW],
//    signed, full precision (no rescaling, batch norm or activation).
// Buffers may be written only while busy is low.
module wino_adder_top
  import wino_pkg::*;
#(
  parameter int unsigned H     = 28,
  parameter int unsigned W     = 28,
  parameter int unsigned CIN   = 16,
  parameter int unsigned COUT  = 16,
  parameter int unsigned DW    = 8,
  parameter int unsigned A_SEL = 0,
  localparam int unsigned TH     = H / 2,
  localparam int unsigned TW     = W / 2,
  localparam int unsigned NTILES = TH * TW,
  localparam int unsigned N      = NTILES * TELEMS,
  localparam int unsigned VW     = v_width(DW),
  localparam int unsigned MW     = m_width(DW, CIN),
  localparam int unsigned YW     = y_width(DW, CIN),
  localparam int unsigned IAW    = $clog2(H * W),
  localparam int unsigned PAW    = $clog2((H + 2) * (W + 2)),
  localparam int unsigned VAW    = $clog2(N),
  localparam int unsigned WAW    = $clog2(TELEMS * COUT),
  localparam int unsigned YAW    = $clog2(NTILES)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_we,
  input  logic [IAW-1:0]          in_waddr,
  input  logic [CIN-1:0][DW-1:0]  in_wdata,
  input  logic                    w_we,
  input  logic [WAW-1:0]          w_waddr,
  input  logic [CIN-1:0][DW-1:0]  w_wdata,
  input  logic                    go,
  output logic                    busy,
  output logic                    layer_done,
  output logic [2:0]              stage,
  input  logic [$clog2(H)-1:0]    out_row,
  input  logic [$clog2(W)-1:0]    out_col,
  output logic [COUT-1:0][YW-1:0] out_rdata
);

  // Stage handshakes.
  logic   start_pad, start_itr, start_calc, start_otr;
  logic   busy_pad, busy_itr, busy_calc, busy_otr;
  logic   done_pad, done_itr, done_calc, done_otr;
  stage_e stage_q;

  wino_ctrl u_ctrl (
    .clk, .rst_n, .go,
    .done_pad, .done_itr, .done_calc, .done_otr,
    .start_pad, .start_itr, .start_calc, .start_otr,
    .stage(stage_q), .layer_done
  );

  assign stage = stage_q;
  assign busy  = (stage_q != ST_IDLE);

  // Input buffer: written by the host, read by the padding stage.
  logic [IAW-1:0]         in_raddr [1];
  logic [CIN*DW-1:0]      in_rdata [1];

  wino_ram #(.DEPTH(H * W), .WIDTH(CIN * DW), .NRD(1)) u_in_buf (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(in_raddr), .rdata(in_rdata)
  );

  // Padded map.
  logic                   pad_we;
  logic [PAW-1:0]         pad_waddr;
  logic [CIN-1:0][DW-1:0] pad_wdata;
  logic [PAW-1:0]         pad_raddr [4];
  logic [CIN*DW-1:0]      pad_rdata_w [4];
  logic [CIN-1:0][DW-1:0] pad_rdata [4];

  pad_unit #(.H(H), .W(W), .CIN(CIN), .DW(DW)) u_pad (
    .clk, .rst_n, .start(start_pad), .busy(busy_pad), .done(done_pad),
    .in_raddr(in_raddr[0]), .in_rdata(in_rdata[0]),
    .pad_we, .pad_waddr, .pad_wdata
  );

  wino_ram #(.DEPTH((H + 2) * (W + 2)), .WIDTH(CIN * DW), .NRD(4)) u_pad_buf (
    .clk, .we(pad_we), .waddr(pad_waddr), .wdata(pad_wdata),
    .raddr(pad_raddr), .rdata(pad_rdata_w)
  );

  always_comb for (int k = 0; k < 4; k++) pad_rdata[k] = pad_rdata_w[k];

  // Transformed input tiles V.
  logic                   v_we;
  logic [VAW-1:0]         v_waddr;
  logic [CIN-1:0][VW-1:0] v_wdata;
  logic [VAW-1:0]         v_raddr [1];
  logic [CIN*VW-1:0]      v_rdata [1];

  input_transform #(.H(H), .W(W), .CIN(CIN), .DW(DW)) u_itr (
    .clk, .rst_n, .start(start_itr), .busy(busy_itr), .done(done_itr),
    .pad_raddr, .pad_rdata,
    .v_we, .v_waddr, .v_wdata
  );

  wino_ram #(.DEPTH(N), .WIDTH(CIN * VW), .NRD(1)) u_v_buf (
    .clk, .we(v_we), .waddr(v_waddr), .wdata(v_wdata),
    .raddr(v_raddr), .rdata(v_rdata)
  );

  // Winograd-domain kernel: written by the host, read by the adder array.
  logic [WAW-1:0]         w_raddr [COUT];
  logic [CIN*DW-1:0]      w_rdata_w [COUT];
  logic [CIN-1:0][DW-1:0] w_rdata [COUT];

  wino_ram #(.DEPTH(TELEMS * COUT), .WIDTH(CIN * DW), .NRD(COUT)) u_w_buf (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .raddr(w_raddr), .rdata(w_rdata_w)
  );

  always_comb for (int o = 0; o < COUT; o++) w_rdata[o] = w_rdata_w[o];

  // Adder-array results M.
  logic                    m_we;
  logic [VAW-1:0]          m_waddr;
  logic [COUT-1:0][MW-1:0] m_wdata;
  logic [VAW-1:0]          m_raddr [1];
  logic [COUT*MW-1:0]      m_rdata [1];

  adder_calc #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .DW(DW)) u_calc (
    .clk, .rst_n, .start(start_calc), .busy(busy_calc), .done(done_calc),
    .v_raddr(v_raddr[0]), .v_rdata(v_rdata[0]),
    .w_raddr, .w_rdata,
    .m_we, .m_waddr, .m_wdata
  );

  wino_ram #(.DEPTH(N), .WIDTH(COUT * MW), .NRD(1)) u_m_buf (
    .clk, .we(m_we), .waddr(m_waddr), .wdata(m_wdata),
    .raddr(m_raddr), .rdata(m_rdata)
  );

  // Output map, one word per 2x2 tile.
  logic                         y_we;
  logic [YAW-1:0]               y_waddr;
  logic [3:0][COUT-1:0][YW-1:0] y_wdata;
  logic [YAW-1:0]               y_raddr [1];
  logic [4*COUT*YW-1:0]         y_rdata [1];
  logic [3:0][COUT-1:0][YW-1:0] y_tile;

  output_transform #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .DW(DW), .A_SEL(A_SEL)) u_otr (
    .clk, .rst_n, .start(start_otr), .busy(busy_otr), .done(done_otr),
    .m_raddr(m_raddr[0]), .m_rdata(m_rdata[0]),
    .y_we, .y_waddr, .y_wdata
  );

  wino_ram #(.DEPTH(NTILES), .WIDTH(4 * COUT * YW), .NRD(1)) u_y_buf (
    .clk, .we(y_we), .waddr(y_waddr), .wdata(y_wdata),
    .raddr(y_raddr), .rdata(y_rdata)
  );

  always_comb begin
    y_raddr[0] = YAW'(32'(out_row >> 1) * TW + 32'(out_col >> 1));
    y_tile     = y_rdata[0];
    out_rdata  = y_tile[{out_row[0], out_col[0]}];
  end

  property p_load_when_idle;
    @(posedge clk) disable iff (!rst_n) (in_we || w_we) |-> !busy;
  endproperty
  assert property (p_load_when_idle) else $error("wino_adder_top: buffer written while busy");

  // Each unit is busy only during its own stage.
  property p_busy_matches_stage;
    @(posedge clk) disable iff (!rst_n)
      (busy_pad == (stage_q == ST_PAD)) && (busy_itr == (stage_q == ST_ITRANS)) &&
      (busy_calc == (stage_q == ST_CALC)) && (busy_otr == (stage_q == ST_OTRANS));
  endproperty
  assert property (p_busy_matches_stage) else $error("wino_adder_top: unit busy outside its stage");

endmodule

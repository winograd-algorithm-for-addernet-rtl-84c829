// output_transform: Winograd output transform Y = A^T M A of the layer engine.
//
// M is the 4x4 adder-array result of one tile (per output channel). With the
// balanced matrix A_sel (A_0 by default), output pixel (r,c) of the 2x2 tile is
//   Y(r,c) = sum_{i,j} A^T(r,i) * A^T(c,j) * M(i,j)
// where every coefficient is +1, -1 or 0, so each of the four outputs only
// adds, subtracts or skips the element. The unit reads one element per cycle
// (all COUT channels in parallel) from the result buffer, in the order the
// adder array wrote them, and keeps four running sums per channel; after the
// 16th element of a tile it writes the finished 2x2 tile, all four pixels in
// one word, to the output buffer at the tile's index. A run takes
// 16 * tiles cycles: 3136 for the 28 x 28 layer, the output-transform count
// of the paper. A_0..A_3 are the paper's; the accumulate-per-element schedule
// and the tile-wide output word are this design's choice.
//
// Output word layout: pixel q = 2*r + c of the tile in bits
// [q*COUT*YW +: COUT*YW], channel o inside it at [o*YW +: YW], signed.
// Interface: start pulse while idle; busy for exactly 16 * tiles cycles from
// the next cycle; done high in the last busy cycle.
module output_transform
  import wino_pkg::*;
#(
  parameter int unsigned H     = 28,
  parameter int unsigned W     = 28,
  parameter int unsigned CIN   = 16,
  parameter int unsigned COUT  = 16,
  parameter int unsigned DW    = 8,
  parameter int unsigned A_SEL = 0,
  localparam int unsigned NTILES = (H / 2) * (W / 2),
  localparam int unsigned N      = NTILES * TELEMS,
  localparam int unsigned MW     = m_width(DW, CIN),
  localparam int unsigned YW     = y_width(DW, CIN),
  localparam int unsigned MAW    = $clog2(N),
  localparam int unsigned YAW    = $clog2(NTILES)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [MAW-1:0]                m_raddr,
  input  logic [COUT-1:0][MW-1:0]       m_rdata,
  output logic                          y_we,
  output logic [YAW-1:0]                y_waddr,
  output logic [3:0][COUT-1:0][YW-1:0]  y_wdata
);

  logic [MAW-1:0]                 idx;
  logic [1:0]                     ei, ej;
  logic [3:0][COUT-1:0][YW-1:0]   acc, acc_nxt;

  assign ei   = idx[3:2];
  assign ej   = idx[1:0];
  assign done = busy && (32'(idx) == N - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        idx  <= '0;
      end
    end else if (done) begin
      busy <= 1'b0;
    end else begin
      idx <= idx + 1'b1;
    end
  end

  // Running sums; the first element of a tile starts them afresh.
  always_comb begin
    for (int q = 0; q < 4; q++) begin
      coef_t k;
      k = coef_mul(at_coef(A_SEL, q[1], ei), at_coef(A_SEL, q[0], ej));
      for (int o = 0; o < COUT; o++) begin
        logic signed [YW-1:0] base, term;
        base = (idx[3:0] == 4'd0) ? '0 : $signed(acc[q][o]);
        term = YW'($signed(m_rdata[o]));
        unique case (k)
          CP:      acc_nxt[q][o] = base + term;
          CN:      acc_nxt[q][o] = base - term;
          default: acc_nxt[q][o] = base;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) acc <= acc_nxt;
  end

  assign m_raddr = idx;
  assign y_we    = busy && (idx[3:0] == 4'hF);
  assign y_waddr = YAW'(idx >> 4);
  assign y_wdata = acc_nxt;

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  assert property (p_no_start_when_busy) else $error("output_transform: start while busy");

endmodule

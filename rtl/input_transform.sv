// input_transform: Winograd input transform V = B^T d B of the layer engine.
//
// The padded (H+2) x (W+2) map is cut into 4x4 tiles d at a stride of 2,
// giving (H/2) x (W/2) tiles (14 x 14 = 196 for the 28 x 28 layer). Because
// every row of B^T has exactly two non-zero entries of +-1, element (i,j) of
// B^T d B is a signed sum of four pixels:
//   V(i,j) = sum_{p,q in {0,1}} s_i,p * s_j,q * d(a_i,p , a_j,q)
// with (a, s) the column index and sign from wino_pkg::bt_idx/bt_neg.
// The unit produces one element per cycle for all CIN channels in parallel,
// using four combinational reads of the padded map, and writes it to the
// transformed-tile buffer at address tile*16 + i*4 + j. A run takes
// 16 * (H/2) * (W/2) cycles: 3136 for the 28 x 28 layer, the input-transform
// count of the paper. Tiles are taken in raster order and elements in raster
// order inside a tile; that order and the four-read-port buffer are this
// design's choice. Results keep full precision (DW+2 bits, signed).
//
// Interface: start pulse while idle; busy for exactly the run length from the
// next cycle; done high in the last busy cycle.
module input_transform
  import wino_pkg::*;
#(
  parameter int unsigned H   = 28,
  parameter int unsigned W   = 28,
  parameter int unsigned CIN = 16,
  parameter int unsigned DW  = 8,
  localparam int unsigned PW     = W + 2,
  localparam int unsigned TH     = H / 2,
  localparam int unsigned TW     = W / 2,
  localparam int unsigned NTILES = TH * TW,
  localparam int unsigned VW     = v_width(DW),
  localparam int unsigned PAW    = $clog2((H + 2) * PW),
  localparam int unsigned VAW    = $clog2(NTILES * TELEMS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [PAW-1:0]         pad_raddr [4],
  input  logic [CIN-1:0][DW-1:0] pad_rdata [4],
  output logic                   v_we,
  output logic [VAW-1:0]         v_waddr,
  output logic [CIN-1:0][VW-1:0] v_wdata
);

  logic [$clog2(TH)-1:0] ty;
  logic [$clog2(TW)-1:0] tx;
  logic [1:0]            ei, ej;
  logic                  last_tile;

  assign last_tile = (32'(ty) == TH - 1) && (32'(tx) == TW - 1);
  assign done      = busy && last_tile && (ei == 2'd3) && (ej == 2'd3);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ty   <= '0;
      tx   <= '0;
      ei   <= '0;
      ej   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        ty   <= '0;
        tx   <= '0;
        ei   <= '0;
        ej   <= '0;
      end
    end else if (done) begin
      busy <= 1'b0;
    end else begin
      {ei, ej} <= {ei, ej} + 4'd1;
      if ({ei, ej} == 4'hF) begin
        if (32'(tx) == TW - 1) begin
          tx <= '0;
          ty <= ty + 1'b1;
        end else begin
          tx <= tx + 1'b1;
        end
      end
    end
  end

  // Read port k = 2*p + q fetches d(a_i,p , a_j,q) of the current tile.
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      logic [1:0] ra, ca;
      ra = bt_idx(ei, k[1]);
      ca = bt_idx(ej, k[0]);
      pad_raddr[k] = PAW'((2 * 32'(ty) + 32'(ra)) * PW + 2 * 32'(tx) + 32'(ca));
    end
  end

  always_comb begin
    for (int c = 0; c < CIN; c++) begin
      logic signed [VW-1:0] acc;
      acc = '0;
      for (int k = 0; k < 4; k++) begin
        logic signed [VW-1:0] term;
        term = VW'($signed(pad_rdata[k][c]));
        if (bt_neg(ei, k[1]) ^ bt_neg(ej, k[0])) acc = acc - term;
        else                                     acc = acc + term;
      end
      v_wdata[c] = acc;
    end
    v_we    = busy;
    v_waddr = VAW'((32'(ty) * TW + 32'(tx)) * TELEMS + 32'({ei, ej}));
  end

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  assert property (p_no_start_when_busy) else $error("input_transform: start while busy");

endmodule

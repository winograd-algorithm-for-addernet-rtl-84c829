// pad_unit: zero padding of the input feature map, the first stage of the
// layer engine.
//
// It copies an H x W map of CIN-channel pixels into an (H+2) x (W+2) map
// with a one-pixel border of zeros, so that the 3x3 layer keeps the H x W
// output size. It writes one padded pixel (all CIN channels at once) per
// cycle in raster order, so a run takes (H+2)*(W+2) cycles: 900 for the
// 28 x 28 layer, which is the padding cycle count the paper reports.
//
// Interface: a one-cycle start pulse while busy is low begins a run; busy is
// high for exactly (H+2)*(W+2) cycles starting the next cycle, and done is
// high in the last of them. The input map is read through in_raddr/in_rdata
// (combinational read, address y*W + x); the padded map is written through
// pad_we/pad_waddr/pad_wdata (address py*(W+2) + px). The cycle count and
// the zero border follow the paper; the raster order and the
// one-pixel-per-cycle schedule are this design's reading of that count.
module pad_unit #(
  parameter int unsigned H   = 28,
  parameter int unsigned W   = 28,
  parameter int unsigned CIN = 16,
  parameter int unsigned DW  = 8,
  localparam int unsigned PH  = H + 2,
  localparam int unsigned PW  = W + 2,
  localparam int unsigned IAW = $clog2(H * W),
  localparam int unsigned PAW = $clog2(PH * PW)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [IAW-1:0]          in_raddr,
  input  logic [CIN-1:0][DW-1:0]  in_rdata,
  output logic                    pad_we,
  output logic [PAW-1:0]          pad_waddr,
  output logic [CIN-1:0][DW-1:0]  pad_wdata
);

  logic [$clog2(PH)-1:0] py;
  logic [$clog2(PW)-1:0] px;
  logic                  border;

  assign done = busy && (32'(py) == PH - 1) && (32'(px) == PW - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      py   <= '0;
      px   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        py   <= '0;
        px   <= '0;
      end
    end else if (done) begin
      busy <= 1'b0;
    end else if (32'(px) == PW - 1) begin
      px <= '0;
      py <= py + 1'b1;
    end else begin
      px <= px + 1'b1;
    end
  end

  always_comb begin
    border    = (py == 0) || (32'(py) == PH - 1) || (px == 0) || (32'(px) == PW - 1);
    in_raddr  = border ? '0 : IAW'((32'(py) - 1) * W + (32'(px) - 1));
    pad_we    = busy;
    pad_waddr = PAW'(32'(py) * PW + 32'(px));
    pad_wdata = border ? '0 : in_rdata;
  end

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  assert property (p_no_start_when_busy) else $error("pad_unit: start while busy");

endmodule

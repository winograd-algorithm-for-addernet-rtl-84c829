// wino_ram: on-chip buffer used for every storage array of the layer engine
// (input feature map, padded map, transformed tiles, kernel, adder-array
// results and output map).
//
// One synchronous write port and NRD asynchronous read ports. A write is
// taken on the rising clock edge when we is high. Each read port returns the
// word at its address in the same cycle, combinationally, which is the
// behaviour of FPGA distributed (LUT) RAM; a read of an address at or past
// DEPTH returns zero. A read of the address being written in the same cycle
// returns the old word. There is no reset: the contents are undefined until
// written, and the engine only reads words that an earlier stage wrote.
//
// The buffers themselves are this design's own: the paper names only the
// processing stages, not how data is held between them.
module wino_ram #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) begin
      rdata[r] = (32'(raddr[r]) < DEPTH) ? mem[raddr[r]] : '0;
    end
  end

endmodule

// adder_calc: the adder array of the layer engine ("calculation" stage).
//
// For each Winograd-domain element e = (i,j) of each tile it computes, for
// all COUT output channels at once,
//   M(o, e) = - sum_{c < CIN} | G(o, c, e) - V(c, e) |
// which is the AdderNet replacement of the element-wise product of the
// Winograd algorithm: an l1 distance instead of a multiply-accumulate. With
// CIN = COUT = 16 the array holds 256 subtract-and-absolute lanes, the
// parallelism the paper states (16 input by 16 output channels). The kernel G
// lives directly in the Winograd domain (4x4 per channel pair), as the
// network is trained there, so no kernel transform is built.
//
// Pipeline, one element per cycle:
//   issue : combinational read of V(., e) and of G(o, ., e) for every o
//   S1    : operands registered
//   S2    : 256 absolute differences registered (DW+3 bits, unsigned)
//   S3    : partial sums over groups of 4 input channels registered
//   S4    : final sum, negated, registered; written to the result buffer
// A run over N = 16 * tiles elements therefore takes N + 4 cycles, 3140 for
// the 28 x 28 layer, which is the calculation cycle count of the paper. The
// split of the adder tree into these stages is this design's choice, made to
// give that four-cycle latency.
//
// Interface: start pulse while idle; busy for exactly N + 4 cycles from the
// next cycle; done high in the cycle of the last result write. The kernel
// buffer is read at address e*COUT + o on read port o, so the low bits of
// each kernel read address are the constant o; the transformed-tile and
// result buffers are addressed tile*16 + e.
module adder_calc
  import wino_pkg::*;
#(
  parameter int unsigned H    = 28,
  parameter int unsigned W    = 28,
  parameter int unsigned CIN  = 16,
  parameter int unsigned COUT = 16,
  parameter int unsigned DW   = 8,
  localparam int unsigned N    = (H / 2) * (W / 2) * TELEMS,
  localparam int unsigned VW   = v_width(DW),
  localparam int unsigned ABW  = abs_width(DW),
  localparam int unsigned MW   = m_width(DW, CIN),
  localparam int unsigned GS   = 4,
  localparam int unsigned NG   = (CIN + GS - 1) / GS,
  localparam int unsigned PSW  = ABW + 2,
  localparam int unsigned VAW  = $clog2(N),
  localparam int unsigned WAW  = $clog2(TELEMS * COUT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [VAW-1:0]          v_raddr,
  input  logic [CIN-1:0][VW-1:0]  v_rdata,
  output logic [WAW-1:0]          w_raddr [COUT],
  input  logic [CIN-1:0][DW-1:0]  w_rdata [COUT],
  output logic                    m_we,
  output logic [VAW-1:0]          m_waddr,
  output logic [COUT-1:0][MW-1:0] m_wdata
);

  // Issue stage.
  logic           issuing;
  logic [VAW-1:0] idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      issuing <= 1'b0;
      idx     <= '0;
    end else begin
      if (!busy && start) begin
        busy    <= 1'b1;
        issuing <= 1'b1;
        idx     <= '0;
      end else begin
        if (issuing) begin
          if (32'(idx) == N - 1) issuing <= 1'b0;
          else                   idx     <= idx + 1'b1;
        end
        if (done) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    v_raddr = idx;
    for (int o = 0; o < COUT; o++) begin
      w_raddr[o] = WAW'(32'(idx[3:0]) * COUT + o);
    end
  end

  // S1: operands.
  logic                   val1, val2, val3, val4;
  logic [VAW-1:0]         adr1, adr2, adr3, adr4;
  logic [CIN-1:0][VW-1:0] v1;
  logic [CIN-1:0][DW-1:0] g1 [COUT];
  logic [ABW-1:0]         ab2 [COUT][CIN];
  logic [PSW-1:0]         ps3 [COUT][NG];
  logic [COUT-1:0][MW-1:0] m4;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      val1 <= 1'b0;
      val2 <= 1'b0;
      val3 <= 1'b0;
      val4 <= 1'b0;
    end else begin
      val1 <= issuing;
      val2 <= val1;
      val3 <= val2;
      val4 <= val3;
    end
  end

  always_ff @(posedge clk) begin
    adr1 <= idx;
    adr2 <= adr1;
    adr3 <= adr2;
    adr4 <= adr3;
    v1   <= v_rdata;
    g1   <= w_rdata;
  end

  // S2: 256 lanes of |g - v|.
  always_ff @(posedge clk) begin
    for (int o = 0; o < COUT; o++) begin
      for (int c = 0; c < CIN; c++) begin
        logic signed [ABW-1:0] d;
        d = ABW'($signed(g1[o][c])) - ABW'($signed(v1[c]));
        ab2[o][c] <= d[ABW-1] ? ABW'(-d) : ABW'(d);
      end
    end
  end

  // S3: partial sums over groups of GS input channels.
  always_ff @(posedge clk) begin
    for (int o = 0; o < COUT; o++) begin
      for (int g = 0; g < NG; g++) begin
        logic [PSW-1:0] s;
        s = '0;
        for (int k = 0; k < GS; k++) begin
          if (g * GS + k < CIN) s = s + PSW'(ab2[o][g * GS + k]);
        end
        ps3[o][g] <= s;
      end
    end
  end

  // S4: final sum over the groups, negated.
  always_ff @(posedge clk) begin
    for (int o = 0; o < COUT; o++) begin
      logic [MW-1:0] s;
      s = '0;
      for (int g = 0; g < NG; g++) s = s + MW'(ps3[o][g]);
      m4[o] <= MW'(-s);
    end
  end

  assign m_we    = val4;
  assign m_waddr = adr4;
  assign m_wdata = m4;
  assign done    = val4 && (32'(adr4) == N - 1);

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  assert property (p_no_start_when_busy) else $error("adder_calc: start while busy");

endmodule

// tb_adder_calc: self-checking test of the adder array at a small size
// (4 x 4 map, so 4 tiles and 64 elements; 6 input channels, which leaves one
// partial group in the adder tree; 3 output channels). The transformed
// tiles and the kernel are testbench arrays read combinationally. Every
// result written is compared with -sum_c |G - V| worked out here. Also
// checked: results come out in address order, the run lasts 64 + 4 cycles
// (the four-cycle pipeline latency), done comes with the last write, and the
// extreme operands (V = -512, G = +127) give the largest magnitude.
module tb_adder_calc;
  import wino_pkg::*;
  localparam int H = 4, W = 4, CIN = 6, COUT = 3, DW = 8;
  localparam int N = (H / 2) * (W / 2) * 16;
  localparam int VW = v_width(DW), MW = m_width(DW, CIN);
  localparam int VAW = $clog2(N), WAW = $clog2(16 * COUT);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [VAW-1:0] v_raddr;
  logic [CIN-1:0][VW-1:0] v_rdata;
  logic [WAW-1:0] w_raddr [COUT];
  logic [CIN-1:0][DW-1:0] w_rdata [COUT];
  logic m_we;
  logic [VAW-1:0] m_waddr;
  logic [COUT-1:0][MW-1:0] m_wdata;

  adder_calc #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int vv [N][CIN];
  int gg [16][COUT][CIN];
  always_comb begin
    for (int c = 0; c < CIN; c++) v_rdata[c] = VW'(vv[v_raddr][c]);
    for (int o = 0; o < COUT; o++)
      for (int c = 0; c < CIN; c++)
        w_rdata[o][c] = DW'(gg[int'(w_raddr[o]) / COUT][int'(w_raddr[o]) % COUT][c]);
  end

  int checks = 0, failures = 0;
  int busy_cycles, done_cycle, next_addr, min_seen;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (done) done_cycle = busy_cycles;
    if (m_we) begin
      int a, e;
      a = int'(m_waddr);
      e = a % 16;
      check(a == next_addr, $sformatf("write to %0d, expected %0d", a, next_addr));
      next_addr++;
      for (int o = 0; o < COUT; o++) begin
        int s;
        s = 0;
        for (int c = 0; c < CIN; c++) begin
          int d;
          d = gg[e][o][c] - vv[a][c];
          s += (d < 0) ? -d : d;
        end
        if (-s < min_seen) min_seen = -s;
        check(int'($signed(m_wdata[o])) == -s,
              $sformatf("elem %0d out %0d: got %0d expected %0d", a, o, $signed(m_wdata[o]), -s));
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      for (int a = 0; a < N; a++)
        for (int c = 0; c < CIN; c++)
          vv[a][c] = (run == 1) ? -512 : int'($urandom_range(0, 1023)) - 512;
      for (int e = 0; e < 16; e++)
        for (int o = 0; o < COUT; o++)
          for (int c = 0; c < CIN; c++)
            gg[e][o][c] = (run == 1) ? 127 : int'($urandom_range(0, 255)) - 128;
      busy_cycles = 0;
      done_cycle = -1;
      next_addr = 0;
      min_seen = 0;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      check(busy_cycles == N + 4, $sformatf("busy for %0d cycles", busy_cycles));
      check(done_cycle == N + 4, $sformatf("done in busy cycle %0d", done_cycle));
      check(next_addr == N, $sformatf("%0d results written", next_addr));
      if (run == 1) check(min_seen == -639 * CIN, $sformatf("extreme result %0d", min_seen));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

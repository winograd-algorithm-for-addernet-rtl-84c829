// tb_output_transform: self-checking test of the Winograd output transform
// at a small size (4 x 4 map, so 4 tiles; 3 output channels; CIN = 16 sets
// the word widths). Four instances run side by side, one for each balanced
// matrix A_0..A_3, on the same adder-array results, which come from a
// testbench array read combinationally. Every 2x2 tile written is compared
// with A_k^T M A_k worked out here from the matrices. Also checked: a tile
// is written once per 16 elements, to the right address, the run lasts 64
// cycles, done comes in the last one, and the largest magnitudes do not
// overflow. A constant M must give four equal outputs per tile under every
// A_k: the balance these matrices are chosen for.
module tb_output_transform;
  import wino_pkg::*;
  localparam int H = 4, W = 4, CIN = 16, COUT = 3, DW = 8;
  localparam int NT = (H / 2) * (W / 2), N = NT * 16;
  localparam int MW = m_width(DW, CIN), YW = y_width(DW, CIN);
  localparam int MAW = $clog2(N), YAW = $clog2(NT);

  localparam int AT [4][2][4] = '{
    '{'{-1,  1,  1, 0}, '{0,  1, -1,  1}},
    '{'{-1, -1,  1, 0}, '{0, -1, -1,  1}},
    '{'{ 1, -1, -1, 0}, '{0, -1,  1, -1}},
    '{'{ 1,  1, -1, 0}, '{0,  1,  1, -1}}};

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy [4], done [4];
  logic [MAW-1:0] m_raddr [4];
  logic [COUT-1:0][MW-1:0] m_rdata [4];
  logic y_we [4];
  logic [YAW-1:0] y_waddr [4];
  logic [3:0][COUT-1:0][YW-1:0] y_wdata [4];

  int mm [N][COUT];

  for (genvar k = 0; k < 4; k++) begin : g_sel
    output_transform #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .DW(DW), .A_SEL(k)) dut (
      .clk, .rst_n, .start, .busy(busy[k]), .done(done[k]),
      .m_raddr(m_raddr[k]), .m_rdata(m_rdata[k]),
      .y_we(y_we[k]), .y_waddr(y_waddr[k]), .y_wdata(y_wdata[k]));
    always_comb for (int o = 0; o < COUT; o++) m_rdata[k][o] = MW'(mm[m_raddr[k]][o]);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int busy_cycles, done_cycle, tiles [4];
  int run_id = -1, n_balanced = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    check(n_balanced == 4 * NT * COUT, $sformatf("balance checked %0d times", n_balanced));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (busy[0]) busy_cycles++;
    if (done[0]) done_cycle = busy_cycles;
    for (int k = 0; k < 4; k++) begin
      check(busy[k] == busy[0], "instances out of step");
      if (y_we[k]) begin
        int t;
        t = int'(y_waddr[k]);
        check(t == tiles[k], $sformatf("A_%0d: tile %0d written, expected %0d", k, t, tiles[k]));
        tiles[k]++;
        // Balance: each output adds five and subtracts four elements, so a
        // constant M gives the same value at all four positions of the tile.
        if (run_id == 1)
          for (int o = 0; o < COUT; o++) begin
            n_balanced++;
            for (int q = 0; q < 4; q++)
              check(int'($signed(y_wdata[k][q][o])) == -10224,
                    $sformatf("A_%0d: unbalanced output %0d for constant input", k, q));
          end
        for (int o = 0; o < COUT; o++)
          for (int r = 0; r < 2; r++)
            for (int c = 0; c < 2; c++) begin
              int s;
              s = 0;
              for (int i = 0; i < 4; i++)
                for (int j = 0; j < 4; j++)
                  s += AT[k][r][i] * AT[k][c][j] * mm[t * 16 + i * 4 + j][o];
              check(int'($signed(y_wdata[k][2 * r + c][o])) == s,
                    $sformatf("A_%0d tile %0d y(%0d,%0d) out %0d: got %0d expected %0d",
                              k, t, r, c, o, $signed(y_wdata[k][2 * r + c][o]), s));
            end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 3; run++) begin
      run_id = run;
      for (int a = 0; a < N; a++)
        for (int o = 0; o < COUT; o++)
          case (run)
            0: mm[a][o] = -int'($urandom_range(0, 10224));
            1: mm[a][o] = -10224;
            default: mm[a][o] = (a % 3 == 0) ? 0 : -10224;
          endcase
      busy_cycles = 0;
      done_cycle = -1;
      for (int k = 0; k < 4; k++) tiles[k] = 0;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy[0]) @(negedge clk);
      repeat (2) @(negedge clk);
      check(busy_cycles == N, $sformatf("busy for %0d cycles", busy_cycles));
      check(done_cycle == N, $sformatf("done in busy cycle %0d", done_cycle));
      for (int k = 0; k < 4; k++) check(tiles[k] == NT, $sformatf("A_%0d: %0d tiles", k, tiles[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

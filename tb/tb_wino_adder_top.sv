// tb_wino_adder_top: end-to-end test of the layer engine at its default size
// (28 x 28 pixels, 16 input and 16 output channels, 8-bit data, A_0).
//
// Three layers are run back to back: random data, the extreme corner
// (inputs -128, kernel +127, which gives the largest magnitudes every stage
// can see) and random data again with a fresh kernel. For each layer the
// testbench loads the input map and the Winograd-domain kernel through the
// host ports, pulses go, measures how many cycles each stage lasts and then
// reads back all 28 x 28 x 16 outputs. The expected outputs come from a
// plain integer model written here from the matrices B^T and A_0^T:
//   Y = A_0^T [ -sum_c | G - B^T d B | ] A_0   per 2x2 output tile.
// The stage lengths are checked against 900 / 3136 / 3140 / 3136 cycles.
// Counted and required at least once: zero-border pixels written by the
// padding stage, copied interior pixels, finished output tiles, each stage,
// and a second layer started straight after a finished one.
module tb_wino_adder_top;
  import wino_pkg::*;

  localparam int H = 28, W = 28, CIN = 16, COUT = 16, DW = 8;
  localparam int NT = (H / 2) * (W / 2);
  localparam int YW = y_width(DW, CIN);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_we = 1'b0;
  logic [$clog2(H*W)-1:0] in_waddr = '0;
  logic [CIN-1:0][DW-1:0] in_wdata = '0;
  logic w_we = 1'b0;
  logic [$clog2(16*COUT)-1:0] w_waddr = '0;
  logic [CIN-1:0][DW-1:0] w_wdata = '0;
  logic go = 1'b0;
  logic busy, layer_done;
  logic [2:0] stage;
  logic [$clog2(H)-1:0] out_row = '0;
  logic [$clog2(W)-1:0] out_col = '0;
  logic [COUT-1:0][YW-1:0] out_rdata;

  wino_adder_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Test data and reference model.
  int x [H][W][CIN];
  int g [16][COUT][CIN];
  int yref [H][W][COUT];

  localparam int BT [4][4] = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};
  localparam int AT [2][4] = '{'{-1, 1, 1, 0}, '{0, 1, -1, 1}};

  function automatic int px(int r, int c, int ch);
    if (r < 1 || r > H || c < 1 || c > W) return 0;
    return x[r-1][c-1][ch];
  endfunction

  task automatic compute_ref();
    for (int ty = 0; ty < H / 2; ty++)
      for (int tx = 0; tx < W / 2; tx++) begin
        int v [CIN][4][4];
        int m [COUT][4][4];
        for (int c = 0; c < CIN; c++)
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++) begin
              int s = 0;
              for (int a = 0; a < 4; a++)
                for (int b = 0; b < 4; b++)
                  s += BT[i][a] * BT[j][b] * px(2*ty + a, 2*tx + b, c);
              v[c][i][j] = s;
            end
        for (int o = 0; o < COUT; o++)
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++) begin
              int s = 0;
              for (int c = 0; c < CIN; c++) begin
                int d = g[i*4+j][o][c] - v[c][i][j];
                s += (d < 0) ? -d : d;
              end
              m[o][i][j] = -s;
            end
        for (int o = 0; o < COUT; o++)
          for (int r = 0; r < 2; r++)
            for (int cc = 0; cc < 2; cc++) begin
              int s = 0;
              for (int i = 0; i < 4; i++)
                for (int j = 0; j < 4; j++)
                  s += AT[r][i] * AT[cc][j] * m[o][i][j];
              yref[2*ty + r][2*tx + cc][o] = s;
            end
      end
  endtask

  function automatic int rnd8();
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  // Mechanism counters.
  int n_border = 0, n_interior = 0, n_tiles = 0, n_layers = 0, n_b2b = 0;
  int stage_cycles [5];
  always @(posedge clk) if (rst_n) begin
    if (dut.u_pad.pad_we &&  dut.u_pad.border) n_border++;
    if (dut.u_pad.pad_we && !dut.u_pad.border) n_interior++;
    if (dut.y_we) n_tiles++;
    if (layer_done) n_layers++;
    if (32'(stage) < 5) stage_cycles[stage]++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic load(int mode);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int ch = 0; ch < CIN; ch++)
          x[r][c][ch] = (mode == 1) ? -128 : rnd8();
    for (int e = 0; e < 16; e++)
      for (int o = 0; o < COUT; o++)
        for (int ch = 0; ch < CIN; ch++)
          g[e][o][ch] = (mode == 1) ? 127 : rnd8();
    @(negedge clk);
    in_we = 1'b1;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        in_waddr = ($clog2(H*W))'(r * W + c);
        for (int ch = 0; ch < CIN; ch++) in_wdata[ch] = DW'(x[r][c][ch]);
        @(negedge clk);
      end
    in_we = 1'b0;
    w_we = 1'b1;
    for (int e = 0; e < 16; e++)
      for (int o = 0; o < COUT; o++) begin
        w_waddr = ($clog2(16*COUT))'(e * COUT + o);
        for (int ch = 0; ch < CIN; ch++) w_wdata[ch] = DW'(g[e][o][ch]);
        @(negedge clk);
      end
    w_we = 1'b0;
    compute_ref();
  endtask

  task automatic run_layer(bit skip_idle);
    int t0;
    for (int s = 0; s < 5; s++) stage_cycles[s] = 0;
    if (!skip_idle) @(negedge clk);
    go = 1'b1;
    t0 = cyc;
    @(negedge clk);
    go = 1'b0;
    while (!layer_done) @(negedge clk);
    @(negedge clk);
    check(stage_cycles[ST_PAD] == 900, $sformatf("padding took %0d cycles", stage_cycles[ST_PAD]));
    check(stage_cycles[ST_ITRANS] == 3136, $sformatf("input transform took %0d cycles", stage_cycles[ST_ITRANS]));
    check(stage_cycles[ST_CALC] == 3140, $sformatf("calculation took %0d cycles", stage_cycles[ST_CALC]));
    check(stage_cycles[ST_OTRANS] == 3136, $sformatf("output transform took %0d cycles", stage_cycles[ST_OTRANS]));
    check(!busy, "busy after layer_done");
    $display("layer %0d: %0d cycles from go", n_layers, cyc - t0);
  endtask

  task automatic compare(string tag);
    int bad = 0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        out_row = ($clog2(H))'(r);
        out_col = ($clog2(W))'(c);
        #1;
        for (int o = 0; o < COUT; o++) begin
          int got;
          got = int'($signed(out_rdata[o]));
          checks++;
          if (got != yref[r][c][o]) begin
            failures++;
            bad++;
            if (bad < 10) $display("FAIL %s: y[%0d][%0d][%0d] = %0d, expected %0d", tag, r, c, o, got, yref[r][c][o]);
          end
        end
      end
    $display("%s: %0d mismatches", tag, bad);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(0);
    run_layer(1'b0);
    compare("random layer");
    load(1);
    run_layer(1'b0);
    compare("extreme layer");
    load(0);
    // Start the next layer in the first cycle after the previous one ended.
    go = 1'b1;
    @(negedge clk);
    go = 1'b0;
    while (!layer_done) @(negedge clk);
    @(negedge clk);
    if (!busy) n_b2b++;
    go = 1'b1;
    @(negedge clk);
    go = 1'b0;
    while (!layer_done) @(negedge clk);
    @(negedge clk);
    compare("back-to-back layer");
    check(n_border == 4 * 116, $sformatf("border pixels written: %0d", n_border));
    check(n_interior == 4 * H * W, $sformatf("interior pixels copied: %0d", n_interior));
    check(n_tiles == 4 * NT, $sformatf("output tiles finished: %0d", n_tiles));
    check(n_layers == 4, $sformatf("layers finished: %0d", n_layers));
    check(n_b2b == 1, "back-to-back start did not happen");
    $display("mechanisms: border=%0d interior=%0d tiles=%0d layers=%0d back_to_back=%0d",
             n_border, n_interior, n_tiles, n_layers, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

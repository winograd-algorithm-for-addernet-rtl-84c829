// tb_input_transform: self-checking test of the Winograd input transform at
// a small size (4 x 6 map, so 6 x 8 padded pixels and 2 x 3 tiles, 3
// channels). The padded map is a testbench array with four combinational
// read ports. Every element written is compared with B^T d B worked out here
// from the 4x4 matrix itself. Also checked: every one of the 16 * 6 = 96
// addresses is written once, the run lasts exactly 96 cycles and done comes
// in the last one. Extreme values (-128 everywhere, then +127/-128
// patterns) are part of the data.
module tb_input_transform;
  import wino_pkg::*;
  localparam int H = 4, W = 6, CIN = 3, DW = 8;
  localparam int PH = H + 2, PW = W + 2, NT = (H / 2) * (W / 2);
  localparam int VW = v_width(DW);
  localparam int PAW = $clog2(PH * PW), VAW = $clog2(NT * 16);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [PAW-1:0] pad_raddr [4];
  logic [CIN-1:0][DW-1:0] pad_rdata [4];
  logic v_we;
  logic [VAW-1:0] v_waddr;
  logic [CIN-1:0][VW-1:0] v_wdata;

  input_transform #(.H(H), .W(W), .CIN(CIN), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  logic [CIN-1:0][DW-1:0] pm [PH * PW];
  always_comb for (int k = 0; k < 4; k++) pad_rdata[k] = (32'(pad_raddr[k]) < PH * PW) ? pm[pad_raddr[k]] : '0;

  localparam int BT [4][4] = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};

  int checks = 0, failures = 0;
  int written [NT * 16];
  int busy_cycles, done_cycle;

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
    if (v_we) begin
      int t, e, ty, tx, i, j;
      t = int'(v_waddr) / 16;
      e = int'(v_waddr) % 16;
      ty = t / (W / 2);
      tx = t % (W / 2);
      i = e / 4;
      j = e % 4;
      if (t < NT) written[v_waddr]++;
      for (int c = 0; c < CIN; c++) begin
        int s;
        s = 0;
        for (int a = 0; a < 4; a++)
          for (int b = 0; b < 4; b++)
            s += BT[i][a] * BT[j][b] * int'($signed(pm[(2*ty + a) * PW + 2*tx + b][c]));
        check(int'($signed(v_wdata[c])) == s,
              $sformatf("tile %0d elem %0d ch %0d: got %0d expected %0d", t, e, c, $signed(v_wdata[c]), s));
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 3; run++) begin
      for (int a = 0; a < PH * PW; a++)
        for (int c = 0; c < CIN; c++)
          case (run)
            0: pm[a][c] = DW'($urandom);
            1: pm[a][c] = 8'h80;
            default: pm[a][c] = ((a + c) % 2 == 0) ? 8'h7f : 8'h80;
          endcase
      for (int a = 0; a < NT * 16; a++) written[a] = 0;
      busy_cycles = 0;
      done_cycle = -1;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      check(busy_cycles == NT * 16, $sformatf("busy for %0d cycles", busy_cycles));
      check(done_cycle == NT * 16, $sformatf("done in busy cycle %0d", done_cycle));
      for (int a = 0; a < NT * 16; a++) check(written[a] == 1, $sformatf("address %0d written %0d times", a, written[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

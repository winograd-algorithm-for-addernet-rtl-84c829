// tb_pad_unit: self-checking test of the padding stage at a small size
// (4 x 6 map, 2 channels). The input map is a testbench array read
// combinationally, as the input buffer is. Checked: the unit writes every
// address of the 6 x 8 padded map exactly once, zero on the border and the
// matching input pixel inside; it is busy for exactly (H+2)*(W+2) = 48
// cycles; done comes in the last busy cycle; a second run repeats it.
module tb_pad_unit;
  localparam int H = 4, W = 6, CIN = 2, DW = 8;
  localparam int PH = H + 2, PW = W + 2;
  localparam int IAW = $clog2(H * W), PAW = $clog2(PH * PW);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [IAW-1:0] in_raddr;
  logic [CIN-1:0][DW-1:0] in_rdata;
  logic pad_we;
  logic [PAW-1:0] pad_waddr;
  logic [CIN-1:0][DW-1:0] pad_wdata;

  pad_unit #(.H(H), .W(W), .CIN(CIN), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  logic [CIN-1:0][DW-1:0] img [H * W];
  assign in_rdata = (32'(in_raddr) < H * W) ? img[in_raddr] : '0;

  int checks = 0, failures = 0;
  int written [PH * PW];
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
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (done) done_cycle = busy_cycles;
    if (pad_we) begin
      int py, px;
      logic [CIN-1:0][DW-1:0] exp;
      py = int'(pad_waddr) / PW;
      px = int'(pad_waddr) % PW;
      exp = (py == 0 || py == PH - 1 || px == 0 || px == PW - 1) ? '0 : img[(py - 1) * W + (px - 1)];
      check(32'(pad_waddr) < PH * PW, "address out of range");
      if (32'(pad_waddr) < PH * PW) written[pad_waddr]++;
      check(pad_wdata == exp, $sformatf("pixel (%0d,%0d): got %h expected %h", py, px, pad_wdata, exp));
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      for (int a = 0; a < H * W; a++)
        for (int c = 0; c < CIN; c++) img[a][c] = DW'($urandom_range(1, 255));
      for (int a = 0; a < PH * PW; a++) written[a] = 0;
      busy_cycles = 0;
      done_cycle = -1;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      check(busy_cycles == PH * PW, $sformatf("busy for %0d cycles", busy_cycles));
      check(done_cycle == PH * PW, $sformatf("done in busy cycle %0d", done_cycle));
      for (int a = 0; a < PH * PW; a++) check(written[a] == 1, $sformatf("address %0d written %0d times", a, written[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

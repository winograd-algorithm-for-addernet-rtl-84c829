// tb_wino_ram: self-checking test of the buffer RAM.
//
// Uses a depth that is not a power of two (10 words of 12 bits) and three
// read ports. A shadow array in the testbench records every write. Checked:
// each read port returns the shadow word of its own address in the same
// cycle; a read of an address past the depth returns zero; a write past the
// depth changes nothing; a read of the word being written returns the old
// word until the clock edge.
module tb_wino_ram;
  localparam int DEPTH = 10, WIDTH = 12, NRD = 3, AW = 4;

  logic clk = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0;
  logic [WIDTH-1:0] wdata = '0;
  logic [AW-1:0] raddr [NRD];
  logic [WIDTH-1:0] rdata [NRD];

  wino_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .NRD(NRD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] shadow [DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_reads();
    #1;
    for (int r = 0; r < NRD; r++) begin
      logic [WIDTH-1:0] exp;
      exp = (32'(raddr[r]) < DEPTH) ? shadow[raddr[r]] : '0;
      checks++;
      if (rdata[r] !== exp) begin
        failures++;
        $display("FAIL port %0d addr %0d: got %h expected %h", r, raddr[r], rdata[r], exp);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < NRD; r++) raddr[r] = '0;
    // Fill every word.
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1;
      waddr = AW'(a);
      wdata = WIDTH'($urandom);
      shadow[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    // Random traffic: writes in range and out of range, reads everywhere.
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = 1'($urandom);
      waddr = AW'($urandom_range(0, 15));
      wdata = WIDTH'($urandom);
      for (int r = 0; r < NRD; r++) raddr[r] = AW'($urandom_range(0, 15));
      if (n % 7 == 0) raddr[1] = waddr;
      check_reads();           // before the edge: old contents
      @(posedge clk);
      if (we && 32'(waddr) < DEPTH) shadow[waddr] = wdata;
      check_reads();           // after the edge: new contents
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_wino_ctrl: self-checking test of the stage sequencer. A small model of
// the four stage units in the testbench answers each start with a done
// pulse after a random number of cycles. Checked: go starts padding in the
// same cycle; each done starts exactly the next stage in the same cycle; the
// stage output follows IDLE, PAD, ITRANS, CALC, OTRANS, IDLE and holds each
// stage for exactly the unit's busy time; layer_done comes with the last
// done; nothing starts while idle without go.
module tb_wino_ctrl;
  import wino_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  logic done_pad, done_itr, done_calc, done_otr;
  logic start_pad, start_itr, start_calc, start_otr;
  stage_e stage;
  logic layer_done;

  wino_ctrl dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Unit models: busy for len[k] cycles after start, done in the last.
  int len [4];
  int left [4];
  logic [3:0] starts, dones;
  assign starts = {start_otr, start_calc, start_itr, start_pad};
  assign {done_otr, done_calc, done_itr, done_pad} = dones;
  always_comb for (int k = 0; k < 4; k++) dones[k] = (left[k] == 1);
  always @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      if (!rst_n) left[k] <= 0;
      else if (starts[k]) left[k] <= len[k];
      else if (left[k] > 0) left[k] <= left[k] - 1;
    end
  end

  int stage_cycles [5];
  int n_start [4];
  always @(posedge clk) if (rst_n) begin
    if (32'(stage) < 5) stage_cycles[stage]++;
    for (int k = 0; k < 4; k++) if (starts[k]) n_start[k]++;
    check(start_pad == (go && stage == ST_IDLE), "start_pad");
    check(start_itr == (done_pad && stage == ST_PAD), "start_itr");
    check(start_calc == (done_itr && stage == ST_ITRANS), "start_calc");
    check(start_otr == (done_calc && stage == ST_CALC), "start_otr");
    check(layer_done == (done_otr && stage == ST_OTRANS), "layer_done");
  end

  initial begin
    for (int k = 0; k < 4; k++) left[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    check(stage == ST_IDLE, "not idle after reset");
    for (int run = 0; run < 20; run++) begin
      stage_e seen [$];
      seen.delete();
      for (int k = 0; k < 4; k++) len[k] = $urandom_range(1, 12);
      for (int s = 0; s < 5; s++) stage_cycles[s] = 0;
      for (int k = 0; k < 4; k++) n_start[k] = 0;
      go = 1'b1;
      @(negedge clk);
      go = 1'b0;
      seen.push_back(stage);
      while (stage != ST_IDLE) begin
        @(negedge clk);
        if (stage != seen[$]) seen.push_back(stage);
      end
      check(seen.size() == 5 && seen[0] == ST_PAD && seen[1] == ST_ITRANS && seen[2] == ST_CALC &&
            seen[3] == ST_OTRANS && seen[4] == ST_IDLE, "stage order");
      check(stage_cycles[ST_PAD] == len[0], "pad stage length");
      check(stage_cycles[ST_ITRANS] == len[1], "itrans stage length");
      check(stage_cycles[ST_CALC] == len[2], "calc stage length");
      check(stage_cycles[ST_OTRANS] == len[3], "otrans stage length");
      for (int k = 0; k < 4; k++) check(n_start[k] == 1, $sformatf("unit %0d started %0d times", k, n_start[k]));
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

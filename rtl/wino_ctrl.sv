// wino_ctrl: stage sequencer of the layer engine.
//
// The four stages run one after the other, each over the whole layer:
// padding, input transform, calculation (adder array), output transform.
// This is the arrangement whose per-stage cycle counts the paper reports;
// overlapping the stages (the pipelining the paper only estimates) is not
// built. Each stage unit takes a one-cycle start pulse and answers with a
// done pulse in its last busy cycle. The sequencer raises the next unit's
// start in the same cycle as the previous unit's done, so the stages follow
// each other with no idle cycle and stage == ST_X holds for exactly the
// cycles in which unit X is busy.
//
// Interface: go (one cycle, while stage == ST_IDLE) starts a layer; the
// stage output names the running stage; layer_done pulses in the last cycle
// of the output transform, after which the stage is ST_IDLE again. go while
// the engine runs is ignored (and flagged by an assertion).
module wino_ctrl
  import wino_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   go,
  input  logic   done_pad,
  input  logic   done_itr,
  input  logic   done_calc,
  input  logic   done_otr,
  output logic   start_pad,
  output logic   start_itr,
  output logic   start_calc,
  output logic   start_otr,
  output stage_e stage,
  output logic   layer_done
);

  stage_e stage_nxt;

  always_comb begin
    start_pad  = 1'b0;
    start_itr  = 1'b0;
    start_calc = 1'b0;
    start_otr  = 1'b0;
    layer_done = 1'b0;
    stage_nxt  = stage;
    unique case (stage)
      ST_IDLE:   if (go)        begin start_pad  = 1'b1; stage_nxt = ST_PAD;    end
      ST_PAD:    if (done_pad)  begin start_itr  = 1'b1; stage_nxt = ST_ITRANS; end
      ST_ITRANS: if (done_itr)  begin start_calc = 1'b1; stage_nxt = ST_CALC;   end
      ST_CALC:   if (done_calc) begin start_otr  = 1'b1; stage_nxt = ST_OTRANS; end
      ST_OTRANS: if (done_otr)  begin layer_done = 1'b1; stage_nxt = ST_IDLE;   end
      default:                  stage_nxt = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) stage <= ST_IDLE;
    else        stage <= stage_nxt;
  end

  // A done pulse may only come from the unit of the running stage.
  property p_done_in_stage;
    @(posedge clk) disable iff (!rst_n)
      (done_pad  |-> stage == ST_PAD) and (done_itr |-> stage == ST_ITRANS) and
      (done_calc |-> stage == ST_CALC) and (done_otr |-> stage == ST_OTRANS);
  endproperty
  assert property (p_done_in_stage) else $error("wino_ctrl: done outside its stage");

  property p_go_when_idle;
    @(posedge clk) disable iff (!rst_n) go |-> stage == ST_IDLE;
  endproperty
  assert property (p_go_when_idle) else $error("wino_ctrl: go while running");

endmodule

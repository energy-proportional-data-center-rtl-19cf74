// backlog_monitor: queue backlog monitor that raises the stage up/down
// triggers.
//
// Every cycle it compares the backlog of each output queue of an active
// port with two administrator-set watermarks. If any active queue holds more
// than hi_wm flits it raises up_trig (only while a higher stage exists);
// if every active queue holds fewer than lo_wm flits it raises down_trig
// (only above stage 1). Both are combinational, so the stage enable block
// sees a threshold violation in the same cycle it occurs, as in the paper.
// The paper evaluates a high watermark of 75% and a low one of 22% of the
// buffer; the rule "any queue high / all queues low" is this design's
// reading of it. cur_stage is the number of enabled stages, 1..NSTAGES.
module backlog_monitor #(
  parameter int NPORTS  = 6,
  parameter int NSTAGES = 4,
  parameter int BL_W    = 11
) (
  input  logic [BL_W-1:0]            backlog [NPORTS],
  input  logic [NPORTS-1:0]          active_ports,
  input  logic [BL_W-1:0]            hi_wm,
  input  logic [BL_W-1:0]            lo_wm,
  input  logic [$clog2(NSTAGES):0]   cur_stage,
  output logic                       up_trig,
  output logic                       down_trig
);
  logic any_high, all_low;
  always_comb begin
    any_high = 1'b0;
    all_low  = 1'b1;
    for (int p = 0; p < NPORTS; p++) begin
      if (active_ports[p]) begin
        if (backlog[p] > hi_wm)   any_high = 1'b1;
        if (!(backlog[p] < lo_wm)) all_low = 1'b0;
      end
    end
    up_trig   = any_high && (int'(cur_stage) < NSTAGES);
    down_trig = all_low && !any_high && (int'(cur_stage) > 1);
  end
endmodule

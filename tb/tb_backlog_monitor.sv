// tb_backlog_monitor: self-checking test of the backlog monitor. Applies
// random backlogs, active port masks, stages and watermarks (plus directed
// corner cases at exactly the watermarks) and compares both triggers with
// a reference model; the triggers are combinational, so they are checked
// in the same cycle as the inputs change.
module tb_backlog_monitor;
  localparam int NP = 6, NS = 4, BL_W = 11;
  logic [BL_W-1:0] backlog [NP];
  logic [NP-1:0] active_ports;
  logic [BL_W-1:0] hi_wm, lo_wm;
  logic [2:0] cur_stage;
  logic up_trig, down_trig;
  int checks = 0, failures = 0;

  backlog_monitor #(.NPORTS(NP), .NSTAGES(NS), .BL_W(BL_W)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic eval_ref;
    int nhigh, nlow, nact;
    logic eu, ed;
    nhigh = 0; nlow = 0; nact = 0;
    for (int p = 0; p < NP; p++) if (active_ports[p]) begin
      nact++;
      if (int'(backlog[p]) > int'(hi_wm)) nhigh++;
      if (int'(backlog[p]) < int'(lo_wm)) nlow++;
    end
    eu = (nhigh > 0) && (cur_stage < NS);
    ed = (nlow == nact) && (nhigh == 0) && (cur_stage > 1);
    #1;
    check(up_trig == eu && down_trig == ed,
          $sformatf("up %b/%b down %b/%b", up_trig, eu, down_trig, ed));
  endtask

  initial begin
    hi_wm = 768; lo_wm = 225;
    // directed: exactly at the watermarks there is no trigger
    active_ports = 6'b000111; cur_stage = 2;
    for (int p = 0; p < NP; p++) backlog[p] = 500;
    backlog[0] = 768; #1 eval_ref(); check(!up_trig, "hi watermark itself triggers");
    backlog[0] = 769; #1 eval_ref(); check(up_trig, "above hi watermark");
    for (int p = 0; p < 3; p++) backlog[p] = 224;
    #1 eval_ref(); check(down_trig, "all below lo watermark");
    backlog[2] = 225; #1 eval_ref(); check(!down_trig, "lo watermark itself");
    backlog[5] = 2000; backlog[2] = 0; #1 eval_ref(); check(down_trig && !up_trig, "inactive port ignored");
    cur_stage = 1; #1 eval_ref(); check(!down_trig, "no down from stage 1");
    cur_stage = 4; backlog[1] = 1000; #1 eval_ref(); check(!up_trig, "no up from last stage");
    // random
    for (int t = 0; t < 2000; t++) begin
      active_ports = 6'($urandom);
      cur_stage = 3'($urandom_range(1, NS));
      hi_wm = 11'($urandom_range(300, 1000));
      lo_wm = 11'($urandom_range(0, 300));
      for (int p = 0; p < NP; p++)
        backlog[p] = (t % 2) ? 11'($urandom_range(0, 1024)) : 11'($urandom_range(0, 320));
      #1 eval_ref();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

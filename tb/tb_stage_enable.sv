// tb_stage_enable: self-checking test of the stage enable block. Walks the
// stage state through: a local up trigger (electronics on at once, stage-on
// message requested, CAM stage switched one cycle after Stage RDY), a
// trigger ignored while busy, a local down trigger (CAM stage back at once,
// wait for the stage's queue to drain, stage-off message, electronics off
// once the message has been sent), a received stage-on and stage-off
// message (no message of its own), an out-of-order received message that
// must be ignored, and up steps to the last stage and no further. A small
// model of the message generator acknowledges and completes the requests.
module tb_stage_enable;
  localparam int NP = 6, NS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic up_trig, down_trig, remote_valid, busy, msg_req, msg_ack, msg_done;
  logic [15:0] remote_stage_id;
  logic [NS-1:0] stage_rdy_i, stage_en_o;
  logic [NP-1:0] stage_mask [NS];
  logic [NP-1:0] port_empty, active_ports, port_tx_en;
  logic [2:0] cur_stage, msg_id;
  logic [1:0] cam_stage;
  logic [31:0] n_up, n_down;
  int checks = 0, failures = 0;

  stage_enable #(.NPORTS(NP), .NSTAGES(NS)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // message generator model: ack when idle, done 8 cycles later
  int gen_cnt = 0;
  int n_req_up = 0, n_req_down = 0;
  logic [2:0] last_id;
  assign msg_ack = msg_req && gen_cnt == 0;
  assign msg_done = (gen_cnt == 1);
  always @(posedge clk) begin
    if (msg_ack) begin
      gen_cnt <= 8; last_id <= msg_id;
      if (msg_id[2]) n_req_down++; else n_req_up++;
    end else if (gen_cnt > 0) gen_cnt <= gen_cnt - 1;
  end

  task automatic tick(input int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    up_trig = 0; down_trig = 0; remote_valid = 0; remote_stage_id = 0;
    stage_rdy_i = 4'b0001; port_empty = '1;
    stage_mask[0] = 6'b000111; stage_mask[1] = 6'b001000;
    stage_mask[2] = 6'b010000; stage_mask[3] = 6'b100000;
    tick(2); rst_n = 1; tick();
    check(cur_stage == 1 && stage_en_o == 4'b0001 && active_ports == 6'b000111 && cam_stage == 0,
          "reset state");
    // local up
    up_trig = 1; tick(); up_trig = 0;
    check(stage_en_o == 4'b0011 && port_tx_en == 6'b001111, "stage 2 electronics on at once");
    check(cur_stage == 1, "CAM must wait for RDY");
    up_trig = 1; tick(); up_trig = 0;            // ignored while busy
    check(stage_en_o == 4'b0011, "trigger while busy ignored");
    tick(10);
    check(cur_stage == 1 && busy, "still waiting for RDY");
    stage_rdy_i[1] = 1; tick();
    check(cur_stage == 2 && cam_stage == 1 && active_ports == 6'b001111 && !busy,
          "stage 2 active the cycle after RDY");
    tick(10);
    check(n_req_up == 1 && last_id == 3'b001, "stage-on message for stage 2 requested once");
    // local down
    port_empty = 6'b110111;                      // port 3 still has frames
    down_trig = 1; tick(); down_trig = 0;
    check(cur_stage == 1 && active_ports == 6'b000111, "CAM back to stage 1 at once");
    check(stage_en_o == 4'b0011, "electronics stay on while draining");
    tick(5);
    check(n_req_down == 0, "no stage-off message before drained");
    port_empty = '1;
    tick(5);                                     // settle time (8) runs out
    check(n_req_down == 1 && last_id == 3'b101, "stage-off message for stage 2");
    check(stage_en_o == 4'b0011, "electronics on until message sent");
    tick(10);
    check(stage_en_o == 4'b0001 && n_down == 1 && !busy, "stage 2 off after message");
    stage_rdy_i[1] = 0;
    // received stage-on for stage 3 while at stage 1: ignored
    remote_valid = 1; remote_stage_id = 16'h0003; tick(); remote_valid = 0;
    check(stage_en_o == 4'b0001 && !busy, "out-of-order remote request ignored");
    // received stage-on for stage 2
    remote_valid = 1; remote_stage_id = 16'h0002; tick(); remote_valid = 0;
    check(stage_en_o == 4'b0011, "remote up turns electronics on");
    stage_rdy_i[1] = 1; tick(2);
    check(cur_stage == 2, "remote up completes");
    tick(10);
    check(n_req_up == 1, "no message for a remote request");
    down_trig = 1; tick(); down_trig = 0; tick(3);
    check(cur_stage == 2 && stage_en_o == 4'b0011 && !busy, "stage raised by a neighbour is held");
    // received stage-off for stage 2
    remote_valid = 1; remote_stage_id = 16'h8002; tick(); remote_valid = 0;
    check(cur_stage == 1, "remote down switches CAM at once");
    tick(7);
    check(stage_en_o == 4'b0011, "ports kept on during the settle time");
    tick(3);
    check(stage_en_o == 4'b0001 && n_down == 2 && n_req_down == 1, "remote down without message");
    // climb to the last stage
    stage_rdy_i = '1;
    for (int s = 2; s <= NS; s++) begin
      up_trig = 1; tick(); up_trig = 0; tick(12);
      check(int'(cur_stage) == s, $sformatf("climb to stage %0d", s));
    end
    up_trig = 1; tick(); up_trig = 0; tick(3);
    check(cur_stage == NS && stage_en_o == 4'b1111 && !busy && n_up == 5, "no stage above the last");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// stage_enable: the stage enable component, which owns the LCDC stage state
// of the switch.
//
// Stages are numbered 1..NSTAGES; "stage k active" means the links of
// stages 1..k are lit. cur_stage selects the stage CAM map the scheduler
// uses (cam_stage = cur_stage-1) and active_ports is the union of the port
// masks of stages 1..cur_stage. stage_mask[s] lists the ports that belong
// to stage s+1 (set by the control plane).
//   Up (up_trig from the backlog monitor, or a received stage-on message
//   for stage cur+1): stage_en_o of the new stage goes high at once, and a
//   local trigger also asks the message generator for the stage-on frame.
//   When stage_rdy_i of that stage is high and the stage-on request has
//   been taken by the generator, cur_stage steps up in the next cycle, so
//   the next frame is scheduled with the new stage's map.
//   Down (down_trig, or a received stage-off message for the current
//   stage): cur_stage steps down at once, so no new frame goes to the
//   stage's ports; when their output queues have drained, a local trigger
//   sends the stage-off frame and the stage's electronics are switched off
//   once the frame has left the generator (a received message switches them
//   off right after draining).
// The drain check starts SETTLE cycles after the step down, so a frame the
// scheduler had already assigned to a leaving port (at most 4 cycles before
// it reaches the queue) is counted; port_empty covers output and Tx queues.
// A stage raised by a neighbour's stage-on message is held: the local down
// trigger does not lower it, only the neighbour's stage-off message does
// (otherwise a lightly loaded switch would undo the request at once).
// Triggers are taken only while no transition is in progress. msg_req is
// held until msg_ack; msg_id = {down, stage-1}. The sequence follows the
// paper; the neighbour's acknowledgement has no frame format in the paper,
// so stage_rdy_i stands for "transceiver on and neighbour ready".
module stage_enable
  import lcdc_pkg::*;
#(
  parameter int NPORTS  = 6,
  parameter int NSTAGES = 4,
  parameter int SETTLE  = 8,
  localparam int SW     = $clog2(NSTAGES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                up_trig,
  input  logic                down_trig,
  input  logic                remote_valid,
  input  logic [15:0]         remote_stage_id,
  input  logic [NSTAGES-1:0]  stage_rdy_i,
  output logic [NSTAGES-1:0]  stage_en_o,
  input  logic [NPORTS-1:0]   stage_mask [NSTAGES],
  input  logic [NPORTS-1:0]   port_empty,
  output logic [SW:0]         cur_stage,
  output logic [SW-1:0]       cam_stage,
  output logic [NPORTS-1:0]   active_ports,
  output logic [NPORTS-1:0]   port_tx_en,
  output logic                busy,
  output logic                msg_req,
  output logic [SW:0]         msg_id,
  input  logic                msg_ack,
  input  logic                msg_done,
  output logic [31:0]         n_up,
  output logic [31:0]         n_down
);
  typedef enum logic [1:0] { S_IDLE, S_WAIT_RDY, S_DRAIN, S_SEND_DOWN } state_t;
  state_t     st;
  logic [SW:0] tgt;        // stage being turned on or off
  logic        remote;     // transition started by a received message
  logic [NSTAGES-1:0] held; // stage raised by a neighbour's stage-on message
  logic [$clog2(SETTLE+1)-1:0] settle;  // cycles left before the drain check

  logic        r_down;
  logic [7:0]  r_stage;
  assign r_down  = remote_stage_id[15];
  assign r_stage = remote_stage_id[7:0];

  assign busy      = (st != S_IDLE);
  assign cam_stage = SW'(cur_stage - 1'b1);

  always_comb begin
    active_ports = '0;
    port_tx_en   = '0;
    for (int s = 0; s < NSTAGES; s++) begin
      if (s < int'(cur_stage)) active_ports |= stage_mask[s];
      if (stage_en_o[s])       port_tx_en   |= stage_mask[s];
    end
  end

  // Ports lit only by stage tgt (they must drain before it turns off).
  logic [NPORTS-1:0] keep_ports, off_ports;
  always_comb begin
    keep_ports = '0;
    for (int s = 0; s < NSTAGES; s++)
      if (s < int'(tgt) - 1) keep_ports |= stage_mask[s];
    off_ports = stage_mask[SW'(tgt - 1'b1)] & ~keep_ports;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; tgt <= (SW+1)'(1); remote <= 1'b0;
      cur_stage  <= (SW+1)'(1);
      stage_en_o <= NSTAGES'(1);
      msg_req <= 1'b0; msg_id <= '0;
      n_up <= '0; n_down <= '0; held <= '0; settle <= '0;
    end else begin
      if (msg_ack) msg_req <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (remote_valid && !r_down && int'(r_stage) == int'(cur_stage) + 1
              && int'(r_stage) <= NSTAGES) begin
            tgt <= cur_stage + 1'b1; remote <= 1'b1;
            stage_en_o[SW'(cur_stage)] <= 1'b1;
            held[SW'(cur_stage)] <= 1'b1;
            st <= S_WAIT_RDY;
          end else if (remote_valid && r_down && int'(r_stage) == int'(cur_stage)
                       && int'(cur_stage) > 1) begin
            tgt <= cur_stage; remote <= 1'b1;
            cur_stage <= cur_stage - 1'b1;
            held[SW'(cur_stage - 1'b1)] <= 1'b0;
            settle <= ($bits(settle))'(SETTLE);
            st <= S_DRAIN;
          end else if (up_trig && int'(cur_stage) < NSTAGES) begin
            tgt <= cur_stage + 1'b1; remote <= 1'b0;
            stage_en_o[SW'(cur_stage)] <= 1'b1;
            msg_req <= 1'b1;
            msg_id  <= {1'b0, SW'(cur_stage)};
            st <= S_WAIT_RDY;
          end else if (down_trig && int'(cur_stage) > 1
                       && !held[SW'(cur_stage - 1'b1)]) begin
            tgt <= cur_stage; remote <= 1'b0;
            cur_stage <= cur_stage - 1'b1;
            settle <= ($bits(settle))'(SETTLE);
            st <= S_DRAIN;
          end
        end
        S_WAIT_RDY: begin
          if (stage_rdy_i[SW'(tgt - 1'b1)] && !msg_req) begin
            cur_stage <= tgt;
            n_up <= n_up + 1;
            st <= S_IDLE;
          end
        end
        S_DRAIN: begin
          if (settle != '0) begin
            settle <= settle - 1'b1;
          end else if ((off_ports & ~port_empty) == '0) begin
            if (remote) begin
              stage_en_o[SW'(tgt - 1'b1)] <= 1'b0;
              n_down <= n_down + 1;
              st <= S_IDLE;
            end else begin
              msg_req <= 1'b1;
              msg_id  <= {1'b1, SW'(tgt - 1'b1)};
              st <= S_SEND_DOWN;
            end
          end
        end
        S_SEND_DOWN: begin
          if (msg_done && !msg_req) begin
            stage_en_o[SW'(tgt - 1'b1)] <= 1'b0;
            n_down <= n_down + 1;
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_stage_range: assert property (@(posedge clk) disable iff (!rst_n)
                   cur_stage >= 1 && int'(cur_stage) <= NSTAGES);
endmodule

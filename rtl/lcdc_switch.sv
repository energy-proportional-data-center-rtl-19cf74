// lcdc_switch: LCDC (laser control for data centers) switch, NPORTS x NPORTS.
//
// A combined input-output queued Ethernet switch whose uplinks are grouped
// into NSTAGES "stages" that are switched on and off with the traffic, so
// the optical transceivers of idle redundant links can be powered down
// while every destination stays reachable. Datapath, 64-bit flits:
//   MAC Rx queues (frame_fifo) + control frame generator (virtual port)
//   -> 1 input round-robin arbiter (adds the annotation flit)
//   -> 2 control frame parser / logical port CAM   (3-cycle delay)
//   -> 3 stage-aware scheduler with one CAM map per stage (4-cycle delay)
//   -> 4 packet enqueue into one RAM output queue per port
//   -> MAC Tx queues (frame_fifo).
// Beside it, the backlog monitor compares output queue backlogs with the
// watermarks every cycle, the stage enable block drives the stage
// electronics (stage_en_o / stage_rdy_i) and selects the CAM map in use,
// and the generator sends stage-on/off control frames in band. All tables
// and thresholds are written over the Avalon-MM slave (avs_*) by the
// control-plane CPU, which sits outside this module, as do the MACs and the
// optical transceivers.
// Latency: a frame's first flit is written into its output queue 7 cycles
// after it enters stage 2, as in the paper's prototype (2 cycles logical
// lookup, 2 stage map, 2 scheduler, 1 enqueue), and appears at the Tx
// queue output once the whole frame is stored. Port count, stage count,
// CAM size, datapath width and the 0x9100 control frame follow the paper;
// queue depths and the register map are this design's.
module lcdc_switch
  import lcdc_pkg::*;
#(
  parameter int NPORTS      = 6,
  parameter int NSTAGES     = 4,
  parameter int CAM_ENTRIES = 100,
  parameter int RXQ_DEPTH   = 256,
  parameter int TXQ_DEPTH   = 256,
  parameter int OQ_DEPTH    = 1024,
  localparam int BL_W       = $clog2(OQ_DEPTH) + 1,
  localparam int SW         = $clog2(NSTAGES)
) (
  input  logic                clk,
  input  logic                rst_n,
  // frames from the MACs
  input  logic [NPORTS-1:0]   rx_valid,
  output logic [NPORTS-1:0]   rx_ready,
  input  flit_t               rx_flit [NPORTS],
  // frames to the MACs
  output logic [NPORTS-1:0]   tx_valid,
  input  logic [NPORTS-1:0]   tx_ready,
  output flit_t               tx_flit [NPORTS],
  // configuration slave for the control-plane CPU
  input  logic [11:0]         avs_address,
  input  logic                avs_write,
  input  logic [31:0]         avs_writedata,
  input  logic                avs_read,
  output logic [31:0]         avs_readdata,
  output logic                avs_readdatavalid,
  // stage electronics
  output logic [NSTAGES-1:0]  stage_en_o,
  input  logic [NSTAGES-1:0]  stage_rdy_i,
  output logic [NPORTS-1:0]   port_tx_en,
  // status
  output logic [SW:0]         cur_stage,
  output logic [31:0]         n_stage_up,
  output logic [31:0]         n_stage_down,
  output logic [31:0]         n_ctrl_sent,
  output logic [31:0]         n_sched_unicast,
  output logic [31:0]         n_sched_copies,
  output logic [31:0]         n_enq  [NPORTS],
  output logic [31:0]         n_drop [NPORTS]
);
  localparam int NIN = NPORTS + 1;

  // configuration
  logic [BL_W-1:0]   hi_wm, lo_wm;
  logic [31:0]       sender_id;
  logic [NPORTS-1:0] stage_mask [NSTAGES];
  logic              lcam_wr_en, map_wr_en, msg_wr_en, map_wr_word;
  logic [6:0]        lcam_wr_idx, map_wr_idx, msg_wr_addr;
  logic [2:0]        lcam_wr_word;
  logic [SW-1:0]     map_wr_stage;
  logic [31:0]       tbl_wr_data;

  // stage control
  logic              up_trig, down_trig, st_busy;
  logic              notify_valid;
  logic [15:0]       notify_stage_id;
  logic [SW-1:0]     cam_stage;
  logic [NPORTS-1:0] active_ports, port_empty;
  logic              msg_req, msg_ack, msg_done;
  logic [SW:0]       msg_id;

  // datapath
  logic [NIN-1:0]    arb_in_valid, arb_in_ready;
  flit_t             arb_in_flit [NIN];
  logic              s1_valid, s2_valid, s3_valid;
  flit_t             s1_flit, s2_flit, s3_flit;
  logic [BL_W-1:0]   backlog [NPORTS];

  avalon_cfg #(.NPORTS(NPORTS), .NSTAGES(NSTAGES), .BL_W(BL_W),
               .DEF_HI(OQ_DEPTH * 75 / 100), .DEF_LO(OQ_DEPTH * 22 / 100)) u_cfg (
    .clk, .rst_n,
    .avs_address, .avs_write, .avs_writedata, .avs_read, .avs_readdata, .avs_readdatavalid,
    .st_cur_stage (cur_stage), .st_stage_en (stage_en_o), .st_busy (st_busy),
    .hi_wm, .lo_wm, .sender_id, .stage_mask,
    .lcam_wr_en, .lcam_wr_idx, .lcam_wr_word,
    .map_wr_en, .map_wr_stage, .map_wr_idx, .map_wr_word,
    .msg_wr_en, .msg_wr_addr, .tbl_wr_data
  );

  // MAC receive queues
  for (genvar p = 0; p < NPORTS; p++) begin : g_rx
    logic [$clog2(RXQ_DEPTH):0] lvl, frm;
    frame_fifo #(.DEPTH(RXQ_DEPTH)) u_rxq (
      .clk, .rst_n,
      .in_valid (rx_valid[p]), .in_ready (rx_ready[p]), .in_flit (rx_flit[p]),
      .out_valid (arb_in_valid[p]), .out_ready (arb_in_ready[p]), .out_flit (arb_in_flit[p]),
      .level (lvl), .frames (frm)
    );
  end

  // virtual port: control frame generator
  ctrl_msg_gen #(.NMSG(2 * NSTAGES), .MSG_FLITS(8), .LAST_EMPTY(4)) u_gen (
    .clk, .rst_n,
    .msg_req, .msg_id, .msg_ack, .msg_done,
    .out_valid (arb_in_valid[NPORTS]), .out_ready (arb_in_ready[NPORTS]),
    .out_flit  (arb_in_flit[NPORTS]),
    .wr_en (msg_wr_en), .wr_addr (msg_wr_addr), .wr_data (tbl_wr_data),
    .n_sent (n_ctrl_sent)
  );

  // 1. input round-robin arbiter
  input_arbiter #(.NIN(NIN)) u_arb (
    .clk, .rst_n,
    .in_valid (arb_in_valid), .in_ready (arb_in_ready), .in_flit (arb_in_flit),
    .out_valid (s1_valid), .out_flit (s1_flit)
  );

  // 2. control frame parser / logical port lookup
  stage_pkt_parser #(.CAM_ENTRIES(CAM_ENTRIES)) u_parse (
    .clk, .rst_n,
    .in_valid (s1_valid), .in_flit (s1_flit),
    .out_valid (s2_valid), .out_flit (s2_flit),
    .local_sender_id (sender_id),
    .notify_valid, .notify_stage_id,
    .cam_wr_en (lcam_wr_en), .cam_wr_idx (lcam_wr_idx),
    .cam_wr_word (lcam_wr_word), .cam_wr_data (tbl_wr_data)
  );

  // 3. stage-aware scheduler
  stage_scheduler #(.NPORTS(NPORTS), .NSTAGES(NSTAGES), .CAM_ENTRIES(CAM_ENTRIES),
                    .BL_W(BL_W)) u_sched (
    .clk, .rst_n,
    .in_valid (s2_valid), .in_flit (s2_flit),
    .out_valid (s3_valid), .out_flit (s3_flit),
    .cam_stage, .active_ports, .backlog,
    .map_wr_en, .map_wr_stage, .map_wr_idx, .map_wr_word, .map_wr_data (tbl_wr_data),
    .n_sched_unicast, .n_sched_copies
  );

  // 4. output queues and MAC transmit queues
  for (genvar p = 0; p < NPORTS; p++) begin : g_out
    logic  oq_valid, oq_ready;
    flit_t oq_flit;
    logic [$clog2(TXQ_DEPTH):0] lvl, frm;
    logic  oq_empty;
    output_queue #(.PORT_ID(p), .DEPTH(OQ_DEPTH)) u_oq (
      .clk, .rst_n,
      .in_valid (s3_valid), .in_flit (s3_flit),
      .out_valid (oq_valid), .out_ready (oq_ready), .out_flit (oq_flit),
      .backlog (backlog[p]), .empty (oq_empty),
      .n_enq (n_enq[p]), .n_drop (n_drop[p])
    );
    frame_fifo #(.DEPTH(TXQ_DEPTH)) u_txq (
      .clk, .rst_n,
      .in_valid (oq_valid), .in_ready (oq_ready), .in_flit (oq_flit),
      .out_valid (tx_valid[p]), .out_ready (tx_ready[p]), .out_flit (tx_flit[p]),
      .level (lvl), .frames (frm)
    );
    // a port is drained when neither its output queue nor its Tx queue
    // holds a flit
    assign port_empty[p] = oq_empty && (lvl == '0);
  end

  backlog_monitor #(.NPORTS(NPORTS), .NSTAGES(NSTAGES), .BL_W(BL_W)) u_mon (
    .backlog, .active_ports, .hi_wm, .lo_wm, .cur_stage, .up_trig, .down_trig
  );

  stage_enable #(.NPORTS(NPORTS), .NSTAGES(NSTAGES)) u_se (
    .clk, .rst_n,
    .up_trig, .down_trig,
    .remote_valid (notify_valid), .remote_stage_id (notify_stage_id),
    .stage_rdy_i, .stage_en_o, .stage_mask, .port_empty,
    .cur_stage, .cam_stage, .active_ports, .port_tx_en, .busy (st_busy),
    .msg_req, .msg_id, .msg_ack, .msg_done,
    .n_up (n_stage_up), .n_down (n_stage_down)
  );
endmodule

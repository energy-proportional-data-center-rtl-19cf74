// stage_pkt_parser: pipeline stage 2, "stage control packet OR logical port
// lookup".
//
// Every frame arrives behind its annotation flit. The stage watches the
// first three flits of the frame:
//   flit 0  octets 0-7   destination MAC -> key of the logical port CAM
//   flit 1  octets 8-15  EtherType (octets 12-13) and senderID[31:16]
//   flit 2  octets 16-23 senderID[15:0], stageID, TTL
// A frame with EtherType 0x9100 is an LCDC control frame. If its senderID is
// this switch's own, the frame was generated here (the stage change is
// already under way) and it goes straight to the scheduler. Otherwise the
// stageID is handed to the stage enable block, the TTL is decremented in
// flit 2, and the frame is marked for dropping when the new TTL is zero.
// Any other frame takes the logical port and multicast bit from the CAM; a
// CAM miss marks the frame for dropping.
// Timing: every flit is delayed 3 cycles. If flit 0 enters in cycle c, the
// CAM result is ready in c+2 (2-cycle lookup), flit 2 is at the input in
// c+2 and the annotation flit leaves in c+2 with all fields filled in;
// notify_valid pulses in c+3. Frames must be at least 3 flits long (every
// Ethernet frame is). The field positions, TTL rule and EtherType follow the
// paper; the 3-cycle delay line and drop-on-miss are this design's choices.
module stage_pkt_parser
  import lcdc_pkg::*;
#(
  parameter int          CAM_ENTRIES = 100,
  parameter logic [15:0] ETYPE       = CTRL_ETYPE
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  flit_t        in_flit,
  output logic         out_valid,
  output flit_t        out_flit,
  input  logic [31:0]  local_sender_id,
  output logic         notify_valid,
  output logic [15:0]  notify_stage_id,
  input  logic         cam_wr_en,
  input  logic [6:0]   cam_wr_idx,
  input  logic [2:0]   cam_wr_word,
  input  logic [31:0]  cam_wr_data
);
  logic       dv [3];
  flit_t      df [3];
  logic [1:0] idx;          // header flit index of the incoming flit (3 = past header)
  logic       is_ctrl_r;
  logic [15:0] sender_hi_r;

  logic               cam_valid, cam_hit, cam_mc;
  logic [LPORT_W-1:0] cam_lport;

  // Header fields of the flit at the input.
  logic        at0, at1, at2;
  logic [31:0] sender;
  logic [15:0] ttl_in, ttl_dec;
  logic        is_local, ttl_zero;
  flit_t       in_mod;

  assign at0 = in_valid && !in_flit.ann && idx == 2'd0;
  assign at1 = in_valid && !in_flit.ann && idx == 2'd1;
  assign at2 = in_valid && !in_flit.ann && idx == 2'd2;
  assign sender   = {sender_hi_r, in_flit.data[63:48]};
  assign ttl_in   = in_flit.data[31:16];
  assign ttl_dec  = (ttl_in == 16'd0) ? 16'd0 : ttl_in - 16'd1;
  assign is_local = (sender == local_sender_id);
  assign ttl_zero = (ttl_dec == 16'd0);

  always_comb begin
    in_mod = in_flit;
    if (at2 && is_ctrl_r && !is_local) in_mod.data[31:16] = ttl_dec;
  end

  lport_cam #(.ENTRIES(CAM_ENTRIES)) u_cam (
    .clk, .rst_n,
    .key_valid (at0),
    .key       (in_flit.data[63:16]),
    .res_valid (cam_valid),
    .hit       (cam_hit),
    .lport     (cam_lport),
    .mcast     (cam_mc),
    .wr_en     (cam_wr_en),
    .wr_idx    (cam_wr_idx),
    .wr_word   (cam_wr_word),
    .wr_data   (cam_wr_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) begin dv[i] <= 1'b0; df[i] <= '0; end
      idx <= 2'd3; is_ctrl_r <= 1'b0; sender_hi_r <= '0;
      notify_valid <= 1'b0; notify_stage_id <= '0;
    end else begin
      dv[0] <= in_valid; df[0] <= in_mod;
      dv[1] <= dv[0];    df[1] <= df[0];
      dv[2] <= dv[1];    df[2] <= df[1];
      if (in_valid) begin
        if (in_flit.ann)       idx <= 2'd0;
        else if (idx != 2'd3)  idx <= idx + 2'd1;
      end
      if (at1) begin
        is_ctrl_r   <= (in_flit.data[31:16] == ETYPE);
        sender_hi_r <= in_flit.data[15:0];
      end
      notify_valid    <= at2 && is_ctrl_r && !is_local;
      notify_stage_id <= in_flit.data[47:32];
    end
  end

  // Annotation merge: the annotation flit is at the output in the cycle the
  // CAM result and flit 2 are available.
  ann_t a;
  always_comb begin
    a        = ann_t'(df[2].data);
    out_flit = df[2];
    if (df[2].ann) begin
      a.is_ctrl = is_ctrl_r;
      a.lk_done = 1'b1;
      if (is_ctrl_r) begin
        a.local_  = is_local;
        a.drop    = !is_local && ttl_zero;
        a.ttl_new = ttl_dec[7:0];
      end else begin
        a.miss  = !cam_hit;
        a.lport = cam_lport;
        a.mcast = cam_mc;
      end
      out_flit.data = a;
    end
  end
  assign out_valid = dv[2];

  a_hdr_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                   (dv[2] && df[2].ann) |-> (at2 && cam_valid));
endmodule

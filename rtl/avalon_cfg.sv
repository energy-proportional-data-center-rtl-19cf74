// avalon_cfg: Avalon-MM configuration slave between the control-plane CPU
// and the switch.
//
// It holds the administrator registers (high and low backlog watermarks,
// this switch's senderID, the port mask of each stage) and turns writes in
// the table windows into write strobes for the logical port CAM, the stage
// CAM maps and the control frame memory. Word address map (12 bits):
//   0x000 high watermark   0x001 low watermark   0x002 senderID
//   0x003 status (read only): {busy[8], stage_en[7:4], cur_stage[3:0]}
//   0x008+s  port mask of stage s+1
//   0x400-0x7FF logical CAM: entry = addr[9:3], word = addr[2:0]
//   0x800-0xBFF stage maps:  stage = addr[9:8], entry = addr[7:1], word = addr[0]
//   0xC00-0xFFF control frames: addr[6:0] = {msg, flit, half}
// Writes take effect at the clock edge; reads return data one cycle after
// avs_read with avs_readdatavalid; there is no wait state. Tables are write
// only. The paper names the Avalon interface and what it configures; the
// register map and the reset values (75%/22% watermarks, ports 0-2 in stage
// 1 and port s+1 in stage s) are this design's.
module avalon_cfg #(
  parameter int          NPORTS   = 6,
  parameter int          NSTAGES  = 4,
  parameter int          BL_W     = 11,
  parameter int          DEF_HI   = 768,
  parameter int          DEF_LO   = 225,
  parameter logic [31:0] DEF_SID  = 32'h0000_0001,
  localparam int         SW       = $clog2(NSTAGES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [11:0]        avs_address,
  input  logic               avs_write,
  input  logic [31:0]        avs_writedata,
  input  logic               avs_read,
  output logic [31:0]        avs_readdata,
  output logic               avs_readdatavalid,
  input  logic [SW:0]        st_cur_stage,
  input  logic [NSTAGES-1:0] st_stage_en,
  input  logic               st_busy,
  output logic [BL_W-1:0]    hi_wm,
  output logic [BL_W-1:0]    lo_wm,
  output logic [31:0]        sender_id,
  output logic [NPORTS-1:0]  stage_mask [NSTAGES],
  output logic               lcam_wr_en,
  output logic [6:0]         lcam_wr_idx,
  output logic [2:0]         lcam_wr_word,
  output logic               map_wr_en,
  output logic [SW-1:0]      map_wr_stage,
  output logic [6:0]         map_wr_idx,
  output logic               map_wr_word,
  output logic               msg_wr_en,
  output logic [6:0]         msg_wr_addr,
  output logic [31:0]        tbl_wr_data
);
  logic [1:0] region;
  assign region = avs_address[11:10];

  assign tbl_wr_data  = avs_writedata;
  assign lcam_wr_en   = avs_write && region == 2'd1;
  assign lcam_wr_idx  = avs_address[9:3];
  assign lcam_wr_word = avs_address[2:0];
  assign map_wr_en    = avs_write && region == 2'd2;
  assign map_wr_stage = SW'(avs_address[9:8]);
  assign map_wr_idx   = avs_address[7:1];
  assign map_wr_word  = avs_address[0];
  assign msg_wr_en    = avs_write && region == 2'd3;
  assign msg_wr_addr  = avs_address[6:0];

  function automatic logic [NPORTS-1:0] def_mask(input int s);
    logic [NPORTS-1:0] m;
    m = '0;
    if (s == 0) m[2:0] = 3'b111;
    else if (s + 2 < NPORTS) m[s+2] = 1'b1;
    return m;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_wm <= BL_W'(DEF_HI);
      lo_wm <= BL_W'(DEF_LO);
      sender_id <= DEF_SID;
      for (int s = 0; s < NSTAGES; s++) stage_mask[s] <= def_mask(s);
      avs_readdata <= '0;
      avs_readdatavalid <= 1'b0;
    end else begin
      if (avs_write && region == 2'd0) begin
        case (avs_address[9:0]) inside
          10'h000: hi_wm     <= avs_writedata[BL_W-1:0];
          10'h001: lo_wm     <= avs_writedata[BL_W-1:0];
          10'h002: sender_id <= avs_writedata;
          [10'h008:10'h00F]: begin
            for (int k = 0; k < NSTAGES; k++)
              if (int'(avs_address[2:0]) == k) stage_mask[k] <= avs_writedata[NPORTS-1:0];
          end
          default: ;
        endcase
      end
      avs_readdatavalid <= avs_read;
      avs_readdata <= '0;
      if (avs_read && region == 2'd0) begin
        case (avs_address[9:0]) inside
          10'h000: avs_readdata <= 32'(hi_wm);
          10'h001: avs_readdata <= 32'(lo_wm);
          10'h002: avs_readdata <= sender_id;
          10'h003: avs_readdata <= {23'd0, st_busy, 4'(st_stage_en), 4'(st_cur_stage)};
          [10'h008:10'h00F]: begin
            for (int k = 0; k < NSTAGES; k++)
              if (int'(avs_address[2:0]) == k) avs_readdata <= 32'(stage_mask[k]);
          end
          default: ;
        endcase
      end
    end
  end
endmodule

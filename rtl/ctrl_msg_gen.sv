// ctrl_msg_gen: stage enable control message generator with its control
// frame memory; it is the switch's virtual input port.
//
// A two-port memory (one write port for the control plane, one read port
// for the generator) holds NMSG pre-built LCDC control frames of MSG_FLITS
// flits each: message {down, s} is the stage-on (down = 0) or stage-off
// (down = 1) frame for stage s+1, already carrying EtherType 0x9100, this
// switch's senderID, the stageID and the initial TTL, padded to the
// minimum Ethernet frame. The control plane writes it 32 bits at a time at
// address {msg, flit, half} (half 0 = data[63:32]).
// When msg_req is high and no frame is being sent, msg_ack pulses and the
// chosen frame is offered to the input arbiter from the next cycle, one
// flit per out_ready; msg_done pulses with the last flit. The last flit has
// LAST_EMPTY unused bytes (60-byte frame, FCS added by the MAC).
// The memory-based generator follows the paper; sizes and layout are this
// design's choices.
module ctrl_msg_gen
  import lcdc_pkg::*;
#(
  parameter int NMSG       = 8,
  parameter int MSG_FLITS  = 8,
  parameter int LAST_EMPTY = 4,
  localparam int MW = $clog2(NMSG),
  localparam int FW = $clog2(MSG_FLITS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              msg_req,
  input  logic [MW-1:0]     msg_id,
  output logic              msg_ack,
  output logic              msg_done,
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  input  logic              wr_en,
  input  logic [MW+FW:0]    wr_addr,
  input  logic [31:0]       wr_data,
  output logic [31:0]       n_sent
);
  logic [63:0]    mem [NMSG*MSG_FLITS];
  logic           busy;
  logic [MW-1:0]  cur;
  logic [FW-1:0]  fidx;
  logic           last;

  // Write port.
  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_addr[0]) mem[wr_addr[MW+FW:1]][31:0]  <= wr_data;
      else            mem[wr_addr[MW+FW:1]][63:32] <= wr_data;
    end
  end

  // Read port.
  assign last      = (fidx == FW'(MSG_FLITS-1));
  assign out_valid = busy;
  always_comb begin
    out_flit       = '0;
    out_flit.data  = mem[{cur, fidx}];
    out_flit.sop   = (fidx == '0);
    out_flit.eop   = last;
    out_flit.empty = last ? 3'(LAST_EMPTY) : 3'd0;
  end

  assign msg_ack  = msg_req && !busy;
  assign msg_done = busy && out_ready && last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; fidx <= '0; n_sent <= '0;
    end else if (!busy) begin
      if (msg_req) begin
        busy <= 1'b1; cur <= msg_id; fidx <= '0;
      end
    end else if (out_ready) begin
      fidx <= fidx + 1'b1;
      if (last) begin
        busy   <= 1'b0;
        n_sent <= n_sent + 1;
      end
    end
  end
endmodule

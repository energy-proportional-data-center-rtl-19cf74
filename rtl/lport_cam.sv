// lport_cam: logical port lookup CAM (part of pipeline stage 2).
//
// Maps a destination MAC address to the logical port of the switch the
// recipient is attached to, plus a multicast flag for logical ports that
// name a multicast tree. Each of the ENTRIES entries holds a 48-bit key, a
// 48-bit care mask, the logical port and the multicast bit; an entry matches
// when the key agrees with the lookup key on every cared-for bit. The
// lowest-index valid match wins. With an all-ones mask this is the binary
// CAM of the paper's text; the mask makes it the "logical TCAM" of its
// block diagram.
// Timing: key presented in cycle t is registered, compared in cycle t+1 and
// the registered result is valid in cycle t+2 (the paper's 2-cycle logical
// port lookup). Entries are written by the control plane one 32-bit word at
// a time: word 0 key[31:0], 1 key[47:32], 2 mask[31:0], 3 mask[47:32],
// 4 {valid[31], mcast[16], lport[15:0]}. Entry count (100) follows the paper;
// the mask, priority rule and word layout are this design's choices.
module lport_cam
  import lcdc_pkg::*;
#(
  parameter int ENTRIES = 100
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                key_valid,
  input  logic [47:0]         key,
  output logic                res_valid,
  output logic                hit,
  output logic [LPORT_W-1:0]  lport,
  output logic                mcast,
  input  logic                wr_en,
  input  logic [6:0]          wr_idx,
  input  logic [2:0]          wr_word,
  input  logic [31:0]         wr_data
);
  logic [47:0]        e_key  [ENTRIES];
  logic [47:0]        e_mask [ENTRIES];
  logic [LPORT_W-1:0] e_lport[ENTRIES];
  logic               e_mc   [ENTRIES];
  logic               e_vld  [ENTRIES];

  logic        k_valid;
  logic [47:0] k_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        e_key[i] <= '0; e_mask[i] <= '0; e_lport[i] <= '0; e_mc[i] <= 1'b0; e_vld[i] <= 1'b0;
      end
    end else if (wr_en && int'(wr_idx) < ENTRIES) begin
      case (wr_word)
        3'd0: e_key [wr_idx] <= {e_key[wr_idx][47:32], wr_data};
        3'd1: e_key [wr_idx] <= {wr_data[15:0], e_key[wr_idx][31:0]};
        3'd2: e_mask[wr_idx] <= {e_mask[wr_idx][47:32], wr_data};
        3'd3: e_mask[wr_idx] <= {wr_data[15:0], e_mask[wr_idx][31:0]};
        3'd4: begin
          e_vld  [wr_idx] <= wr_data[31];
          e_mc   [wr_idx] <= wr_data[16];
          e_lport[wr_idx] <= wr_data[LPORT_W-1:0];
        end
        default: ;
      endcase
    end
  end

  logic               m_hit;
  logic [LPORT_W-1:0] m_lport;
  logic               m_mc;

  always_comb begin
    m_hit = 1'b0; m_lport = '0; m_mc = 1'b0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (e_vld[i] && (((k_reg ^ e_key[i]) & e_mask[i]) == 48'd0)) begin
        m_hit = 1'b1; m_lport = e_lport[i]; m_mc = e_mc[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_valid <= 1'b0; k_reg <= '0;
      res_valid <= 1'b0; hit <= 1'b0; lport <= '0; mcast <= 1'b0;
    end else begin
      k_valid   <= key_valid;
      k_reg     <= key;
      res_valid <= k_valid;
      hit       <= m_hit;
      lport     <= m_lport;
      mcast     <= m_mc;
    end
  end
endmodule

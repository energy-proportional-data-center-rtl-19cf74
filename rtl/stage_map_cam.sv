// stage_map_cam: one per-stage "CAM map" of the stage-aware scheduler.
//
// Each LCDC stage has its own table that turns a logical port into a bitmap
// of the physical output ports that may carry traffic for it while that
// stage is enabled (one bit per port; several bits set give the scheduler a
// choice, or the copy set of a multicast tree). Lookup is an exact match on
// the logical port over ENTRIES entries, lowest index first.
// Timing: key in cycle t, registered result in cycle t+2 (the paper's
// 2-cycle stage out-port map lookup). The control plane writes an entry as
// two 32-bit words: word 0 {valid[31], key[15:0]}, word 1 map[NPORTS-1:0].
// Entry count (100) and function follow the paper; the word layout is this
// design's choice.
module stage_map_cam
  import lcdc_pkg::*;
#(
  parameter int ENTRIES = 100,
  parameter int NPORTS  = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                key_valid,
  input  logic [LPORT_W-1:0]  key,
  output logic                res_valid,
  output logic                hit,
  output logic [NPORTS-1:0]   pmap,
  input  logic                wr_en,
  input  logic [6:0]          wr_idx,
  input  logic                wr_word,
  input  logic [31:0]         wr_data
);
  logic [LPORT_W-1:0] e_key [ENTRIES];
  logic [NPORTS-1:0]  e_map [ENTRIES];
  logic               e_vld [ENTRIES];

  logic               k_valid;
  logic [LPORT_W-1:0] k_reg;
  logic               m_hit;
  logic [NPORTS-1:0]  m_map;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        e_key[i] <= '0; e_map[i] <= '0; e_vld[i] <= 1'b0;
      end
    end else if (wr_en && int'(wr_idx) < ENTRIES) begin
      if (!wr_word) begin
        e_vld[wr_idx] <= wr_data[31];
        e_key[wr_idx] <= wr_data[LPORT_W-1:0];
      end else begin
        e_map[wr_idx] <= wr_data[NPORTS-1:0];
      end
    end
  end

  always_comb begin
    m_hit = 1'b0; m_map = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (e_vld[i] && e_key[i] == k_reg) begin
        m_hit = 1'b1; m_map = e_map[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_valid <= 1'b0; k_reg <= '0; res_valid <= 1'b0; hit <= 1'b0; pmap <= '0;
    end else begin
      k_valid   <= key_valid;
      k_reg     <= key;
      res_valid <= k_valid;
      hit       <= m_hit;
      pmap      <= m_map;
    end
  end
endmodule

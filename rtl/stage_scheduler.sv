// stage_scheduler: pipeline stage 3, the stage-aware scheduler.
//
// The switch keeps one stage CAM map per LCDC stage (stage_map_cam). The
// logical port from a frame's annotation is looked up in all of them at
// once and the result of the table of the currently enabled stage
// (cam_stage, driven by the stage enable block) is used. The scheduler then
// picks the output queue with the smallest backlog among the ports of that
// map (lowest port index on a tie). A multicast frame is copied to every
// port in the map. An LCDC control frame is forwarded on every port of the
// enabled stage (active_ports), so it reaches the neighbours over links that
// are already lit. Frames marked for dropping (TTL zero, logical CAM miss,
// stage map miss) get an empty queue set.
// Timing: every flit is delayed 4 cycles. The annotation flit entering in
// cycle e starts the map lookup; the maps are ready in e+2 (2 cycles), the
// scheduler registers map and backlogs in e+2 and its choice in e+3
// (2 cycles), and the annotation leaves in e+4 carrying pmap and qsel.
// Function and cycle counts follow the paper; the tie rule and the control
// frame port set are this design's reading of it.
module stage_scheduler
  import lcdc_pkg::*;
#(
  parameter int NPORTS      = 6,
  parameter int NSTAGES     = 4,
  parameter int CAM_ENTRIES = 100,
  parameter int BL_W        = 11
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  flit_t                      in_flit,
  output logic                       out_valid,
  output flit_t                      out_flit,
  input  logic [$clog2(NSTAGES)-1:0] cam_stage,
  input  logic [NPORTS-1:0]          active_ports,
  input  logic [BL_W-1:0]            backlog [NPORTS],
  input  logic                       map_wr_en,
  input  logic [$clog2(NSTAGES)-1:0] map_wr_stage,
  input  logic [6:0]                 map_wr_idx,
  input  logic                       map_wr_word,
  input  logic [31:0]                map_wr_data,
  output logic [31:0]                n_sched_unicast,
  output logic [31:0]                n_sched_copies
);
  logic  dv [4];
  flit_t df [4];
  ann_t  a_in, a_mid, a_out;

  logic                 m_valid [NSTAGES];
  logic                 m_hit   [NSTAGES];
  logic [NPORTS-1:0]    m_map   [NSTAGES];

  assign a_in  = ann_t'(in_flit.data);
  assign a_mid = ann_t'(df[1].data);

  for (genvar s = 0; s < NSTAGES; s++) begin : g_map
    stage_map_cam #(.ENTRIES(CAM_ENTRIES), .NPORTS(NPORTS)) u_map (
      .clk, .rst_n,
      .key_valid (in_valid && in_flit.ann),
      .key       (a_in.lport),
      .res_valid (m_valid[s]),
      .hit       (m_hit[s]),
      .pmap      (m_map[s]),
      .wr_en     (map_wr_en && map_wr_stage == s),
      .wr_idx    (map_wr_idx),
      .wr_word   (map_wr_word),
      .wr_data   (map_wr_data)
    );
  end

  // Scheduler cycle 1: choose the port set.
  logic [NPORTS-1:0] set_c;
  logic              copy_c;
  always_comb begin
    set_c  = '0;
    copy_c = 1'b0;
    if (a_mid.is_ctrl) begin
      copy_c = 1'b1;
      if (!a_mid.drop) set_c = active_ports;
    end else begin
      copy_c = a_mid.mcast;
      if (!a_mid.miss && m_hit[cam_stage]) set_c = m_map[cam_stage];
    end
  end

  logic [NPORTS-1:0] set_r;
  logic              copy_r;
  logic [BL_W-1:0]   bl_r [NPORTS];

  // Scheduler cycle 2: minimum backlog among the set.
  logic [NPORTS-1:0] qsel_c;
  always_comb begin
    logic            found;
    logic [BL_W-1:0] best;
    int              bi;
    found = 1'b0; best = '0; bi = 0;
    for (int p = 0; p < NPORTS; p++) begin
      if (set_r[p] && (!found || bl_r[p] < best)) begin
        found = 1'b1; best = bl_r[p]; bi = p;
      end
    end
    qsel_c = '0;
    if (copy_r)     qsel_c = set_r;
    else if (found) qsel_c[bi] = 1'b1;
  end

  logic [NPORTS-1:0] qsel_r, pmap_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) begin dv[i] <= 1'b0; df[i] <= '0; end
      set_r <= '0; copy_r <= 1'b0; qsel_r <= '0; pmap_r <= '0;
      for (int p = 0; p < NPORTS; p++) bl_r[p] <= '0;
      n_sched_unicast <= '0; n_sched_copies <= '0;
    end else begin
      dv[0] <= in_valid; df[0] <= in_flit;
      for (int i = 1; i < 4; i++) begin dv[i] <= dv[i-1]; df[i] <= df[i-1]; end
      set_r  <= set_c;
      copy_r <= copy_c;
      for (int p = 0; p < NPORTS; p++) bl_r[p] <= backlog[p];
      qsel_r <= qsel_c;
      pmap_r <= set_r;
      if (dv[2] && df[2].ann) begin
        if (copy_r)          n_sched_copies  <= n_sched_copies + 1;
        else if (set_r != 0) n_sched_unicast <= n_sched_unicast + 1;
      end
    end
  end

  always_comb begin
    a_out    = ann_t'(df[3].data);
    out_flit = df[3];
    if (df[3].ann) begin
      a_out.pmap = MAX_PORTS'(pmap_r);
      a_out.qsel = MAX_PORTS'(qsel_r);
      out_flit.data = a_out;
    end
  end
  assign out_valid = dv[3];

  a_map_ready: assert property (@(posedge clk) disable iff (!rst_n)
                 (dv[1] && df[1].ann) |-> m_valid[0]);
endmodule

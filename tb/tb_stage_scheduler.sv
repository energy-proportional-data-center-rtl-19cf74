// tb_stage_scheduler: self-checking test of pipeline stage 3. Programs the
// four stage CAM maps, then sends annotated frames under different enabled
// stages and queue backlogs: unicast (minimum backlog, ties to the lowest
// port), multicast (copy to the whole map), control frames (all active
// ports, none when marked drop), logical CAM misses and stage map misses.
// The expected queue set comes from a reference model in the testbench;
// every flit must leave exactly 4 cycles after it entered.
module tb_stage_scheduler;
  import lcdc_pkg::*;
  localparam int NP = 6, NS = 4, BL_W = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, map_wr_en, map_wr_word;
  flit_t in_flit, out_flit;
  logic [1:0] cam_stage, map_wr_stage;
  logic [NP-1:0] active_ports;
  logic [BL_W-1:0] backlog [NP];
  logic [6:0] map_wr_idx;
  logic [31:0] map_wr_data, n_sched_unicast, n_sched_copies;
  int checks = 0, failures = 0;

  stage_scheduler #(.NPORTS(NP), .NSTAGES(NS), .CAM_ENTRIES(100), .BL_W(BL_W)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [15:0]   mk [NS][3];
  logic [NP-1:0] mm [NS][3];

  task automatic wr(input int st, input int idx, input logic w, input logic [31:0] d);
    @(posedge clk); #1;
    map_wr_en = 1; map_wr_stage = 2'(st); map_wr_idx = 7'(idx); map_wr_word = w; map_wr_data = d;
    @(posedge clk); #1;
    map_wr_en = 0;
  endtask

  function automatic logic [NP-1:0] ref_qsel(input ann_t a, input int st,
                                             input logic [BL_W-1:0] bl [NP]);
    logic [NP-1:0] set;
    int best;
    set = '0;
    if (a.is_ctrl) return a.drop ? '0 : active_ports;
    if (a.miss) return '0;
    for (int i = 0; i < 3; i++) if (mk[st][i] == a.lport) set = mm[st][i];
    if (a.mcast) return set;
    best = -1;
    for (int p = 0; p < NP; p++)
      if (set[p] && (best < 0 || bl[p] < bl[best])) best = p;
    return (best < 0) ? '0 : NP'(1) << best;
  endfunction

  flit_t expq[$];
  int    exp_cyc[$];
  int    cyc = 0;
  always @(posedge clk) cyc++;

  task automatic send(input ann_t a, input int st);
    flit_t f;
    logic [NP-1:0] q;
    @(posedge clk); #1;
    cam_stage = 2'(st);
    q = ref_qsel(a, st, backlog);
    f = '0; f.ann = 1; f.data = a;
    in_valid = 1; in_flit = f;
    a.qsel = MAX_PORTS'(q);
    for (int i = 0; i < 3; i++) begin
      if (mk[st][i] == a.lport && !a.is_ctrl && !a.miss) a.pmap = MAX_PORTS'(mm[st][i]);
    end
    if (a.is_ctrl) a.pmap = a.drop ? '0 : MAX_PORTS'(active_ports);
    f.data = a;
    expq.push_back(f); exp_cyc.push_back(cyc + 4);
    for (int i = 0; i < 3; i++) begin
      @(posedge clk); #1;
      f = '0; f.data = 64'(i + 100 * cyc); f.sop = (i == 0); f.eop = (i == 2);
      in_flit = f;
      expq.push_back(f); exp_cyc.push_back(cyc + 4);
    end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    flit_t e;
    e = expq.pop_front();
    check(out_flit == e, $sformatf("exp %h/%b got %h/%b", e.data, e.ann, out_flit.data, out_flit.ann));
    check(cyc == exp_cyc.pop_front(), "latency not 4 cycles");
  end

  initial begin
    ann_t a;
    in_valid = 0; in_flit = '0; cam_stage = 0; active_ports = 6'b000111;
    map_wr_en = 0; map_wr_stage = 0; map_wr_idx = 0; map_wr_word = 0; map_wr_data = 0;
    for (int p = 0; p < NP; p++) backlog[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // stage s map of lport 0x42 = ports 2..2+s ; lport 0x8007 (multicast) = ports 0,1 ; 0x10 = port 0
    for (int s = 0; s < NS; s++) begin
      mk[s][0] = 16'h0042; mm[s][0] = NP'(((1 << (s + 1)) - 1) << 2);
      mk[s][1] = 16'h8007; mm[s][1] = 6'b000011;
      mk[s][2] = 16'h0010; mm[s][2] = 6'b000001;
      for (int i = 0; i < 3; i++) begin
        wr(s, i, 1'b0, {1'b1, 15'd0, mk[s][i]});
        wr(s, i, 1'b1, 32'(mm[s][i]));
      end
    end
    // random unicast traffic under random stages and backlogs
    for (int t = 0; t < 40; t++) begin
      for (int p = 0; p < NP; p++) backlog[p] = BL_W'($urandom_range(0, 7) * 10);
      a = '0; a.lk_done = 1;
      case (t % 8)
        0, 1, 2, 3: a.lport = 16'h0042;
        4: begin a.lport = 16'h8007; a.mcast = 1; end
        5: begin a.is_ctrl = 1; a.drop = (t % 16 == 13); end
        6: a.miss = 1;
        default: a.lport = 16'h0077;   // not in any map
      endcase
      send(a, t % NS);
    end
    repeat (8) @(posedge clk);
    check(expq.size() == 0, "flits missing at output");
    check(n_sched_unicast > 0 && n_sched_copies > 0, "counters");
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

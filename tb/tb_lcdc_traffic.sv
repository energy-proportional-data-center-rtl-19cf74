// tb_lcdc_traffic: the LCDC switch, at its default size, under bursty
// data-center-like traffic.
//
// The switch is set up as a reduced rack switch: ports 0 and 1 face
// servers, ports 2..5 are the uplinks of stages 1..4 and all server traffic
// is addressed to remote racks, so it goes up. Each port's MAC sends one
// flit every 8 cycles (a 1 Gb/s link against the 10.8 Gb/s switch core), so
// one uplink carries 1/8 flit per cycle and a burst from both servers can
// exceed it. Each server runs an on/off source: flows of 1-3 frames (80 %)
// or 15-40 frames (20 %), frame lengths uniform over 8..190 flits, sent at a
// peak rate while a flow lasts, with random gaps sized for the average load.
// Three profiles are run one after the other, each followed by an idle
// period: "light" (a lightly used, university-style network: 15 % of one
// uplink on average), "bursty" (web-server-like: 60 %, peaks of two
// uplinks) and "heavy" (Hadoop-like: 180 %, sustained). For each profile the
// testbench reports the share of cycles spent at each stage, the number of
// stage changes and the mean and maximum frame latency (first flit in to
// last flit out), and checks that every frame is delivered exactly once
// with its contents or counted as dropped, that light load never leaves
// stage 1, that heavy load climbs at least two stages, that every stage
// change was announced with a control frame and that the switch returns to
// stage 1 once idle. The transceiver model turns a stage on after 1 us
// (169 cycles).
module tb_lcdc_traffic;
  import lcdc_pkg::*;
  localparam int NP = 6, NS = 4;
  localparam int MAC_DIV = 8;                 // cycles per flit on a port
  localparam logic [31:0] SID = 32'h5157_0002;

  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic [NP-1:0] rx_valid, rx_ready, tx_valid, tx_ready;
  flit_t rx_flit [NP];
  flit_t tx_flit [NP];
  logic [11:0] avs_address;
  logic avs_write, avs_read, avs_readdatavalid;
  logic [31:0] avs_writedata, avs_readdata;
  logic [NS-1:0] stage_en_o, stage_rdy_i, off_done;
  logic [NP-1:0] port_tx_en;
  logic [2:0] cur_stage;
  logic [31:0] n_stage_up, n_stage_down, n_ctrl_sent, n_sched_unicast, n_sched_copies;
  logic [31:0] n_enq [NP];
  logic [31:0] n_drop [NP];

  lcdc_switch dut (.*);

  laser_stage_model #(.NSTAGES(NS), .TURN_ON(169), .TURN_OFF(1693)) u_laser (
    .clk, .rst_n, .stage_en (stage_en_o), .stage_rdy (stage_rdy_i), .off_done);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- configuration ----------------
  task automatic cfg(input logic [11:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    avs_address = a; avs_writedata = d; avs_write = 1;
    @(posedge clk); #1;
    avs_write = 0;
  endtask
  task automatic lcam(input int i, input logic [47:0] k, input logic [47:0] m,
                      input logic [15:0] lp);
    cfg({2'b01, 7'(i), 3'd0}, k[31:0]); cfg({2'b01, 7'(i), 3'd1}, {16'd0, k[47:32]});
    cfg({2'b01, 7'(i), 3'd2}, m[31:0]); cfg({2'b01, 7'(i), 3'd3}, {16'd0, m[47:32]});
    cfg({2'b01, 7'(i), 3'd4}, {1'b1, 15'd0, lp});
  endtask
  task automatic smap(input int s, input int i, input logic [15:0] lp, input logic [5:0] m);
    cfg({2'b10, 2'(s), 7'(i), 1'b0}, {1'b1, 15'd0, lp});
    cfg({2'b10, 2'(s), 7'(i), 1'b1}, 32'(m));
  endtask

  localparam logic [47:0] MAC_R = 48'h0200_0000_0100;   // remote racks

  function automatic flit_t ctrl_flit(input int i, input logic [15:0] stg);
    flit_t f;
    f = '0;
    case (i)
      0: f.data = {48'hFFFF_FFFF_FFFF, 16'h0200};
      1: f.data = {32'h0000_0F00, CTRL_ETYPE, SID[31:16]};
      2: f.data = {SID[15:0], stg, 16'd1, 16'h0000};
      default: f.data = '0;
    endcase
    f.sop = (i == 0); f.eop = (i == 7); f.empty = (i == 7) ? 3'd4 : 3'd0;
    return f;
  endfunction

  // ---------------- MAC pacing ----------------
  int pace = 0;
  always @(posedge clk) pace <= (pace == MAC_DIV - 1) ? 0 : pace + 1;
  logic tick_mac;
  assign tick_mac = (pace == 0);
  assign tx_ready = {NP{tick_mac}};

  // ---------------- sources ----------------
  flit_t rxq [NP][$];
  logic [NP-1:0] rx_have;
  always_comb
    for (int p = 0; p < NP; p++) begin
      rx_have[p]  = (rxq[p].size() > 0);
      rx_valid[p] = rx_have[p] && tick_mac;
      rx_flit[p]  = rx_have[p] ? rxq[p][0] : '0;
    end
  always @(posedge clk)
    for (int p = 0; p < NP; p++)
      if (rx_valid[p] && rx_ready[p]) void'(rxq[p].pop_front());

  function automatic logic [63:0] payload(input int tag, input int i);
    return {16'hDA7A, 16'(i), 32'(tag)};
  endfunction

  int     exp_len [int];
  longint t_in    [int];
  int     got     [int];
  int     tag_next = 1;

  task automatic push_frame(input int port, input int len);
    int tag;
    tag = tag_next++;
    exp_len[tag] = len;
    t_in[tag] = cyc;
    for (int i = 0; i < len; i++) begin
      flit_t f;
      f = '0;
      case (i)
        0: f.data = {MAC_R | 48'($urandom_range(0, 255)), 16'h0200};
        1: f.data = {32'h0000_0C00 + 32'(port), 16'h0800, 16'h0000};
        default: f.data = payload(tag, i);
      endcase
      f.sop = (i == 0); f.eop = (i == len - 1);
      rxq[port].push_back(f);
    end
  endtask

  // on/off source; peak and average in units of one uplink (1/8 flit/cycle)
  task automatic source(input int port, input real peak, input real avg, input longint t_end);
    while (cyc < t_end) begin
      int nfr, gap;
      longint on_cycles;
      nfr = ($urandom_range(0, 99) < 80) ? $urandom_range(1, 3) : $urandom_range(15, 40);
      on_cycles = 0;
      for (int k = 0; k < nfr && cyc < t_end; k++) begin
        int len, t;
        len = $urandom_range(8, 190);
        push_frame(port, len);
        t = int'(real'(len * MAC_DIV) / peak);
        on_cycles += t;
        repeat (t) @(posedge clk);
      end
      // off time so that on/(on+off) = avg/peak on average
      gap = int'(real'(on_cycles) * (peak / avg - 1.0) * (real'($urandom_range(0, 200)) / 100.0));
      repeat (gap) @(posedge clk);
    end
  endtask

  // ---------------- sink and scoreboard ----------------
  flit_t  txcur [NP][$];
  int     n_ok = 0, n_bad = 0, n_dup = 0, n_ctrl_seen = 0;
  longint lat_sum = 0, lat_max = 0;
  int     lat_n = 0;
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (tx_valid[p] && tx_ready[p]) begin
        txcur[p].push_back(tx_flit[p]);
        if (tx_flit[p].eop) begin
          flit_t fr [$];
          fr = txcur[p];
          txcur[p] = {};
          if (fr.size() > 2 && fr[1].data[31:16] == CTRL_ETYPE) begin
            n_ctrl_seen++;
          end else begin
            int tag;
            logic ok;
            tag = (fr.size() > 2) ? int'(fr[2].data[31:0]) : -1;
            ok = exp_len.exists(tag) && fr.size() == exp_len[tag] && p >= 2;
            if (ok) for (int i = 2; i < fr.size(); i++) if (fr[i].data != payload(tag, i)) ok = 0;
            if (!ok) begin
              n_bad++;
              $display("bad frame on port %0d, tag %0d, %0d flits", p, tag, fr.size());
            end else if (got.exists(tag)) n_dup++;
            else begin
              got[tag] = 1; n_ok++;
              lat_sum += cyc - t_in[tag]; lat_n++;
              if (cyc - t_in[tag] > lat_max) lat_max = cyc - t_in[tag];
            end
          end
        end
      end

  // ---------------- output queue drops, data and control ----------------
  int data_drops = 0, ctrl_drops = 0;
  for (genvar p = 0; p < NP; p++) begin : g_dropmon
    ann_t a;
    assign a = ann_t'(dut.g_out[p].u_oq.in_flit.data);
    always @(posedge clk) if (rst_n)
      if (dut.g_out[p].u_oq.in_valid && dut.g_out[p].u_oq.in_flit.ann && a.qsel[p]
          && int'(dut.g_out[p].u_oq.backlog) > 1024 - 190) begin
        if (a.is_ctrl) ctrl_drops++; else data_drops++;
      end
  end

  // ---------------- stage statistics ----------------
  longint at_stage [NS+1];
  int     n_changes = 0;
  logic [2:0] prev_stage = 1;
  int     max_stage = 1;
  always @(posedge clk) if (rst_n) begin
    at_stage[cur_stage]++;
    if (cur_stage != prev_stage) n_changes++;
    if (int'(cur_stage) > max_stage) max_stage = int'(cur_stage);
    prev_stage <= cur_stage;
  end

  function automatic int total_drops();
    int d;
    d = 0;
    for (int p = 0; p < NP; p++) d += int'(n_drop[p]);
    return d;
  endfunction

  task automatic run_profile(input string name, input real peak, input real avg, input int len,
                             input int min_stage, input int max_allowed);
    longint t_end, t0;
    int tag0, ok0, up0, down0, ctrl0, sent;
    t0 = cyc; t_end = cyc + len;
    tag0 = tag_next; ok0 = n_ok; up0 = int'(n_stage_up); down0 = int'(n_stage_down);
    ctrl0 = int'(n_ctrl_sent);
    lat_sum = 0; lat_n = 0; lat_max = 0; max_stage = int'(cur_stage); n_changes = 0;
    for (int s = 0; s <= NS; s++) at_stage[s] = 0;
    fork
      source(0, peak, avg, t_end);
      source(1, peak, avg, t_end);
    join
    // idle: let queues drain and stages come down
    for (int w = 0; w < 400 && !(rxq[0].size() == 0 && rxq[1].size() == 0 && cur_stage == 1
                                && stage_en_o == 4'b0001 && !dut.u_se.busy && &dut.port_empty); w++)
      repeat (500) @(posedge clk);
    repeat (4000) @(posedge clk);
    sent = tag_next - tag0;
    $display("%s: %0d frames, %0d cycles, stage share 1:%0.1f%% 2:%0.1f%% 3:%0.1f%% 4:%0.1f%%, max stage %0d, %0d up / %0d down, mean latency %0d cycles, max %0d",
             name, sent, cyc - t0,
             100.0 * real'(at_stage[1]) / real'(cyc - t0), 100.0 * real'(at_stage[2]) / real'(cyc - t0),
             100.0 * real'(at_stage[3]) / real'(cyc - t0), 100.0 * real'(at_stage[4]) / real'(cyc - t0),
             max_stage, int'(n_stage_up) - up0, int'(n_stage_down) - down0,
             lat_n ? int'(lat_sum / lat_n) : 0, lat_max);
    check(max_stage >= min_stage && max_stage <= max_allowed,
          $sformatf("%s: max stage %0d not in %0d..%0d", name, max_stage, min_stage, max_allowed));
    check(cur_stage == 1 && stage_en_o == 4'b0001, $sformatf("%s: back at stage 1 when idle", name));
    check(int'(n_ctrl_sent) - ctrl0 == (int'(n_stage_up) - up0) + (int'(n_stage_down) - down0),
          $sformatf("%s: one control frame per stage change", name));
  endtask

  initial begin
    avs_address = 0; avs_write = 0; avs_read = 0; avs_writedata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg(12'h002, SID);
    lcam(0, MAC_R, 48'hFFFF_FFFF_FF00, 16'h0100);
    for (int s = 0; s < NS; s++) smap(s, 0, 16'h0100, 6'(((1 << (s + 1)) - 1) << 2));
    for (int m = 0; m < 2 * NS; m++)
      for (int i = 0; i < 8; i++) begin
        flit_t f;
        f = ctrl_flit(i, stage_id(m[2], 8'(m % NS + 1)));
        cfg({2'b11, 3'd0, 3'(m), 3'(i), 1'b0}, f.data[63:32]);
        cfg({2'b11, 3'd0, 3'(m), 3'(i), 1'b1}, f.data[31:0]);
      end

    run_profile("light",  0.5, 0.075, 120000, 1, 1);
    check(total_drops() == 0, "no drops under light load");
    run_profile("bursty", 1.0, 0.30, 160000, 1, NS);
    run_profile("heavy",  1.5, 0.90, 160000, 3, NS);

    check(n_bad == 0, "corrupted or misrouted frames");
    check(n_dup == 0, "frames delivered twice");
    check(total_drops() == data_drops + ctrl_drops, "drop counters match the admission rule");
    check(n_ok + data_drops == tag_next - 1,
          $sformatf("%0d delivered + %0d dropped != %0d sent", n_ok, data_drops, tag_next - 1));
    // every control frame is flooded on at least the three stage-1 ports
    check(n_ctrl_seen + ctrl_drops >= 3 * int'(n_ctrl_sent), "control frames flooded on active ports");
    $display("totals: %0d frames delivered, %0d data and %0d control frames dropped, %0d stage ups, %0d stage downs, %0d control frames sent, %0d copies seen",
             n_ok, data_drops, ctrl_drops, n_stage_up, n_stage_down, n_ctrl_sent, n_ctrl_seen);
    foreach (exp_len[t]) if (!got.exists(t))
      $display("frame %0d (%0d flits, in at cycle %0d) never left", t, exp_len[t], t_in[t]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lcdc_switch: end-to-end test of the LCDC switch at its default size
// (6 ports, 4 stages, 100-entry CAMs, 1024-flit output queues).
//
// The switch is set up as a rack switch: ports 0 and 1 face servers and are
// always on, ports 2..5 are the uplinks of stages 1..4. Over the Avalon
// slave the testbench programs the senderID, the logical port CAM (two
// hosts, a masked remote range, a multicast group), the four stage maps
// (the remote logical port may use uplinks 2..s+1 in stage s) and the eight
// stage-on/off control frames. A behavioural laser model answers the stage
// enables with Stage RDY after 1 us (169 cycles).
// Phases: (1) a single frame, checked for content and for the 7-cycle
// path from stage 2 to the output queue; (2) multicast and an unknown
// address; (3) a burst towards the uplinks with uplink 2 stalled, which
// drives its backlog over the high watermark, raises the stages one by one
// (each with a stage-on frame to the neighbours), spreads the traffic over
// the new uplinks and overflows the stalled queue; (4) release, drain and
// step back down to stage 1 with stage-off frames; (5) control frames from
// another switch: one that turns a stage on and is forwarded with its TTL
// decremented, one whose TTL runs out and is dropped.
// A scoreboard checks every frame that leaves; each mechanism is counted
// and one that never occurred is a failure.
module tb_lcdc_switch;
  import lcdc_pkg::*;
  localparam int NP = 6, NS = 4;
  localparam logic [31:0] SID = 32'h5157_0001;

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

  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- configuration ----------------
  task automatic cfg(input logic [11:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    avs_address = a; avs_writedata = d; avs_write = 1;
    @(posedge clk); #1;
    avs_write = 0;
  endtask
  task automatic lcam(input int i, input logic [47:0] k, input logic [47:0] m,
                      input logic [15:0] lp, input logic mc);
    cfg({2'b01, 7'(i), 3'd0}, k[31:0]); cfg({2'b01, 7'(i), 3'd1}, {16'd0, k[47:32]});
    cfg({2'b01, 7'(i), 3'd2}, m[31:0]); cfg({2'b01, 7'(i), 3'd3}, {16'd0, m[47:32]});
    cfg({2'b01, 7'(i), 3'd4}, {1'b1, 14'd0, mc, lp});
  endtask
  task automatic smap(input int s, input int i, input logic [15:0] lp, input logic [5:0] m);
    cfg({2'b10, 2'(s), 7'(i), 1'b0}, {1'b1, 15'd0, lp});
    cfg({2'b10, 2'(s), 7'(i), 1'b1}, 32'(m));
  endtask

  localparam logic [47:0] MAC_A = 48'h0200_0000_000A;   // host on port 0
  localparam logic [47:0] MAC_B = 48'h0200_0000_000B;   // host on port 1
  localparam logic [47:0] MAC_R = 48'h0200_0000_0100;   // remote range (low byte free)
  localparam logic [47:0] MAC_M = 48'h0100_5E00_0001;   // multicast group
  localparam logic [47:0] BCAST = 48'hFFFF_FFFF_FFFF;

  // ---------------- frames ----------------
  flit_t rxq [NP][$];
  always_comb
    for (int p = 0; p < NP; p++) begin
      rx_valid[p] = (rxq[p].size() > 0);
      rx_flit[p]  = rx_valid[p] ? rxq[p][0] : '0;
    end
  always @(posedge clk)
    for (int p = 0; p < NP; p++)
      if (rx_valid[p] && rx_ready[p]) void'(rxq[p].pop_front());

  function automatic logic [63:0] payload(input int tag, input int i);
    return {16'hDA7A, 16'(tag), 32'(i * 32'h01010101 + tag)};
  endfunction

  task automatic data_frame(input int port, input logic [47:0] dst, input int tag, input int len);
    for (int i = 0; i < len; i++) begin
      flit_t f;
      f = '0;
      case (i)
        0: f.data = {dst, 16'h0200};
        1: f.data = {32'h0000_0C00 + 32'(port), 16'h0800, 16'h0000};
        default: f.data = payload(tag, i);
      endcase
      f.sop = (i == 0); f.eop = (i == len - 1);
      rxq[port].push_back(f);
    end
  endtask

  function automatic flit_t ctrl_flit(input int i, input logic [31:0] sid,
                                      input logic [15:0] stg, input logic [15:0] ttl);
    flit_t f;
    f = '0;
    case (i)
      0: f.data = {BCAST, 16'h0200};
      1: f.data = {32'h0000_0F00, CTRL_ETYPE, sid[31:16]};
      2: f.data = {sid[15:0], stg, ttl, 16'h0000};
      default: f.data = '0;
    endcase
    f.sop = (i == 0); f.eop = (i == 7); f.empty = (i == 7) ? 3'd4 : 3'd0;
    return f;
  endfunction

  task automatic ctrl_frame_in(input int port, input logic [31:0] sid,
                               input logic [15:0] stg, input logic [15:0] ttl);
    for (int i = 0; i < 8; i++) rxq[port].push_back(ctrl_flit(i, sid, stg, ttl));
  endtask

  // ---------------- scoreboard ----------------
  // expected: tag -> allowed port mask and copies expected
  int exp_mask [int];
  int exp_len  [int];
  int got_cnt  [int];
  int got_port [int];
  int n_ctrl_local_seen = 0, n_ctrl_fwd_seen = 0, n_bad_ctrl = 0;
  int uplinks_used = 0;
  flit_t txcur [NP][$];

  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (tx_valid[p] && tx_ready[p]) begin
        txcur[p].push_back(tx_flit[p]);
        if (tx_flit[p].eop) begin
          flit_t fr [$];
          fr = txcur[p];
          txcur[p] = {};
          if (fr[1].data[31:16] == CTRL_ETYPE) begin
            logic [31:0] sid;
            sid = {fr[1].data[15:0], fr[2].data[63:48]};
            if (sid == SID && fr.size() == 8) n_ctrl_local_seen++;
            else if (sid == 32'h0000_0099 && fr[2].data[31:16] == 16'd1) n_ctrl_fwd_seen++;
            else n_bad_ctrl++;
          end else begin
            int tag;
            logic ok;
            tag = int'(fr[2].data[47:32]);
            ok = exp_mask.exists(tag) && exp_mask[tag][p] && fr.size() == exp_len[tag];
            for (int i = 2; i < fr.size(); i++) if (fr[i].data != payload(tag, i)) ok = 0;
            check(ok, $sformatf("frame tag %0d on port %0d bad (len %0d)", tag, p, fr.size()));
            if (got_cnt.exists(tag)) got_cnt[tag]++; else got_cnt[tag] = 1;
            got_port[tag] = p;
            if (p >= 2) uplinks_used |= (1 << p);
          end
        end
      end

  // ---------------- 7-cycle path probe ----------------
  int t_s2 = -1, t_oq = -1;
  always @(posedge clk) if (rst_n) begin
    if (t_s2 < 0 && dut.u_parse.in_valid && dut.u_parse.in_flit.sop && !dut.u_parse.in_flit.ann)
      t_s2 = cyc;
    if (t_oq < 0 && dut.g_out[0].u_oq.wr) t_oq = cyc;
  end

  // ---------------- output queue drops of data frames ----------------
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

  // ---------------- mechanism counters ----------------
  int m_up_seen = 0, m_stage_sw = 0;
  logic [2:0] prev_stage = 1;
  always @(posedge clk) if (rst_n) begin
    if (cur_stage != prev_stage) m_stage_sw++;
    prev_stage <= cur_stage;
  end

  task automatic wait_cycles(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  int sent_remote = 0;
  int tag_next = 1;

  initial begin
    int up_before, drops_before;
    avs_address = 0; avs_write = 0; avs_read = 0; avs_writedata = 0;
    tx_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // configuration
    cfg(12'h002, SID);
    lcam(0, MAC_A, '1, 16'h0001, 1'b0);
    lcam(1, MAC_B, '1, 16'h0002, 1'b0);
    lcam(2, MAC_R, 48'hFFFF_FFFF_FF00, 16'h0100, 1'b0);
    lcam(3, MAC_M, '1, 16'h8001, 1'b1);
    for (int s = 0; s < NS; s++) begin
      smap(s, 0, 16'h0001, 6'b000001);
      smap(s, 1, 16'h0002, 6'b000010);
      smap(s, 2, 16'h0100, 6'(((1 << (s + 1)) - 1) << 2));
      smap(s, 3, 16'h8001, 6'b000011);
    end
    for (int m = 0; m < 2 * NS; m++)
      for (int i = 0; i < 8; i++) begin
        flit_t f;
        f = ctrl_flit(i, SID, stage_id(m[2], 8'(m % NS + 1)), 16'd2);
        cfg({2'b11, 3'd0, 3'(m), 3'(i), 1'b0}, f.data[63:32]);
        cfg({2'b11, 3'd0, 3'(m), 3'(i), 1'b1}, f.data[31:0]);
      end

    // (1) single frame B->A, latency of the pipeline
    exp_mask[tag_next] = 6'b000001; exp_len[tag_next] = 12;
    data_frame(1, MAC_A, tag_next, 12); tag_next++;
    wait_cycles(80);
    check(got_cnt.exists(1) && got_cnt[1] == 1 && got_port[1] == 0, "unicast to port 0");
    check(t_oq - t_s2 == 7, $sformatf("stage 2 to output queue took %0d cycles, expected 7", t_oq - t_s2));

    // (2) multicast and unknown destination
    exp_mask[tag_next] = 6'b000011; exp_len[tag_next] = 9;
    data_frame(2, MAC_M, tag_next, 9); tag_next++;
    exp_mask[tag_next] = 0; exp_len[tag_next] = 9;
    data_frame(3, 48'h0200_DEAD_BEEF, tag_next, 9); tag_next++;
    wait_cycles(100);
    check(got_cnt.exists(2) && got_cnt[2] == 2, "multicast copied to ports 0 and 1");
    check(!got_cnt.exists(3), "unknown destination dropped");
    check(cur_stage == 1 && n_ctrl_sent == 0, "still at stage 1, quiet");

    // (3) burst to the uplinks with uplink 2 stalled
    tx_ready[2] = 0;
    for (int k = 0; k < 200; k++) begin
      exp_mask[tag_next] = 6'b111100; exp_len[tag_next] = 16;
      data_frame(k % 2, MAC_R | 48'(k % 200), tag_next, 16); tag_next++;
      sent_remote++;
    end
    // wait for the queues to absorb everything and the stages to climb
    for (int w = 0; w < 40 && cur_stage != NS; w++) wait_cycles(500);
    wait_cycles(3000);
    check(cur_stage == NS, $sformatf("stages climbed to %0d", cur_stage));
    check(n_stage_up == NS - 1, $sformatf("stage up count %0d", n_stage_up));
    check(n_drop[2] > 0, "stalled uplink queue overflowed");
    check(uplinks_used > 6'b000100, "traffic spread over new uplinks");

    // (4) release and drain back to stage 1
    tx_ready[2] = 1;
    for (int w = 0; w < 80 && !(cur_stage == 1 && stage_en_o == 4'b0001); w++) wait_cycles(500);
    check(cur_stage == 1 && stage_en_o == 4'b0001, "back to stage 1 with electronics off");
    check(n_stage_down == NS - 1, $sformatf("stage down count %0d", n_stage_down));
    check(n_ctrl_sent == 2 * (NS - 1), $sformatf("control frames sent %0d", n_ctrl_sent));
    wait_cycles(200);

    // (5) control frames from another switch
    up_before = n_stage_up;
    ctrl_frame_in(3, 32'h0000_0099, stage_id(1'b0, 8'd2), 16'd2);   // forwarded with TTL 1
    for (int w = 0; w < 20 && n_stage_up == up_before; w++) wait_cycles(50);
    check(n_stage_up == up_before + 1, "received stage-on message enabled stage 2");
    wait_cycles(2000);
    check(cur_stage == 2 && stage_en_o == 4'b0011, "neighbour's stage is held while load is low");
    ctrl_frame_in(4, 32'h0000_0098, stage_id(1'b1, 8'd2), 16'd1);   // TTL runs out
    wait_cycles(300);
    check(cur_stage == 1 && stage_en_o == 4'b0001, "received stage-off message lowered stage 2");
    check(n_stage_down == NS, "stage down count after the received stage-off");
    check(n_ctrl_sent == 2 * (NS - 1), "received messages are not answered with own frames");

    // scoreboard summary
    begin
      int rec, dropped_total, dup;
      rec = 0; dup = 0;
      foreach (got_cnt[t]) if (exp_mask[t] == 6'b111100) begin
        rec++;
        if (got_cnt[t] != 1) dup++;
      end
      dropped_total = 0;
      for (int p = 0; p < NP; p++) dropped_total += int'(n_drop[p]);
      check(dup == 0, "remote frame delivered twice");
      check(dropped_total == data_drops + ctrl_drops, "drop counters match the admission rule");
      check(rec + data_drops == sent_remote,
            $sformatf("remote frames: %0d delivered + %0d dropped != %0d sent", rec, data_drops, sent_remote));
    end
    check(n_bad_ctrl == 0, "unexpected control frame on a port");
    // mechanisms
    $display("mechanisms: up=%0d down=%0d ctrl_local_tx=%0d ctrl_fwd=%0d data_drop=%0d ctrl_drop=%0d uplinks=%b mcast=%0d",
             n_stage_up, n_stage_down, n_ctrl_local_seen, n_ctrl_fwd_seen, data_drops, ctrl_drops,
             6'(uplinks_used), got_cnt[2]);
    check(data_drops > 0, "output queue overflow drops happened");
    check(n_sched_unicast > 200 && n_sched_copies >= 8, $sformatf("scheduler decisions: %0d unicast, %0d copy-to-set", n_sched_unicast, n_sched_copies));
    for (int p = 0; p < NP; p++) check(n_enq[p] > 0, $sformatf("port %0d queued frames", p));
    check(n_ctrl_local_seen > 0, "own control frames reached the neighbours");
    check(n_ctrl_fwd_seen > 0, "received control frame forwarded with TTL decremented");
    check(n_ctrl_fwd_seen == 3, $sformatf("forwarded on every active port: %0d", n_ctrl_fwd_seen));
    check(m_stage_sw > 0, "stage switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

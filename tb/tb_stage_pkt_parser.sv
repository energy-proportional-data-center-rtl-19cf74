// tb_stage_pkt_parser: self-checking test of pipeline stage 2. Sends, back
// to back, a data frame to a programmed MAC, a multicast frame, a frame to
// an unknown MAC, control frames from another switch with TTL 3 and TTL 1,
// and a control frame carrying this switch's own senderID. It checks that
// every flit leaves exactly 3 cycles after it entered, that the annotation
// carries the expected logical port / multicast / miss / control / local /
// drop fields, that the TTL is decremented only in remote control frames,
// and that the stage notification pulses 3 cycles after flit 0 (flit 2
// parsed) for remote control frames only.
module tb_stage_pkt_parser;
  import lcdc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, notify_valid, cam_wr_en;
  flit_t in_flit, out_flit;
  logic [31:0] local_sender_id, cam_wr_data;
  logic [15:0] notify_stage_id;
  logic [6:0] cam_wr_idx;
  logic [2:0] cam_wr_word;
  int checks = 0, failures = 0;

  stage_pkt_parser #(.CAM_ENTRIES(100)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int idx, input int w, input logic [31:0] d);
    @(negedge clk);
    cam_wr_en = 1; cam_wr_idx = 7'(idx); cam_wr_word = 3'(w); cam_wr_data = d;
    @(negedge clk);
    cam_wr_en = 0;
  endtask

  task automatic prog(input int i, input logic [47:0] k, input logic [47:0] m,
                      input logic [15:0] l, input logic mc);
    wr(i, 0, k[31:0]); wr(i, 1, {16'd0, k[47:32]});
    wr(i, 2, m[31:0]); wr(i, 3, {16'd0, m[47:32]});
    wr(i, 4, {1'b1, 14'd0, mc, l});
  endtask

  // stimulus stream and expected output stream
  flit_t stim[$], expq[$];
  int    notify_exp[$];   // cycle index of expected notify pulses
  logic [15:0] notify_id_exp[$];

  // Build one frame: octets 0-5 dst, 6-11 src, 12-13 etype, 14-17 sender,
  // 18-19 stageID, 20-21 TTL, rest filled, 8 flits.
  task automatic frame(input logic [47:0] dst, input logic [15:0] et, input logic [31:0] sid,
                       input logic [15:0] stg, input logic [15:0] ttl, input ann_t ea,
                       input logic [15:0] ttl_out);
    flit_t f [8];
    flit_t a;
    for (int i = 0; i < 8; i++) begin
      f[i] = '0; f[i].data = {8{8'(i + 8'hA0)}};
    end
    f[0].data = {dst, 16'h0011};
    f[1].data = {32'h22334455, et, sid[31:16]};
    f[2].data = {sid[15:0], stg, ttl, 16'hBEEF};
    f[0].sop = 1; f[7].eop = 1; f[7].empty = 3'd4;
    a = '0; a.ann = 1; a.data = '0;
    stim.push_back(a);
    a.data = ea; expq.push_back(a);
    if (et == CTRL_ETYPE && sid != local_sender_id) begin
      notify_exp.push_back(stim.size() + 2);  // flit 0 index + 3
      notify_id_exp.push_back(stg);
    end
    for (int i = 0; i < 8; i++) begin
      stim.push_back(f[i]);
      if (i == 2) f[i].data[31:16] = ttl_out;
      expq.push_back(f[i]);
    end
  endtask

  int cyc = 0;
  logic ov_d[$];
  initial begin
    ann_t e;
    in_valid = 0; in_flit = '0; cam_wr_en = 0; cam_wr_idx = 0; cam_wr_word = 0; cam_wr_data = 0;
    local_sender_id = 32'hC0DE0001;
    repeat (2) @(posedge clk);
    rst_n = 1;
    prog(3, 48'h02AABBCCDD01, '1, 16'h0042, 1'b0);
    prog(4, 48'h01005E000000, 48'hFFFFFF000000, 16'h8007, 1'b1);

    e = '0; e.lk_done = 1; e.lport = 16'h0042;
    frame(48'h02AABBCCDD01, 16'h0800, 32'h0, 16'h0, 16'h0, e, 16'h0);
    e = '0; e.lk_done = 1; e.lport = 16'h8007; e.mcast = 1;
    frame(48'h01005E123456, 16'h0800, 32'h0, 16'h0, 16'h0, e, 16'h0);
    e = '0; e.lk_done = 1; e.miss = 1;
    frame(48'h02FFFFFFFF00, 16'h0800, 32'h0, 16'h0, 16'h0, e, 16'h0);
    e = '0; e.lk_done = 1; e.is_ctrl = 1; e.ttl_new = 8'd2;
    frame(48'hFFFFFFFFFFFF, CTRL_ETYPE, 32'hC0DE0002, 16'h0002, 16'd3, e, 16'd2);
    e = '0; e.lk_done = 1; e.is_ctrl = 1; e.drop = 1; e.ttl_new = 8'd0;
    frame(48'hFFFFFFFFFFFF, CTRL_ETYPE, 32'hC0DE0003, 16'h8003, 16'd1, e, 16'd0);
    e = '0; e.lk_done = 1; e.is_ctrl = 1; e.local_ = 1; e.ttl_new = 8'd3;
    frame(48'hFFFFFFFFFFFF, CTRL_ETYPE, 32'hC0DE0001, 16'h0003, 16'd4, e, 16'd4);

    // stream: stimulus index k is driven in cycle k
    // inputs change just after a rising edge, as from a registered source
    for (int k = 0; k < stim.size(); k++) begin
      @(posedge clk); #1;
      in_valid = 1; in_flit = stim[k];
    end
    @(posedge clk); #1;
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(expq.size() == 0, "flits missing at output");
    check(notify_exp.size() == 0, "notifications missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int k_now;
  int first_edge = -1, edge_n = 0;
  always @(posedge clk) if (rst_n) begin
    edge_n++;
    if (in_valid && first_edge < 0) first_edge = edge_n;
  end
  always @(negedge clk) if (rst_n) begin
    if (first_edge >= 0) begin
      k_now = edge_n - first_edge;     // stimulus index that entered at this edge
      // a flit entering at edge k is at the output after edge k+3, i.e. now if k = k_now-2
      if (out_valid) begin
        flit_t ex;
        ex = expq.pop_front();
        check(out_flit == ex, $sformatf("output at %0d exp %h/%b got %h/%b",
              k_now, ex.data, ex.ann, out_flit.data, out_flit.ann));
        check(k_now - 2 == (stim.size() - expq.size() - 1), "latency not 3 cycles");
      end
      if (notify_valid) begin
        check(notify_exp.size() > 0 && notify_exp[0] == k_now,
              $sformatf("notify at %0d", k_now));
        if (notify_exp.size() > 0) begin
          check(notify_stage_id == notify_id_exp[0], "notify stage id");
          void'(notify_exp.pop_front()); void'(notify_id_exp.pop_front());
        end
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

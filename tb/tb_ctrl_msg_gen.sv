// tb_ctrl_msg_gen: self-checking test of the control message generator.
// Writes eight distinct control frames into its memory through the write
// port, then requests several of them (with read-side stalls and a request
// arriving while a frame is being sent) and checks the acknowledge, the
// flit contents, sop/eop/empty, the done pulse on the last flit and the
// sent-frame counter.
module tb_ctrl_msg_gen;
  import lcdc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic msg_req, msg_ack, msg_done, out_valid, out_ready, wr_en;
  logic [2:0] msg_id;
  flit_t out_flit;
  logic [6:0] wr_addr;
  logic [31:0] wr_data, n_sent;
  int checks = 0, failures = 0;

  ctrl_msg_gen #(.NMSG(8), .MSG_FLITS(8), .LAST_EMPTY(4)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] content(input int m, input int f);
    return {8'(m), 8'(f), 16'hC0DE, 32'(m * 1000 + f)};
  endfunction

  int got_msgs[$];
  int fidx = 0, dones = 0;
  logic [63:0] cur_word;
  int cur_m = -1;
  // read side checker: compare each accepted flit
  always @(negedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (fidx == 0) begin
        cur_m = int'(out_flit.data[63:56]);
        got_msgs.push_back(cur_m);
      end
      check(out_flit.data == content(cur_m, fidx), $sformatf("msg %0d flit %0d data %h", cur_m, fidx, out_flit.data));
      check(out_flit.sop == (fidx == 0) && out_flit.eop == (fidx == 7), "sop/eop");
      check(out_flit.empty == (fidx == 7 ? 3'd4 : 3'd0), "empty");
      check(msg_done == (fidx == 7), "done pulse");
      fidx = (fidx == 7) ? 0 : fidx + 1;
    end else check(!msg_done, "done without last flit");
    if (msg_done) dones++;
  end

  task automatic request(input int id);
    @(posedge clk); #1;
    msg_req = 1; msg_id = 3'(id);
    #1;
    while (!msg_ack) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    msg_req = 0;
  endtask

  initial begin
    msg_req = 0; msg_id = 0; out_ready = 1; wr_en = 0; wr_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 8; m++)
      for (int f = 0; f < 8; f++)
        for (int h = 0; h < 2; h++) begin
          @(posedge clk); #1;
          wr_en = 1; wr_addr = 7'({m[2:0], f[2:0], h[0]});
          wr_data = h ? content(m, f)[31:0] : content(m, f)[63:32];
        end
    @(posedge clk); #1;
    wr_en = 0;
    check(!out_valid, "idle after programming");
    request(1);
    request(6);        // waits for the first frame to finish
    fork
      request(3);
      repeat (30) begin @(posedge clk); #1; out_ready = ($urandom_range(0, 2) != 0); end
    join
    out_ready = 1;
    request(7);
    repeat (20) @(posedge clk);
    check(got_msgs.size() == 4, $sformatf("four frames sent: %0d %p", got_msgs.size(), got_msgs));
    if (got_msgs.size() == 4)
      check(got_msgs[0] == 1 && got_msgs[1] == 6 && got_msgs[2] == 3 && got_msgs[3] == 7, "frame order");
    check(n_sent == 4 && dones == 4, "sent counter");
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

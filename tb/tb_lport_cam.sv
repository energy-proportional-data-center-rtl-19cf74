// tb_lport_cam: self-checking test of the logical port (ternary) CAM.
// Programs 100 entries (exact MAC entries, a masked multicast entry that
// overlaps an exact one, an invalid entry) and looks up random and
// programmed keys every cycle. Each result is compared with a reference
// search in the testbench and must arrive exactly 2 cycles after its key.
module tb_lport_cam;
  import lcdc_pkg::*;
  localparam int N = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic key_valid, res_valid, hit, mcast, wr_en;
  logic [47:0] key;
  logic [LPORT_W-1:0] lport;
  logic [6:0] wr_idx;
  logic [2:0] wr_word;
  logic [31:0] wr_data;
  int checks = 0, failures = 0;

  lport_cam #(.ENTRIES(N)) dut (.*);

  logic [47:0] rk[N], rm[N];
  logic [15:0] rl[N];
  logic        rc[N], rv[N];

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int idx, input int w, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_idx = 7'(idx); wr_word = 3'(w); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic prog(input int i, input logic [47:0] k, input logic [47:0] m,
                      input logic [15:0] l, input logic mc, input logic v);
    rk[i] = k; rm[i] = m; rl[i] = l; rc[i] = mc; rv[i] = v;
    wr(i, 0, k[31:0]); wr(i, 1, {16'd0, k[47:32]});
    wr(i, 2, m[31:0]); wr(i, 3, {16'd0, m[47:32]});
    wr(i, 4, {v, 14'd0, mc, l});
  endtask

  function automatic logic [17:0] ref_lookup(input logic [47:0] k);
    for (int i = 0; i < N; i++)
      if (rv[i] && ((k ^ rk[i]) & rm[i]) == 0) return {1'b1, rc[i], rl[i]};
    return '0;
  endfunction

  logic [17:0] exp_q[$];
  logic        vq[$];

  initial begin
    key_valid = 0; key = '0; wr_en = 0; wr_idx = 0; wr_word = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // entry 0: multicast group 01:00:5e:xx:xx:xx (care about top 24 bits)
    prog(0, 48'h01005e000000, 48'hffffff000000, 16'h8001, 1'b1, 1'b1);
    for (int i = 1; i < N; i++)
      prog(i, {16'h0200, 32'(i * 7919)}, '1, 16'(i), 1'b0, (i != 50));
    // entry 99 duplicates a multicast address: entry 0 must win
    prog(99, 48'h01005e000001, '1, 16'h0063, 1'b0, 1'b1);
    // lookups
    for (int t = 0; t < 400; t++) begin
      logic [47:0] k;
      case (t % 4)
        0: k = {16'h0200, 32'($urandom_range(1, N-1) * 7919)};
        1: k = {24'h01005e, 24'($urandom)};
        2: k = {16'h0200, 32'(50 * 7919)};
        default: k = {$urandom, 16'($urandom)};
      endcase
      @(negedge clk);
      key_valid = 1; key = k;
      exp_q.push_back(ref_lookup(k));
    end
    @(negedge clk);
    key_valid = 0;
    repeat (4) @(posedge clk);
    check(exp_q.size() == 0, "missing results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results must appear 2 cycles after the key
  logic kv1, kv2;
  always @(posedge clk) begin
    kv1 <= rst_n & key_valid;
    kv2 <= kv1;
  end
  always @(posedge clk) if (rst_n) begin
    #1;
    if (kv2) begin
      logic [17:0] e;
      e = exp_q.pop_front();
      check(res_valid, "result not valid 2 cycles after key");
      check(hit == e[17] && (!e[17] || (mcast == e[16] && lport == e[15:0])),
            $sformatf("lookup exp %h got hit=%b mc=%b lp=%h", e, hit, mcast, lport));
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

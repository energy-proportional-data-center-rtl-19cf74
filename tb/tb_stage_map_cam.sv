// tb_stage_map_cam: self-checking test of one stage CAM map. Programs 100
// entries with random logical ports and port maps (one invalid), then looks
// up programmed and unknown logical ports every cycle; each result is
// compared with a reference search and must arrive exactly 2 cycles after
// its key.
module tb_stage_map_cam;
  import lcdc_pkg::*;
  localparam int N = 100, NP = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic key_valid, res_valid, hit, wr_en, wr_word;
  logic [LPORT_W-1:0] key;
  logic [NP-1:0] pmap;
  logic [6:0] wr_idx;
  logic [31:0] wr_data;
  int checks = 0, failures = 0;

  stage_map_cam #(.ENTRIES(N), .NPORTS(NP)) dut (.*);

  logic [15:0] rk[N];
  logic [NP-1:0] rm[N];
  logic rv[N];

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int idx, input logic w, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_idx = 7'(idx); wr_word = w; wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic logic [NP:0] ref_lookup(input logic [15:0] k);
    for (int i = 0; i < N; i++) if (rv[i] && rk[i] == k) return {1'b1, rm[i]};
    return '0;
  endfunction

  logic [NP:0] exp_q[$];
  logic kv1, kv2;
  always @(posedge clk) begin kv1 <= rst_n & key_valid; kv2 <= kv1; end
  always @(posedge clk) if (rst_n) begin
    #1;
    if (kv2) begin
      logic [NP:0] e;
      e = exp_q.pop_front();
      check(res_valid, "result not valid 2 cycles after key");
      check(hit == e[NP] && pmap == (e[NP] ? e[NP-1:0] : '0),
            $sformatf("exp %b got hit=%b map=%b", e, hit, pmap));
    end
  end

  initial begin
    key_valid = 0; key = 0; wr_en = 0; wr_idx = 0; wr_word = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      rk[i] = 16'(i * 3 + 7); rm[i] = NP'($urandom_range(1, 63)); rv[i] = (i != 20);
      wr(i, 1'b0, {rv[i], 15'd0, rk[i]});
      wr(i, 1'b1, 32'(rm[i]));
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      key_valid = 1;
      key = (t % 3 == 2) ? 16'($urandom) : 16'($urandom_range(0, N-1) * 3 + 7);
      exp_q.push_back(ref_lookup(key));
    end
    @(negedge clk);
    key_valid = 0;
    // duplicate keys: entries 30 and 70 take the key of entry 50, the
    // lowest index (30) must win; then 30 is invalidated and 50 wins
    for (int r = 0; r < 2; r++) begin
      repeat (3) @(negedge clk);
      foreach (rk[i]) if (i == 30 || i == 70) begin
        rk[i] = rk[50]; rm[i] = NP'(i == 30 ? 6'b101010 : 6'b010101); rv[i] = (r == 0 || i == 70);
        wr(i, 1'b0, {rv[i], 15'd0, rk[i]});
        wr(i, 1'b1, 32'(rm[i]));
      end
      rm[50] = 6'b000011; wr(50, 1'b1, 32'(rm[50]));
      @(negedge clk);
      key_valid = 1; key = rk[50];
      exp_q.push_back(ref_lookup(key));
      @(negedge clk);
      key_valid = 0;
      repeat (3) @(negedge clk);
    end
    repeat (4) @(posedge clk);
    check(exp_q.size() == 0, "missing results");
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

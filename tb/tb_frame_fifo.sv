// tb_frame_fifo: self-checking test of the store-and-forward frame queue.
// Writes frames of several lengths (with read-side stalls), checks that no
// flit is offered before its frame's eop is stored, that flits come out in
// order and unbroken, that level tracks occupancy and that in_ready drops
// when the RAM is full.
module tb_frame_fifo;
  import lcdc_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  logic [$clog2(DEPTH):0] level, frames;
  int checks = 0, failures = 0;

  frame_fifo #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic flit_t mk(input int f, input int i, input int n);
    flit_t x = '0;
    x.data = {32'(f), 32'(i)};
    x.sop = (i == 0); x.eop = (i == n-1);
    return x;
  endfunction

  // expected stream
  flit_t exp_q[$];
  int    lens[5] = '{3, 1, 8, 5, 2};

  initial begin
    in_valid = 0; in_flit = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // write first frame partially: nothing may come out
    for (int i = 0; i < 2; i++) begin
      in_valid <= 1; in_flit <= mk(0, i, 3); @(posedge clk);
    end
    in_valid <= 0; @(posedge clk); #1;
    check(!out_valid, "flit offered before frame complete");
    check(level == 2, "level after 2 writes");
    in_valid <= 1; in_flit <= mk(0, 2, 3); @(posedge clk);
    in_valid <= 0; #1;
    check(out_valid, "frame complete but not offered");
    for (int i = 0; i < 3; i++) exp_q.push_back(mk(0, i, 3));
    // fill to full with one large frame (13 flits fit in the 13 free slots)
    for (int i = 0; i < 13; i++) begin
      in_valid <= 1; in_flit <= mk(9, i, 13); @(posedge clk);
      exp_q.push_back(mk(9, i, 13));
    end
    in_valid <= 0; #1;
    check(level == 16, "level when full");
    check(!in_ready, "in_ready high when full");
    check(frames == 2, "two frames stored");
    // drain everything with random stalls
    out_ready = 1;
    while (exp_q.size() > 0) begin
      if (out_valid && out_ready) begin
        flit_t e;
        e = exp_q.pop_front();
        check(out_flit == e, $sformatf("data mismatch exp %h got %h", e.data, out_flit.data));
      end
      @(posedge clk); #1;
      out_ready = ($urandom_range(0, 3) != 0);
    end
    out_ready <= 0;
    @(posedge clk); #1;
    check(level == 0, "level after drain");
    check(!out_valid, "out_valid after drain");
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

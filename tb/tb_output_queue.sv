// tb_output_queue: self-checking test of the packet enqueue / output queue
// of port 2. Sends annotated frames selecting port 2 or other ports; the
// queue must store only its own frames, without their annotation flits,
// must drop a whole frame when fewer than one maximum frame of space is
// left, and must report backlog and empty correctly. The first flit of an
// admitted frame must be stored one cycle after it arrives.
module tb_output_queue;
  import lcdc_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, out_ready, empty;
  flit_t in_flit, out_flit;
  logic [$clog2(DEPTH):0] backlog;
  logic [31:0] n_enq, n_drop;
  int checks = 0, failures = 0;

  output_queue #(.PORT_ID(2), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  flit_t expq[$];
  int model_level = 0;

  task automatic send(input logic [7:0] qsel, input int len, input int tag);
    flit_t f;
    ann_t a;
    logic take;
    take = qsel[2] && (model_level <= DEPTH - MAX_FRAME_FLITS);
    a = '0; a.qsel = qsel;
    @(posedge clk); #1;
    f = '0; f.ann = 1; f.data = a;
    in_valid = 1; in_flit = f;
    for (int i = 0; i < len; i++) begin
      @(posedge clk); #1;
      f = '0; f.data = {32'(tag), 32'(i)}; f.sop = (i == 0); f.eop = (i == len-1);
      in_flit = f;
      if (take) begin expq.push_back(f); model_level++; end
      if (take && i == 0) begin
        @(negedge clk);
        check(int'(backlog) == model_level - 1, "flit written before its cycle");
      end
    end
    @(posedge clk); #1;
    in_valid = 0;
    @(negedge clk);
    check(int'(backlog) == model_level, $sformatf("backlog %0d exp %0d", backlog, model_level));
  endtask

  initial begin
    in_valid = 0; in_flit = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && backlog == 0, "empty after reset");
    send(8'b0000_0100, 10, 1);   // mine
    send(8'b0000_1000, 12, 2);   // other port
    send(8'b0000_0110, 50, 3);   // multicast incl. mine  -> level 60
    check(!empty, "not empty");
    send(8'b0000_0100, 20, 4);   // 60 <= 66 -> admitted, level 80
    send(8'b0000_0100, 8, 5);    // 80 > 66 -> dropped
    check(n_enq == 3 && n_drop == 1, $sformatf("counters enq=%0d drop=%0d", n_enq, n_drop));
    // drain and compare
    @(posedge clk); #1;
    out_ready = 1;
    while (expq.size() > 0) begin
      @(negedge clk);
      if (out_valid) begin
        flit_t e;
        e = expq.pop_front();
        check(out_flit == e, $sformatf("out %h exp %h", out_flit.data, e.data));
      end
      @(posedge clk); #1;
    end
    @(negedge clk);
    check(empty && backlog == 0, "empty after drain");
    model_level = 0;
    send(8'b0000_0100, 8, 6);    // admitted again after draining
    check(n_enq == 4, "admitted after drain");
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

// tb_input_arbiter: self-checking test of the input round-robin arbiter.
// Physical inputs 0, 3 and 5 and the virtual input 6 hold frames; the
// virtual port gets its frame while input 0's first frame is streaming. The
// expected order is input 0, virtual, 3, 5, 0: round robin over physical
// inputs with the virtual port served first at the next frame boundary.
// Every frame must be preceded by one annotation flit naming its input and
// follow it without gaps.
module tb_input_arbiter;
  import lcdc_pkg::*;
  localparam int NIN = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NIN-1:0] in_valid, in_ready;
  flit_t in_flit [NIN];
  logic out_valid;
  flit_t out_flit;
  int checks = 0, failures = 0;

  input_arbiter #(.NIN(NIN)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  flit_t src [NIN][$];

  task automatic push_frame(input int port, input int tag, input int n);
    for (int i = 0; i < n; i++) begin
      flit_t x;
      x = '0;
      x.data = {16'(tag), 16'(port), 32'(i)};
      x.sop = (i == 0); x.eop = (i == n-1);
      src[port].push_back(x);
    end
  endtask

  always_comb
    for (int i = 0; i < NIN; i++) begin
      in_valid[i] = (src[i].size() > 0);
      in_flit[i]  = in_valid[i] ? src[i][0] : '0;
    end
  always @(posedge clk)
    for (int i = 0; i < NIN; i++)
      if (in_valid[i] && in_ready[i]) void'(src[i].pop_front());

  // expected output: (port, tag, length)
  int exp_port[5] = '{0, 6, 3, 5, 0};
  int exp_tag [5] = '{10, 60, 30, 50, 11};
  int exp_len [5] = '{4, 8, 3, 5, 2};

  int fr = 0, fi = -1, cyc = 0, ann_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      if (out_flit.ann) begin
        ann_t a;
        a = ann_t'(out_flit.data);
        check(fi == -1, "annotation inside a frame");
        check(fr < 5 && int'(a.in_port) == exp_port[fr],
              $sformatf("frame %0d from input %0d", fr, a.in_port));
        fi = 0; ann_cyc = cyc;
      end else begin
        check(fi >= 0 && fr < 5, "flit without annotation");
        if (fr < 5) begin
          check(out_flit.data == {16'(exp_tag[fr]), 16'(exp_port[fr]), 32'(fi)},
                $sformatf("frame %0d flit %0d data %h", fr, fi, out_flit.data));
          check(cyc == ann_cyc + fi + 1, "gap in frame");
          check(out_flit.eop == (fi == exp_len[fr]-1), "eop position");
        end
        fi++;
        if (out_flit.eop) begin fr++; fi = -1; end
      end
    end
  end

  initial begin
    push_frame(0, 10, 4);
    push_frame(0, 11, 2);
    push_frame(3, 30, 3);
    push_frame(5, 50, 5);
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    push_frame(6, 60, 8);
    repeat (60) @(posedge clk);
    check(fr == 5, $sformatf("frames out = %0d", fr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_avalon_cfg: self-checking test of the Avalon-MM configuration slave.
// Reads the reset values, writes and reads back the watermarks, senderID
// and stage masks (read data one cycle after the read strobe), reads the
// status word, and checks that writes into the three table windows raise
// only the matching write strobe with the right entry, word and stage.
module tb_avalon_cfg;
  localparam int NP = 6, NS = 4, BL_W = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [11:0] avs_address;
  logic avs_write, avs_read, avs_readdatavalid;
  logic [31:0] avs_writedata, avs_readdata;
  logic [2:0] st_cur_stage;
  logic [NS-1:0] st_stage_en;
  logic st_busy;
  logic [BL_W-1:0] hi_wm, lo_wm;
  logic [31:0] sender_id, tbl_wr_data;
  logic [NP-1:0] stage_mask [NS];
  logic lcam_wr_en, map_wr_en, map_wr_word, msg_wr_en;
  logic [6:0] lcam_wr_idx, map_wr_idx, msg_wr_addr;
  logic [2:0] lcam_wr_word;
  logic [1:0] map_wr_stage;
  int checks = 0, failures = 0;

  avalon_cfg #(.NPORTS(NP), .NSTAGES(NS), .BL_W(BL_W), .DEF_HI(768), .DEF_LO(225),
               .DEF_SID(32'h0000_0001)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    avs_address = a; avs_writedata = d; avs_write = 1;
    #1;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    avs_write = 0; avs_address = a; avs_read = 1;
    @(posedge clk); #1;
    avs_read = 0;
    check(avs_readdatavalid, "readdatavalid one cycle after read");
    d = avs_readdata;
    @(posedge clk); #1;
    check(!avs_readdatavalid, "readdatavalid single cycle");
  endtask

  initial begin
    logic [31:0] d;
    avs_address = 0; avs_write = 0; avs_read = 0; avs_writedata = 0;
    st_cur_stage = 3'd2; st_stage_en = 4'b0011; st_busy = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rd(12'h000, d); check(d == 768, "reset hi watermark");
    rd(12'h001, d); check(d == 225, "reset lo watermark");
    rd(12'h002, d); check(d == 1, "reset senderID");
    rd(12'h008, d); check(d == 32'b000111, "reset stage 1 mask");
    rd(12'h00B, d); check(d == 32'b100000, "reset stage 4 mask");
    rd(12'h003, d); check(d == {23'd0, 1'b1, 4'b0011, 4'd2}, $sformatf("status %h", d));
    wr(12'h000, 32'd900); wr(12'h001, 32'd100); wr(12'h002, 32'hC0DE0007);
    wr(12'h009, 32'b110000);
    @(posedge clk); #1; avs_write = 0;
    check(hi_wm == 900 && lo_wm == 100 && sender_id == 32'hC0DE0007 && stage_mask[1] == 6'b110000,
          "register outputs after write");
    rd(12'h000, d); check(d == 900, "hi readback");
    rd(12'h009, d); check(d == 32'b110000, "mask readback");
    // table windows
    wr({2'b01, 7'd99, 3'd4}, 32'h8000_0042);
    check(lcam_wr_en && !map_wr_en && !msg_wr_en && lcam_wr_idx == 99 && lcam_wr_word == 4
          && tbl_wr_data == 32'h8000_0042, "logical CAM strobe");
    wr({2'b10, 2'd3, 7'd57, 1'b1}, 32'h3F);
    check(map_wr_en && !lcam_wr_en && !msg_wr_en && map_wr_stage == 3 && map_wr_idx == 57
          && map_wr_word, "stage map strobe");
    wr({2'b11, 3'd0, 7'b1010101}, 32'h1234);
    check(msg_wr_en && !lcam_wr_en && !map_wr_en && msg_wr_addr == 7'b1010101, "message memory strobe");
    wr(12'h010, 32'hFFFF);
    check(!lcam_wr_en && !map_wr_en && !msg_wr_en, "no strobe for register window");
    @(posedge clk); #1; avs_write = 0;
    check(hi_wm == 900, "unmapped register write harmless");
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

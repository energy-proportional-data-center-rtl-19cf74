// input_arbiter: pipeline stage 1, the input round-robin arbiter.
//
// NIN-1 physical receive queues and one virtual port (the control message
// generator, input NIN-1) compete for the pipeline. Arbitration is per
// frame: at a frame boundary the virtual port wins whenever it holds a
// frame (the paper's out-of-order polling that prioritises generated control
// frames); otherwise the physical inputs are served round robin starting
// after the last one granted. The winner's frame is then pulled flit by
// flit until eop. In the cycle of the grant the arbiter emits the frame's
// annotation flit, which records the input port; the frame's flits follow
// in the next cycles. Inputs are frame queues that only offer complete
// frames, so a frame leaves as one unbroken run of flits.
// Timing: grant decision and annotation flit in one cycle, then one flit
// per cycle; out_* is registered. Frame-granular arbitration and the place
// of the annotation flit are this design's choices.
module input_arbiter
  import lcdc_pkg::*;
#(
  parameter int NIN = 7
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NIN-1:0]  in_valid,
  output logic [NIN-1:0]  in_ready,
  input  flit_t           in_flit [NIN],
  output logic            out_valid,
  output flit_t           out_flit
);
  localparam int IW = $clog2(NIN);

  logic           busy;
  logic [IW-1:0]  cur, last_phys;
  logic           pick_ok;
  logic [IW-1:0]  pick;
  ann_t           ann;

  // Choose the next input at a frame boundary.
  always_comb begin
    int idx;
    idx     = 0;
    pick_ok = 1'b0;
    pick    = '0;
    if (in_valid[NIN-1]) begin
      pick_ok = 1'b1;
      pick    = IW'(NIN-1);
    end else begin
      for (int k = 1; k <= NIN-1; k++) begin
        idx = (int'(last_phys) + k) % (NIN-1);
        if (!pick_ok && in_valid[idx]) begin
          pick_ok = 1'b1;
          pick    = IW'(idx);
        end
      end
    end
  end

  always_comb begin
    in_ready = '0;
    if (busy) in_ready[cur] = 1'b1;
  end

  always_comb begin
    ann         = '0;
    ann.in_port = 4'(pick);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur       <= '0;
      last_phys <= IW'(NIN-2);
      out_valid <= 1'b0;
      out_flit  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (pick_ok) begin
          busy          <= 1'b1;
          cur           <= pick;
          if (pick != IW'(NIN-1)) last_phys <= pick;
          out_valid     <= 1'b1;
          out_flit      <= '0;
          out_flit.data <= ann;
          out_flit.ann  <= 1'b1;
        end
      end else if (in_valid[cur]) begin
        out_valid <= 1'b1;
        out_flit  <= in_flit[cur];
        if (in_flit[cur].eop) busy <= 1'b0;
      end
    end
  end

  // A granted source must deliver its frame without gaps.
  a_no_gap: assert property (@(posedge clk) disable iff (!rst_n) busy |-> in_valid[cur]);
endmodule

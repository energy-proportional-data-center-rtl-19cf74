// output_queue: pipeline stage 4, packet enqueue into the RAM-based output
// queue of one physical port.
//
// All output queues watch the same flit stream from the scheduler. When an
// annotation flit selects this port (qsel[PORT_ID]) the queue admits the
// frame if at least ADMIT_FLITS flits are free, enough for the largest
// Ethernet frame, and otherwise drops the whole frame and counts it. The
// annotation flit itself is not stored; the frame's flits are written into
// a frame_fifo one per cycle (the paper's one cycle to place a flit in the
// output queue). The read side feeds the port's MAC transmit queue and only
// offers complete frames. backlog (stored flits) goes to the backlog
// monitor and the scheduler; empty tells the stage enable block that a port
// has been drained.
// One RAM queue per port follows the paper; depth and whole-frame tail drop
// are this design's choices.
module output_queue
  import lcdc_pkg::*;
#(
  parameter int PORT_ID     = 0,
  parameter int DEPTH       = 1024,
  parameter int ADMIT_FLITS = (MAX_FRAME_FLITS < DEPTH) ? MAX_FRAME_FLITS : DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  flit_t                   in_flit,
  output logic                    out_valid,
  input  logic                    out_ready,
  output flit_t                   out_flit,
  output logic [$clog2(DEPTH):0]  backlog,
  output logic                    empty,
  output logic [31:0]             n_enq,
  output logic [31:0]             n_drop
);
  localparam int LW = $clog2(DEPTH) + 1;

  logic    taking;
  logic    wr;
  logic    in_ready;
  ann_t    a;
  logic [LW-1:0] frames;

  assign a  = ann_t'(in_flit.data);
  assign wr = in_valid && !in_flit.ann && taking;

  frame_fifo #(.DEPTH(DEPTH)) u_ram (
    .clk, .rst_n,
    .in_valid  (wr),
    .in_ready  (in_ready),
    .in_flit   (in_flit),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_flit  (out_flit),
    .level     (backlog),
    .frames    (frames)
  );
  assign empty = (backlog == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taking <= 1'b0; n_enq <= '0; n_drop <= '0;
    end else if (in_valid) begin
      if (in_flit.ann) begin
        taking <= 1'b0;
        if (a.qsel[PORT_ID]) begin
          if (int'(backlog) <= DEPTH - ADMIT_FLITS) begin
            taking <= 1'b1;
            n_enq  <= n_enq + 1;
          end else begin
            n_drop <= n_drop + 1;
          end
        end
      end else if (in_flit.eop) begin
        taking <= 1'b0;
      end
    end
  end

  a_never_full: assert property (@(posedge clk) disable iff (!rst_n) wr |-> in_ready);
endmodule

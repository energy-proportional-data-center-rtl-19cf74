// frame_fifo: store-and-forward frame queue, used for the MAC receive and
// transmit queues and as the RAM of each output queue.
//
// Flits are written into a RAM ring (one flit per cycle when in_valid and
// in_ready). The read side offers a flit only while at least one complete
// frame (a written eop) is stored, so a frame leaves the queue as an
// unbroken run of flits; the input arbiter and the fixed-latency pipeline
// behind it rely on that. in_ready is low when the RAM is full. level counts
// stored flits and is the backlog the switch monitors. A flit written in
// cycle t can be read from cycle t+1 once its frame is complete.
// The paper says only that input buffering relies on the MAC's hardware
// queues; depth and store-and-forward behaviour are this design's choices.
module frame_fifo
  import lcdc_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  flit_t                    in_flit,
  output logic                     out_valid,
  input  logic                     out_ready,
  output flit_t                    out_flit,
  output logic [$clog2(DEPTH):0]   level,
  output logic [$clog2(DEPTH):0]   frames
);
  localparam int AW = $clog2(DEPTH);

  flit_t          mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic           do_wr, do_rd;

  assign in_ready  = (level != DEPTH[AW:0]);
  assign out_valid = (frames != '0);
  assign out_flit  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
      frames <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      level  <= level + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      frames <= frames + (AW+1)'(do_wr && in_flit.eop) - (AW+1)'(do_rd && out_flit.eop);
    end
  end

endmodule

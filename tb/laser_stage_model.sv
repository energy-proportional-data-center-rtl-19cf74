// laser_stage_model: behavioural model (not synthesizable design) of the
// optical transceivers and laser drivers behind each LCDC stage.
//
// When a stage's enable rises, its ready output follows TURN_ON cycles
// later (the laser and its driver powering up and the link locking); when
// the enable falls, ready drops at once and the stage counts as off after
// TURN_OFF cycles (off_done). Defaults: 1 us on / 10 us off, the delays of
// a commercial SFP+ module used to evaluate the scheme, at a 169.32 MHz
// clock. Only the switch testbench uses it.
module laser_stage_model #(
  parameter int NSTAGES  = 4,
  parameter int TURN_ON  = 169,
  parameter int TURN_OFF = 1693
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NSTAGES-1:0] stage_en,
  output logic [NSTAGES-1:0] stage_rdy,
  output logic [NSTAGES-1:0] off_done
);
  int on_cnt [NSTAGES];
  int off_cnt [NSTAGES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTAGES; s++) begin on_cnt[s] <= 0; off_cnt[s] <= 0; end
      stage_rdy <= NSTAGES'(1);
      off_done  <= '0;
    end else begin
      for (int s = 0; s < NSTAGES; s++) begin
        if (stage_en[s]) begin
          off_done[s] <= 1'b0;
          off_cnt[s]  <= 0;
          if (!stage_rdy[s]) begin
            if (on_cnt[s] >= TURN_ON - 1) stage_rdy[s] <= 1'b1;
            else on_cnt[s] <= on_cnt[s] + 1;
          end
        end else begin
          stage_rdy[s] <= 1'b0;
          on_cnt[s]    <= 0;
          if (!off_done[s]) begin
            if (off_cnt[s] >= TURN_OFF - 1) off_done[s] <= 1'b1;
            else off_cnt[s] <= off_cnt[s] + 1;
          end
        end
      end
    end
  end
endmodule

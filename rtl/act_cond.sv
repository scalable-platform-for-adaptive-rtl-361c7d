// act_cond: actuator threshold and conditioning.
//
// Takes the updated phase words (LANES 32-bit phases each), limits every
// value to the deformable-mirror safety thresholds [cfg_act_min,
// cfg_act_max] and sends the (n+1)^2 actuator values of the frame out one
// per clock as 16-bit two's-complement numbers, in actuator order, marking
// the last one of the frame. Because the thresholds are 16-bit values the
// clamp also converts to the 16-bit output format; setting them to the full
// 16-bit range leaves only that saturation.
//
// Interface: phase words in on a valid/ready stream; actuator values out on
// another. A word is released once its last used lane has been sent, so
// one word every LANES clocks is taken at full output rate.
// The design names this stage; the clamp-and-serialize behaviour, the
// formats and the output order are this implementation's choices.
module act_cond
  import sparc_pkg::*;
#(
  parameter int unsigned LANES    = 64,
  parameter int unsigned MAX_NSUB = 50
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(MAX_NSUB+1)-1:0] cfg_nsub,
  input  act_t                          cfg_act_min,
  input  act_t                          cfg_act_max,
  // phase words in
  input  logic                          ph_valid,
  output logic                          ph_ready,
  input  logic [LANES*PHASE_W-1:0]      ph_data,
  // actuator values out
  output logic                          act_valid,
  input  logic                          act_ready,
  output act_t                          act_data,
  output logic                          act_last,
  output logic [11:0]                   act_index
);
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;

  logic [LANES*PHASE_W-1:0] word;
  logic                     held;
  logic [LW-1:0]            lane;
  logic [11:0]              total_m1;   // (n+1)^2 - 1
  logic                     send, word_done;
  phase_t                   v;

  always_ff @(posedge clk) total_m1 <= 12'((32'(cfg_nsub) + 1) * (32'(cfg_nsub) + 1) - 1);

  assign v         = $signed(word[lane*PHASE_W +: PHASE_W]);
  assign act_valid = held;
  assign act_last  = (act_index == total_m1);
  assign send      = act_valid && act_ready;
  assign word_done = send && ((lane == LW'(LANES - 1)) || act_last);
  assign ph_ready  = !held || word_done;

  always_comb begin
    if (v > phase_t'(cfg_act_max))      act_data = cfg_act_max;
    else if (v < phase_t'(cfg_act_min)) act_data = cfg_act_min;
    else                                act_data = act_t'(v);
  end

  always_ff @(posedge clk) begin
    if (ph_valid && ph_ready) word <= ph_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= 1'b0;
      lane      <= '0;
      act_index <= '0;
    end else begin
      if (send) begin
        lane      <= word_done ? '0 : lane + 1'b1;
        act_index <= act_last ? '0 : act_index + 1'b1;
      end
      if (ph_valid && ph_ready) held <= 1'b1;
      else if (word_done)       held <= 1'b0;
    end
  end

  a_thresholds_ordered: assert property (@(posedge clk) disable iff (!rst_n)
    act_valid |-> cfg_act_min <= cfg_act_max);

endmodule

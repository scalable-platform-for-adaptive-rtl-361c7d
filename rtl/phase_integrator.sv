// phase_integrator: adds the reconstructed residual to the previous phases.
//
// The reconstructor measures the residual wavefront left after the last
// correction, so the new actuator phases are the old ones plus the residual.
// With the gain and leak of a classic AO integrator control law this is,
// per actuator,
//     r      = residual >>> res_shift              (accumulator -> phase LSB)
//     phi(t) = phi(t-1) + (gain*r >>> 15) - (leak*phi(t-1) >>> 15)
// with gain and leak unsigned Q1.15 (gain 16'h8000 and leak 0 give the plain
// "add the residual to the previous phases" of the simulation set-up).
// Results saturate to 32 bits. The phases live in a memory of S words of
// LANES phases; phase_clear (and reset) zero it, taking MAX_WORDS clocks
// during which no residual is accepted - at the start of a loop the previous
// phases are zero.
//
// Interface: residual words come in on a valid/ready stream (word index,
// LANES accumulators, last flag) and the updated phase words leave on
// another, one clock later; one word per clock when the output is not
// stalled. The update law with gain and leak is what the design uses for the
// iRobo-AO bench; the number formats and the scaling shift are this
// implementation's choices.
module phase_integrator
  import sparc_pkg::*;
#(
  parameter int unsigned LANES     = 64,
  parameter int unsigned MAX_NSUB  = 50,
  parameter int unsigned MAX_WORDS = ((MAX_NSUB + 1) * (MAX_NSUB + 1) + LANES - 1) / LANES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [GAIN_W-1:0]            cfg_gain,
  input  logic [GAIN_W-1:0]            cfg_leak,
  input  logic [5:0]                   cfg_res_shift,
  input  logic                         phase_clear,
  // residual in
  input  logic                         res_valid,
  output logic                         res_ready,
  input  logic [$clog2(MAX_WORDS)-1:0] res_word,
  input  logic [LANES*ACC_W-1:0]       res_data,
  input  logic                         res_last,
  // phases out
  output logic                         ph_valid,
  input  logic                         ph_ready,
  output logic [LANES*PHASE_W-1:0]     ph_data,
  output logic                         ph_last
);
  localparam int unsigned WW = $clog2(MAX_WORDS);

  logic [LANES*PHASE_W-1:0] phase_mem [MAX_WORDS];
  logic                     clearing;
  logic [WW-1:0]            clr_w;
  logic                     take;
  logic [LANES*PHASE_W-1:0] new_word;

  assign res_ready = !clearing && (!ph_valid || ph_ready);
  assign take      = res_valid && res_ready;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [63:0] r, phi, g, lk;
      r   = 64'($signed(res_data[l*ACC_W +: ACC_W])) >>> cfg_res_shift;
      r   = 64'(sat_phase(r));
      phi = 64'($signed(phase_mem[res_word][l*PHASE_W +: PHASE_W]));
      g   = (r   * $signed({1'b0, cfg_gain})) >>> GAIN_FRAC;
      lk  = (phi * $signed({1'b0, cfg_leak})) >>> GAIN_FRAC;
      new_word[l*PHASE_W +: PHASE_W] = sat_phase(phi + g - lk);
    end
  end

  always_ff @(posedge clk) begin
    if (clearing)  phase_mem[clr_w]    <= '0;
    else if (take) phase_mem[res_word] <= new_word;
  end

  always_ff @(posedge clk) begin
    if (take) begin
      ph_data <= new_word;
      ph_last <= res_last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_w    <= '0;
      ph_valid <= 1'b0;
    end else begin
      if (clearing) begin
        clr_w <= clr_w + 1'b1;
        if (clr_w == WW'(MAX_WORDS - 1)) begin
          clearing <= 1'b0;
          clr_w    <= '0;
        end
      end else if (phase_clear) begin
        clearing <= 1'b1;
      end
      if (take)          ph_valid <= 1'b1;
      else if (ph_ready) ph_valid <= 1'b0;
    end
  end

  a_word_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> int'(res_word) < MAX_WORDS);

endmodule

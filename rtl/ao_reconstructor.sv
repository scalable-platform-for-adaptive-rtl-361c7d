// ao_reconstructor: AO reconstructor state machine and multiply-accumulate
// array.
//
// Reconstruction is a matrix-vector multiplication of the (n+1)^2 x 2n^2
// reconstruction matrix (Fried geometry: (n+1)^2 actuators, 2n^2 slopes)
// with the slope vector. It is done one row of subapertures at a time, as
// soon as that row's 2n slopes exist: the n x-slopes multiply an
// (n+1)^2 x n sub-matrix and the n y-slopes another one, taken from
// different parts of the full matrix. The state machine follows the loop of
// the design:
//   WAIT_SLOPES  collect the n slope pairs of the next row of subapertures;
//   REQ          ask the memory state machine for a sub-matrix (X, then Y)
//                and wait until it is accepted;
//   MAC          consume the sub-matrix as it arrives: n columns of S words,
//                each word LANES coefficients; lane l of word w adds
//                coef * slope to the accumulator of actuator w*LANES + l;
//   CHECK        slopes of this row left (the Y part)? then back to REQ;
//                otherwise the row is done: next row, or, after the last
//                row of the frame, DRAIN;
//   DRAIN        hand the S accumulator words (the residual phase of every
//                actuator) to the phase integrator, clearing them.
// CLEAR zeroes the accumulators once after reset.
//
// Throughput: one memory word (LANES multiply-accumulates) per clock when
// the FIFO has data, so the speed is set by how fast the memory delivers the
// sub-matrix. Latency of the two-stage MAC pipeline: two clocks. The
// accumulator is a read-modify-write memory of S words updated in one clock,
// so consecutive beats to the same word need no stall.
// The row-wise decomposition follows the design; the column layout, the
// lane mapping, word widths and handshakes are this implementation's
// choices (see mem_sm for the memory layout).
module ao_reconstructor
  import sparc_pkg::*;
#(
  parameter int unsigned LANES    = 64,
  parameter int unsigned MAX_NSUB = 50,
  parameter int unsigned MAX_WORDS = ((MAX_NSUB + 1) * (MAX_NSUB + 1) + LANES - 1) / LANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(MAX_NSUB+1)-1:0] cfg_nsub,
  // slopes from the WPU
  input  logic                          slope_valid,
  output logic                          slope_ready,
  input  slope_pair_t                   slope_data,
  // sub-matrix requests to the memory state machine
  output logic                          req_valid,
  input  logic                          req_ready,
  output logic [$clog2(MAX_NSUB+1)-1:0] req_row,
  output part_e                         req_part,
  // sub-matrix data from the matrix FIFO
  input  logic                          coef_valid,
  output logic                          coef_ready,
  input  logic [LANES*COEF_W-1:0]       coef_data,
  // residual phases to the phase integrator
  output logic                          res_valid,
  input  logic                          res_ready,
  output logic [$clog2(MAX_WORDS)-1:0]  res_word,
  output logic [LANES*ACC_W-1:0]        res_data,
  output logic                          res_last
);
  localparam int unsigned NW = $clog2(MAX_NSUB+1);
  localparam int unsigned WW = $clog2(MAX_WORDS);

  typedef enum logic [2:0] {S_CLEAR, S_WAIT_SLOPES, S_REQ, S_MAC, S_CHECK, S_DRAIN} state_e;
  state_e state;

  logic [WW-1:0] words_m1;       // S - 1
  always_ff @(posedge clk)
    words_m1 <= WW'((((32'(cfg_nsub) + 1) * (32'(cfg_nsub) + 1) + LANES - 1) / LANES) - 1);

  slope_t        sx_r [MAX_NSUB];
  slope_t        sy_r [MAX_NSUB];
  logic [NW-1:0] j;              // slope / column counter
  logic [WW-1:0] w;              // word counter
  logic [NW-1:0] row;
  part_e         part;
  logic          beat, last_col, last_word;

  assign slope_ready = (state == S_WAIT_SLOPES);
  assign req_valid   = (state == S_REQ);
  assign req_row     = row;
  assign req_part    = part;
  assign coef_ready  = (state == S_MAC);
  assign beat        = coef_valid && coef_ready;
  assign last_col    = (j == cfg_nsub - 1'b1);
  assign last_word   = (w == words_m1);

  always_ff @(posedge clk) begin
    if (state == S_WAIT_SLOPES && slope_valid) begin
      sx_r[j] <= slope_data.sx;
      sy_r[j] <= slope_data.sy;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CLEAR;
      j     <= '0;
      w     <= '0;
      row   <= '0;
      part  <= PART_X;
    end else begin
      case (state)
        S_CLEAR: begin
          w <= w + 1'b1;
          if (w == WW'(MAX_WORDS - 1)) begin
            w     <= '0;
            state <= S_WAIT_SLOPES;
          end
        end
        S_WAIT_SLOPES: if (slope_valid) begin
          if (last_col) begin
            j     <= '0;
            part  <= PART_X;
            state <= S_REQ;
          end else begin
            j <= j + 1'b1;
          end
        end
        S_REQ: if (req_ready) begin
          j     <= '0;
          w     <= '0;
          state <= S_MAC;
        end
        S_MAC: if (beat) begin
          if (last_word) begin
            w <= '0;
            if (last_col) begin
              j     <= '0;
              state <= S_CHECK;
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            w <= w + 1'b1;
          end
        end
        S_CHECK: begin
          if (part == PART_X) begin
            part  <= PART_Y;           // slopes of this row remain
            state <= S_REQ;
          end else if (row == cfg_nsub - 1'b1) begin
            row   <= '0;
            w     <= '0;
            state <= S_DRAIN;          // frame complete
          end else begin
            row   <= row + 1'b1;
            state <= S_WAIT_SLOPES;
          end
        end
        S_DRAIN: if (res_ready) begin
          w <= w + 1'b1;
          if (last_word) begin
            w     <= '0;
            state <= S_WAIT_SLOPES;
          end
        end
        default: state <= S_CLEAR;
      endcase
    end
  end

  // ---- MAC pipeline -----------------------------------------------------
  logic signed [COEF_W+SLOPE_W-1:0] prod [LANES];
  logic                             prod_vld;
  logic [WW-1:0]                    prod_w;
  slope_t                           slope_cur;

  assign slope_cur = (part == PART_X) ? sx_r[j] : sy_r[j];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      prod[l] <= $signed(coef_data[l*COEF_W +: COEF_W]) * slope_cur;
    prod_w <= w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod_vld <= 1'b0;
    else        prod_vld <= beat;
  end

  // Accumulator memory: one word of LANES accumulators per actuator group.
  logic [LANES*ACC_W-1:0] acc_mem [MAX_WORDS];
  logic [LANES*ACC_W-1:0] acc_sum;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      acc_sum[l*ACC_W +: ACC_W] = acc_t'($signed(acc_mem[prod_w][l*ACC_W +: ACC_W]))
                                  + acc_t'(prod[l]);
  end

  always_ff @(posedge clk) begin
    if (state == S_CLEAR)
      acc_mem[w] <= '0;
    else if (prod_vld)
      acc_mem[prod_w] <= acc_sum;
    else if (state == S_DRAIN && res_ready)
      acc_mem[w] <= '0;
  end

  assign res_valid = (state == S_DRAIN);
  assign res_word  = w;
  assign res_data  = acc_mem[w];
  assign res_last  = last_word;

  a_no_mac_during_drain: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_DRAIN |-> !prod_vld);

endmodule

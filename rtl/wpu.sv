// wpu: Wavefront Processing Unit.
//
// Turns the pixel stream of a Shack-Hartmann wavefront sensor into slopes,
// one row of subapertures at a time:
//   pixel_acq        - writes the pixels into banked double buffers;
//   controller       - once a full row of subapertures is held, reads its n
//                      subapertures one per clock (all p*p pixels at once);
//   cog_slope        - centre-of-gravity slopes, pipelined, one subaperture
//                      per clock;
//   slope_lin_offset - optional linearization and offset tables;
//   sync_fifo        - output buffer of slope pairs.
// Acquisition of the next row proceeds while the previous row's slopes are
// computed. The controller only reads a subaperture when the output FIFO has
// room for it and for everything already in the pipeline, so the slope
// pipeline itself never stalls; back-pressure from the reconstructor reaches
// the pixel input through the full buffers (pix_ready low).
//
// Output: one slope_pair_t per subaperture, in raster order of the
// subapertures (row by row, left to right), n*n pairs per frame, on a
// valid/ready stream. Structure and the CoG method follow the design; the
// credit scheme and FIFO depth are this implementation's choices. The WPU
// runs on the core clock; pixels reach it from their own acquisition clock
// through the dual-clock FIFO in front of it (see sparc_top), as the design
// separates the acquisition and slope-computation clocks.
module wpu
  import sparc_pkg::*;
#(
  parameter int unsigned PIX_SIDE    = 4,
  parameter int unsigned MAX_NSUB    = 50,
  parameter int unsigned SFIFO_DEPTH = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(MAX_NSUB+1)-1:0] cfg_nsub,
  input  logic [$clog2(PIX_SIDE+1)-1:0] cfg_pside,
  input  logic                          cfg_lin_en,
  input  logic                          cfg_off_en,
  // lookup-table load
  input  logic                          lut_we,
  input  logic [1:0]                    lut_sel,
  input  logic [11:0]                   lut_addr,
  input  slope_t                        lut_wdata,
  // pixels in
  input  logic                          pix_valid,
  output logic                          pix_ready,
  input  pix_t                          pix_data,
  // slopes out
  output logic                          slope_valid,
  input  logic                          slope_ready,
  output slope_pair_t                   slope_data
);
  localparam int unsigned NB  = PIX_SIDE * PIX_SIDE;
  localparam int unsigned JW  = $clog2(MAX_NSUB);
  localparam int unsigned NW  = $clog2(MAX_NSUB+1);
  localparam int unsigned KW  = 12;
  localparam int unsigned CW  = $clog2(SFIFO_DEPTH+1);

  initial begin
    if (MAX_NSUB * MAX_NSUB > 2**KW) $error("wpu: MAX_NSUB too large for the 12-bit subaperture index");
  end

  // ---- acquisition ----------------------------------------------------
  logic          row_avail, rd_en, row_release;
  logic [JW-1:0] rd_addr;
  pix_t          rd_pix [NB];

  pixel_acq #(.PIX_SIDE(PIX_SIDE), .MAX_NSUB(MAX_NSUB)) u_acq (
    .clk, .rst_n, .cfg_nsub, .cfg_pside,
    .pix_valid, .pix_ready, .pix_data,
    .row_avail, .rd_en, .rd_addr, .rd_pix, .row_release);

  // ---- controller -----------------------------------------------------
  typedef enum logic {S_WAIT_ROW, S_ISSUE} state_e;
  state_e        state;
  logic [NW-1:0] row;        // row of subapertures being read
  logic [KW-1:0] k_base;     // row * n
  logic [CW-1:0] inflight;   // issued, not yet in the FIFO
  logic [CW-1:0] fifo_cnt;
  logic          room, push, last_j;

  assign room        = (32'(fifo_cnt) + 32'(inflight)) < SFIFO_DEPTH;
  assign last_j      = (NW'(rd_addr) == cfg_nsub - 1'b1);
  assign rd_en       = (state == S_ISSUE) && room;
  assign row_release = rd_en && last_j;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_WAIT_ROW;
      row     <= '0;
      k_base  <= '0;
      rd_addr <= '0;
    end else begin
      case (state)
        S_WAIT_ROW: if (row_avail) begin
          state   <= S_ISSUE;
          rd_addr <= '0;
        end
        S_ISSUE: if (rd_en) begin
          if (last_j) begin
            state <= S_WAIT_ROW;
            if (row == cfg_nsub - 1'b1) begin
              row    <= '0;
              k_base <= '0;
            end else begin
              row    <= row + 1'b1;
              k_base <= k_base + KW'(cfg_nsub);
            end
          end else begin
            rd_addr <= rd_addr + 1'b1;
          end
        end
        default: state <= S_WAIT_ROW;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + CW'(rd_en) - CW'(push);
  end

  // ---- slope pipeline -------------------------------------------------
  logic          cog_in_vld;
  logic [KW-1:0] cog_in_k;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cog_in_vld <= 1'b0;
    else        cog_in_vld <= rd_en;
  end
  always_ff @(posedge clk) cog_in_k <= k_base + KW'(rd_addr);

  logic          cog_vld;
  slope_pair_t   cog_slopes;
  logic [KW-1:0] cog_k;

  cog_slope #(.PIX_SIDE(PIX_SIDE), .TAG_W(KW)) u_cog (
    .clk, .rst_n, .cfg_pside,
    .in_valid(cog_in_vld), .in_pix(rd_pix), .in_tag(cog_in_k),
    .out_valid(cog_vld), .out_slopes(cog_slopes), .out_tag(cog_k));

  slope_pair_t   lin_slopes;
  logic [KW-1:0] lin_k_unused;

  slope_lin_offset #(.MAX_NSUB(MAX_NSUB), .TAG_W(KW)) u_lin (
    .clk, .rst_n, .cfg_lin_en, .cfg_off_en,
    .lut_we, .lut_sel, .lut_addr, .lut_wdata,
    .in_valid(cog_vld), .in_slopes(cog_slopes), .in_k(cog_k),
    .out_valid(push), .out_slopes(lin_slopes), .out_k(lin_k_unused));

  logic fifo_in_ready;
  sync_fifo #(.WIDTH($bits(slope_pair_t)), .DEPTH(SFIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(push), .in_ready(fifo_in_ready), .in_data(lin_slopes),
    .out_valid(slope_valid), .out_ready(slope_ready), .out_data(slope_data),
    .count(fifo_cnt));

  a_credit_holds: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> fifo_in_ready);

endmodule

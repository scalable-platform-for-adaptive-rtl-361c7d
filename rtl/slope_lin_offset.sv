// slope_lin_offset: slope linearization and offset correction.
//
// A Shack-Hartmann centroid is not a linear measure of the wavefront slope,
// and the slopes seen with a flat deformable mirror are not zero. This block
// corrects both from lookup tables loaded by the host:
//   s1 = s + LIN[idx(s)]          (linearization; idx = top LIN_AW bits of s,
//                                  in offset binary, so LIN[0] covers the most
//                                  negative slopes)
//   s2 = s1 - OFFX[k]  or  s1 - OFFY[k]   (per-subaperture offset, k = index of
//                                  the subaperture in the frame, row-major)
// Both steps saturate to 16 bits and each can be switched off (bypass), as
// in the plain simulation set-up where neither is used.
//
// The design names these two corrections and says they come from lookup
// tables; the table organisation (a correction table indexed by the slope's
// top bits, and two offset tables) is this implementation's choice.
// Tables are written through lut_we/lut_sel/lut_addr/lut_wdata
// (lut_sel 0: LIN, 1: OFFX, 2: OFFY). Latency: one clock, one pair per clock.
module slope_lin_offset
  import sparc_pkg::*;
#(
  parameter int unsigned MAX_NSUB = 50,
  parameter int unsigned LIN_AW   = 10,
  parameter int unsigned TAG_W    = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_lin_en,
  input  logic               cfg_off_en,
  input  logic               lut_we,
  input  logic [1:0]         lut_sel,
  input  logic [TAG_W-1:0]   lut_addr,
  input  slope_t             lut_wdata,
  input  logic               in_valid,
  input  slope_pair_t        in_slopes,
  input  logic [TAG_W-1:0]   in_k,
  output logic               out_valid,
  output slope_pair_t        out_slopes,
  output logic [TAG_W-1:0]   out_k
);
  localparam int unsigned NOFF = MAX_NSUB * MAX_NSUB;

  slope_t lin  [2**LIN_AW];
  slope_t offx [NOFF];
  slope_t offy [NOFF];

  always_ff @(posedge clk) begin
    if (lut_we) begin
      case (lut_sel)
        2'd0:    lin[lut_addr[LIN_AW-1:0]] <= lut_wdata;
        2'd1:    offx[lut_addr] <= lut_wdata;
        2'd2:    offy[lut_addr] <= lut_wdata;
        default: ;
      endcase
    end
  end

  function automatic slope_t sat16(input logic signed [SLOPE_W+1:0] v);
    if (v > (SLOPE_W+2)'(32767))       return slope_t'(16'sh7fff);
    else if (v < -(SLOPE_W+2)'(32768)) return slope_t'(16'sh8000);
    else                               return slope_t'(v[SLOPE_W-1:0]);
  endfunction

  function automatic logic [LIN_AW-1:0] lin_idx(input slope_t s);
    return {~s[SLOPE_W-1], s[SLOPE_W-2 -: LIN_AW-1]};
  endfunction

  function automatic slope_t correct(input slope_t s, input slope_t corr, input slope_t off);
    slope_t s1;
    s1 = cfg_lin_en ? sat16((SLOPE_W+2)'(s) + (SLOPE_W+2)'(corr)) : s;
    return cfg_off_en ? sat16((SLOPE_W+2)'(s1) - (SLOPE_W+2)'(off)) : s1;
  endfunction

  always_ff @(posedge clk) begin
    out_slopes.sx <= correct(in_slopes.sx, lin[lin_idx(in_slopes.sx)], offx[in_k]);
    out_slopes.sy <= correct(in_slopes.sy, lin[lin_idx(in_slopes.sy)], offy[in_k]);
    out_k         <= in_k;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  a_k_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> int'(in_k) < NOFF);

endmodule

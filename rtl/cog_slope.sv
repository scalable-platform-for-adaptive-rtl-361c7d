// cog_slope: centre-of-gravity (CoG) slope computer of the WPU.
//
// For one subaperture of p x p pixels I(x,y), all delivered in the same clock,
// it computes the spot position relative to the subaperture centre:
//     sx = sum((x - (p-1)/2) * I) / sum(I),  sy likewise with y,
// in pixels, as signed 16-bit numbers with 12 fractional bits (truncated
// toward zero). A subaperture whose pixels sum to zero gives sx = sy = 0.
// Internally the weights are taken in half pixels, 2x-(p-1), so that they
// are integers, and the two divisions run in pipelined dividers; a new
// subaperture is accepted every clock and its slopes appear 18 clocks
// later (2 + 15 divider stages + 1), with the tag that came in with it. There is no stall: the caller
// keeps room for what is in flight.
//
// CoG slope computation is what the design specifies for the Shack-Hartmann
// sensor; the fixed-point format, rounding, zero-flux rule and pipeline are
// this implementation's choices.
module cog_slope
  import sparc_pkg::*;
#(
  parameter int unsigned PIX_SIDE = 4,
  parameter int unsigned TAG_W    = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(PIX_SIDE+1)-1:0] cfg_pside,
  input  logic                          in_valid,
  input  pix_t                          in_pix [PIX_SIDE*PIX_SIDE],
  input  logic [TAG_W-1:0]              in_tag,
  output logic                          out_valid,
  output slope_pair_t                   out_slopes,
  output logic [TAG_W-1:0]              out_tag
);
  localparam int unsigned NB     = PIX_SIDE * PIX_SIDE;
  localparam int unsigned SUM_W  = PIX_W + $clog2(NB) + 1;
  localparam int unsigned MOM_W  = PIX_W + $clog2(NB) + $clog2(2*PIX_SIDE) + 2;
  localparam int unsigned QW     = SLOPE_W - 1;
  localparam int unsigned NUM_W  = MOM_W + SLOPE_FRAC - 1;

  // ---- stage 1: flux and first moments --------------------------------
  logic [SUM_W-1:0]        s_sum;
  logic signed [MOM_W-1:0] s_cx, s_cy;
  logic                    s_vld;
  logic [TAG_W-1:0]        s_tag;

  always_ff @(posedge clk) begin
    logic [SUM_W-1:0]        sum;
    logic signed [MOM_W-1:0] cx, cy;
    sum = '0; cx = '0; cy = '0;
    for (int b = 0; b < NB; b++) begin
      logic signed [MOM_W-1:0] wx, wy;
      wx = MOM_W'(2 * (b % PIX_SIDE)) - MOM_W'(cfg_pside) + 1'b1;
      wy = MOM_W'(2 * (b / PIX_SIDE)) - MOM_W'(cfg_pside) + 1'b1;
      sum = sum + SUM_W'(in_pix[b]);
      cx  = cx + wx * MOM_W'($signed({1'b0, in_pix[b]}));
      cy  = cy + wy * MOM_W'($signed({1'b0, in_pix[b]}));
    end
    s_sum <= sum;
    s_cx  <= cx;
    s_cy  <= cy;
    s_tag <= in_tag;
  end

  // ---- stage 2: magnitudes, scaled numerators -------------------------
  logic [NUM_W-1:0] p_nx, p_ny;
  logic [SUM_W-1:0] p_den;
  logic             p_vld;
  logic [TAG_W+2:0] p_tag;   // {zero, neg_x, neg_y, tag}

  always_ff @(posedge clk) begin
    logic [MOM_W-1:0] ax, ay;
    ax = s_cx[MOM_W-1] ? MOM_W'(-s_cx) : MOM_W'(s_cx);
    ay = s_cy[MOM_W-1] ? MOM_W'(-s_cy) : MOM_W'(s_cy);
    p_nx  <= NUM_W'(ax) << (SLOPE_FRAC - 1);
    p_ny  <= NUM_W'(ay) << (SLOPE_FRAC - 1);
    p_den <= s_sum;
    p_tag <= {(s_sum == '0), s_cx[MOM_W-1], s_cy[MOM_W-1], s_tag};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_vld <= 1'b0;
      p_vld <= 1'b0;
    end else begin
      s_vld <= in_valid;
      p_vld <= s_vld;
    end
  end

  // ---- stages 3..: two pipelined dividers -----------------------------
  logic [QW-1:0]    qx, qy;
  logic             dx_vld, dy_vld;
  logic [TAG_W+2:0] d_tag;
  logic [TAG_W+2:0] unused_tag;

  pipe_div #(.NW(NUM_W), .DW(SUM_W), .QW(QW), .TAG_W(TAG_W+3)) u_div_x (
    .clk, .rst_n, .in_valid(p_vld), .num(p_nx), .den(p_den), .in_tag(p_tag),
    .out_valid(dx_vld), .quo(qx), .out_tag(d_tag));
  pipe_div #(.NW(NUM_W), .DW(SUM_W), .QW(QW), .TAG_W(TAG_W+3)) u_div_y (
    .clk, .rst_n, .in_valid(p_vld), .num(p_ny), .den(p_den), .in_tag(p_tag),
    .out_valid(dy_vld), .quo(qy), .out_tag(unused_tag));

  // ---- last stage: sign and zero-flux rule ----------------------------
  always_ff @(posedge clk) begin
    logic zero, nx, ny;
    {zero, nx, ny} = d_tag[TAG_W+2:TAG_W];
    out_slopes.sx <= zero ? '0 : (nx ? -slope_t'({1'b0, qx}) : slope_t'({1'b0, qx}));
    out_slopes.sy <= zero ? '0 : (ny ? -slope_t'({1'b0, qy}) : slope_t'({1'b0, qy}));
    out_tag       <= d_tag[TAG_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= dx_vld;
  end

  a_dividers_in_step: assert property (@(posedge clk) disable iff (!rst_n) dx_vld == dy_vld);

endmodule

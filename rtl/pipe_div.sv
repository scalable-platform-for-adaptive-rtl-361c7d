// pipe_div: fully pipelined unsigned restoring divider.
//
// Produces QW quotient bits of num/den, one bit per pipeline stage, so it
// accepts a new division every clock and returns it QW clocks later.
// The caller guarantees that the quotient fits in QW bits
// (num < den * 2**QW). A tag travels with each operand pair. den == 0 gives
// an all-ones quotient; callers that can see a zero divisor handle it.
// This is a generic helper of this implementation, used by the
// centre-of-gravity slope computer.
module pipe_div #(
  parameter int unsigned NW    = 34,
  parameter int unsigned DW    = 20,
  parameter int unsigned QW    = 15,
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [NW-1:0]    num,
  input  logic [DW-1:0]    den,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [QW-1:0]    quo,
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned CW = NW + DW + QW;

  logic [NW-1:0]    rem_q [QW+1];
  logic [DW-1:0]    den_q [QW+1];
  logic [QW-1:0]    quo_q [QW+1];
  logic [TAG_W-1:0] tag_q [QW+1];
  logic             vld_q [QW+1];

  assign rem_q[0] = num;
  assign den_q[0] = den;
  assign quo_q[0] = '0;
  assign tag_q[0] = in_tag;
  assign vld_q[0] = in_valid;

  for (genvar s = 0; s < QW; s++) begin : g_stage
    localparam int unsigned B = QW - 1 - s;
    logic [CW-1:0] shifted;
    logic          ge;
    assign shifted = CW'(den_q[s]) << B;
    assign ge      = CW'(rem_q[s]) >= shifted;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld_q[s+1] <= 1'b0;
      else        vld_q[s+1] <= vld_q[s];
    end
    always_ff @(posedge clk) begin
      rem_q[s+1] <= ge ? NW'(CW'(rem_q[s]) - shifted) : rem_q[s];
      den_q[s+1] <= den_q[s];
      tag_q[s+1] <= tag_q[s];
      quo_q[s+1] <= quo_q[s] | (QW'(ge) << B);
    end
  end

  assign out_valid = vld_q[QW];
  assign quo       = quo_q[QW];
  assign out_tag   = tag_q[QW];

endmodule

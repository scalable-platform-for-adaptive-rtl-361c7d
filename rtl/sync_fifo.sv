// sync_fifo: single-clock first-in first-out buffer.
//
// In SPARC it decouples the external-memory read data from the AO
// reconstructor (the matrix FIFO), so that a memory of any speed or latency
// can feed the multiply-accumulate array, and it buffers slopes inside the
// WPU. The design calls for an adaptable FIFO interface to the memory; its
// depth and width are parameters here, the rest is a plain circular buffer.
//
// Interface: push when in_valid && in_ready; pop when out_valid && out_ready.
// out_data shows the oldest entry combinationally (first-word fall-through).
// count is the number of entries held. Both a push and a pop may happen in
// the same cycle. Latency from push to out_valid is one clock.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A producer must not push into a full FIFO, nor the consumer pop an empty one.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |-> ##0 !do_push);
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
    count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule

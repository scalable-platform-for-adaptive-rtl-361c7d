// pixel_acq: WPU pixel acquisition into banked, double-buffered block RAM.
//
// Pixels of a Shack-Hartmann sensor frame arrive one per clock in raster
// order: a frame is (n*p) lines of (n*p) pixels, with n subapertures per row
// and p x p pixels per subaperture. The pixels are written so that all p*p
// pixels of one subaperture can be read in a single clock cycle: pixel (x,y)
// goes to bank (y mod p)*PIX_SIDE + (x mod p) at word address x div p. A row
// of subapertures (p lines) fills one of two buffers; while the slope
// computer reads one buffer the next row is written into the other, so pixel
// acquisition is not interrupted by slope computation. When both buffers are
// full, pix_ready is low (the pixel source is stalled).
//
// The banked mapping and the simultaneous access follow the design; the
// exact address arithmetic, the two-buffer scheme and the valid/ready
// handshakes are this implementation's choices. n and p are run-time
// settings (n <= MAX_NSUB, 1 <= p <= PIX_SIDE) and must be held while a
// frame is in flight. mod/div are done with counters, not dividers.
//
// Read side: row_avail says a full row is held; rd_en with rd_addr = j reads
// subaperture j of that row, and rd_pix returns its pixels one clock later
// (banks outside p x p read as zero). row_release frees the buffer.
module pixel_acq
  import sparc_pkg::*;
#(
  parameter int unsigned PIX_SIDE = 4,   // largest p supported
  parameter int unsigned MAX_NSUB = 50   // largest n supported
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [$clog2(MAX_NSUB+1)-1:0] cfg_nsub,
  input  logic [$clog2(PIX_SIDE+1)-1:0] cfg_pside,
  // pixel stream
  input  logic                        pix_valid,
  output logic                        pix_ready,
  input  pix_t                        pix_data,
  // row read side
  output logic                        row_avail,
  input  logic                        rd_en,
  input  logic [$clog2(MAX_NSUB)-1:0] rd_addr,
  output pix_t                        rd_pix [PIX_SIDE*PIX_SIDE],
  input  logic                        row_release
);
  localparam int unsigned NB  = PIX_SIDE * PIX_SIDE;
  localparam int unsigned SW  = $clog2(PIX_SIDE+1);
  localparam int unsigned JW  = $clog2(MAX_NSUB);
  localparam int unsigned NW  = $clog2(MAX_NSUB+1);

  // Two buffers, each PIX_SIDE*PIX_SIDE banks of MAX_NSUB words.
  pix_t mem [2][NB][MAX_NSUB];

  logic         full [2];
  logic         wbuf, rbuf;
  logic [SW-1:0] xi, yi;      // x mod p, line within the row of subapertures
  logic [JW-1:0] xj;          // x div p
  logic          wr;
  logic          last_in_line, last_line;

  assign pix_ready    = !full[wbuf];
  assign wr           = pix_valid && pix_ready;
  assign last_in_line = (xi == cfg_pside - 1'b1) && (NW'(xj) == cfg_nsub - 1'b1);
  assign last_line    = (yi == cfg_pside - 1'b1);
  assign row_avail    = full[rbuf];

  always_ff @(posedge clk) begin
    if (wr) mem[wbuf][int'(yi) * PIX_SIDE + int'(xi)][xj] <= pix_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xi <= '0; yi <= '0; xj <= '0;
      wbuf <= 1'b0; rbuf <= 1'b0;
      full[0] <= 1'b0; full[1] <= 1'b0;
    end else begin
      if (wr) begin
        if (xi == cfg_pside - 1'b1) begin
          xi <= '0;
          xj <= last_in_line ? '0 : xj + 1'b1;
        end else begin
          xi <= xi + 1'b1;
        end
        if (last_in_line) yi <= last_line ? '0 : yi + 1'b1;
      end
      // buffer hand-over; write and release touch different buffers
      if (wr && last_in_line && last_line) begin
        full[wbuf] <= 1'b1;
        wbuf       <= !wbuf;
      end
      if (row_release && full[rbuf]) begin
        full[rbuf] <= 1'b0;
        rbuf       <= !rbuf;
      end
    end
  end

  // Registered read of all banks of one subaperture.
  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int b = 0; b < NB; b++) begin
        if ((b / PIX_SIDE) < int'(cfg_pside) && (b % PIX_SIDE) < int'(cfg_pside))
          rd_pix[b] <= mem[rbuf][b][rd_addr];
        else
          rd_pix[b] <= '0;
      end
    end
  end

  a_release_only_full: assert property (@(posedge clk) disable iff (!rst_n)
    row_release |-> row_avail);
  a_read_only_full: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> row_avail);

endmodule

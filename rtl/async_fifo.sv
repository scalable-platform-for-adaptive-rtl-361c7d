// async_fifo: dual-clock first-in first-out buffer for the pixel input.
//
// SPARC acquires pixels on a different clock from the one that computes
// slopes, so that the camera or host link can run at its own rate. This
// FIFO carries the 16-bit pixel stream from the acquisition clock (wclk)
// into the core clock (rclk). The paper states only that the clocks differ;
// how the crossing is done is this design's choice: the usual circular
// buffer with binary pointers kept next to Gray-coded copies, each Gray
// pointer passed to the other side through two flip-flops. A pointer has
// one more bit than the address so that full and empty can be told apart.
//
// Interface: write side wvalid/wready/wdata on wclk, read side
// rvalid/rready/rdata on rclk, both valid/ready, rdata first-word
// fall-through. Each side has its own active-low reset; assert both
// together. Timing: a word written is visible on the read side three to
// four rclk edges later; a freed slot is seen by the write side three to
// four wclk edges after the read. DEPTH must be a power of two.
module async_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in wclk domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in rclk domain
  logic [AW:0] wbin_nxt, rbin_nxt;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign wready   = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_nxt = wbin + (AW+1)'(wvalid && wready);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nxt;
      wgray    <= bin2gray(wbin_nxt);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk)
    if (wvalid && wready) mem[wbin[AW-1:0]] <= wdata;

  // read side
  assign rvalid   = (rgray != wgray_r2);
  assign rdata    = mem[rbin[AW-1:0]];
  assign rbin_nxt = rbin + (AW+1)'(rvalid && rready);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nxt;
      rgray    <= bin2gray(rbin_nxt);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH)
    else $error("async_fifo: DEPTH must be a power of two, at least 4");
endmodule

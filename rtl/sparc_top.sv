// sparc_top: SPARC adaptive-optics real-time controller core.
//
// Wavefront-sensor pixels in, deformable-mirror actuator values out:
//
//   pixels --> wpu (acquire, CoG slopes, linearize/offset) --slopes-->
//   ao_reconstructor (per row of subapertures: request sub-matrix, MAC) <--
//       mem_sm (matrix load, sub-matrix reads, matrix FIFO) <--> external memory
//   --residual--> phase_integrator (phi += gain*r - leak*phi)
//   --phases--> act_cond (thresholds, 16-bit) --> actuator values
//
// The host first streams the reconstruction matrix in (mat_*), which mem_sm
// writes to the external memory and then reports with matrix_ready. Frames
// of n*p x n*p pixels then stream in on pix_*; for each frame the core
// sends (n+1)^2 actuator values on act_*, the last marked by act_last. The
// three state machines of the design (WPU, AO reconstructor, memory) work
// concurrently: the WPU acquires and computes the slopes of the next row of
// subapertures while the reconstructor multiplies the current one, and the
// memory keeps the matrix FIFO filled. Back-pressure is by valid/ready on
// every stream; a stalled actuator output eventually stops pixel input.
//
// The external memory, the host link and the sensor/mirror hardware are
// outside this core; their streams are ports. n (cfg_nsub <= MAX_NSUB) and
// p (cfg_pside <= PIX_SIDE) are run-time settings, the sizes of the
// hardware are parameters. As in the design this follows, pixels are
// acquired on their own clock (pix_clk, the camera or host-link rate) and
// cross into the core clock through a small dual-clock FIFO (async_fifo);
// pix_valid/pix_ready/pix_data belong to pix_clk. In the same way the
// external-memory port runs on the memory controller's clock (mem_clk):
// commands cross through a 4-deep async_fifo and read data through one as
// deep as the matrix FIFO. mem_sm never has more reads in flight than the
// matrix FIFO has free entries, so the read-data crossing cannot overflow
// even though the memory cannot be stalled (a read's round trip through
// both crossings and the memory outlasts the two-flop report of a freed
// slot; an assertion watches this). The WPU's slope computation,
// the reconstructor and the memory state machine run on clk; the original
// gives the reconstructor a clock of its own as well.
module sparc_top
  import sparc_pkg::*;
#(
  parameter int unsigned PIX_SIDE   = 4,
  parameter int unsigned MAX_NSUB   = 50,
  parameter int unsigned LANES      = 64,
  parameter int unsigned ADDR_W     = 26,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned PIX_FIFO_DEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          pix_clk,
  input  logic                          pix_rst_n,
  input  logic                          mem_clk,
  input  logic                          mem_rst_n,
  // configuration
  input  logic [$clog2(MAX_NSUB+1)-1:0] cfg_nsub,
  input  logic [$clog2(PIX_SIDE+1)-1:0] cfg_pside,
  input  logic                          cfg_lin_en,
  input  logic                          cfg_off_en,
  input  logic [GAIN_W-1:0]             cfg_gain,
  input  logic [GAIN_W-1:0]             cfg_leak,
  input  logic [5:0]                    cfg_res_shift,
  input  act_t                          cfg_act_min,
  input  act_t                          cfg_act_max,
  input  logic                          phase_clear,
  // slope lookup tables
  input  logic                          lut_we,
  input  logic [1:0]                    lut_sel,
  input  logic [11:0]                   lut_addr,
  input  slope_t                        lut_wdata,
  // wavefront-sensor pixels, on pix_clk
  input  logic                          pix_valid,
  output logic                          pix_ready,
  input  pix_t                          pix_data,
  // reconstruction matrix from the host
  input  logic                          mat_valid,
  output logic                          mat_ready,
  input  logic [LANES*COEF_W-1:0]       mat_data,
  input  logic                          mat_last,
  output logic                          matrix_ready,
  // external memory, on mem_clk
  output logic                          mem_cmd_valid,
  input  logic                          mem_cmd_ready,
  output logic                          mem_cmd_we,
  output logic [ADDR_W-1:0]             mem_cmd_addr,
  output logic [LANES*COEF_W-1:0]       mem_wdata,
  input  logic                          mem_rd_valid,
  input  logic [LANES*COEF_W-1:0]       mem_rd_data,
  // actuator values
  output logic                          act_valid,
  input  logic                          act_ready,
  output act_t                          act_data,
  output logic                          act_last,
  output logic [11:0]                   act_index,
  output logic                          frame_done
);
  localparam int unsigned MAX_WORDS = ((MAX_NSUB + 1) * (MAX_NSUB + 1) + LANES - 1) / LANES;
  localparam int unsigned NW = $clog2(MAX_NSUB+1);

  // pixel clock -> core clock
  logic pix_c_valid, pix_c_ready;
  pix_t pix_c_data;

  async_fifo #(.WIDTH(PIX_W), .DEPTH(PIX_FIFO_DEPTH)) u_pix_cdc (
    .wclk(pix_clk), .wrst_n(pix_rst_n), .wvalid(pix_valid), .wready(pix_ready), .wdata(pix_data),
    .rclk(clk), .rrst_n(rst_n), .rvalid(pix_c_valid), .rready(pix_c_ready), .rdata(pix_c_data));

  // WPU -> reconstructor
  logic        slope_valid, slope_ready;
  slope_pair_t slope_data;

  wpu #(.PIX_SIDE(PIX_SIDE), .MAX_NSUB(MAX_NSUB)) u_wpu (
    .clk, .rst_n, .cfg_nsub, .cfg_pside, .cfg_lin_en, .cfg_off_en,
    .lut_we, .lut_sel, .lut_addr, .lut_wdata,
    .pix_valid(pix_c_valid), .pix_ready(pix_c_ready), .pix_data(pix_c_data),
    .slope_valid, .slope_ready, .slope_data);

  // memory state machine <-> memory-clock crossing
  typedef struct packed {
    logic                    we;
    logic [ADDR_W-1:0]       addr;
    logic [LANES*COEF_W-1:0] wdata;
  } mem_cmd_t;
  mem_cmd_t                c_cmd, m_cmd;
  logic                    c_cmd_valid, c_cmd_ready, c_rd_valid, rd_cdc_ready;
  logic [LANES*COEF_W-1:0] c_rd_data;

  // reconstructor <-> memory state machine
  logic                    req_valid, req_ready;
  logic [NW-1:0]           req_row;
  part_e                   req_part;
  logic                    coef_valid, coef_ready;
  logic [LANES*COEF_W-1:0] coef_data;

  mem_sm #(.LANES(LANES), .ADDR_W(ADDR_W), .FIFO_DEPTH(FIFO_DEPTH), .MAX_NSUB(MAX_NSUB)) u_mem (
    .clk, .rst_n, .cfg_nsub,
    .mat_valid, .mat_ready, .mat_data, .mat_last, .matrix_ready,
    .req_valid, .req_ready, .req_row, .req_part,
    .coef_valid, .coef_ready, .coef_data,
    .mem_cmd_valid(c_cmd_valid), .mem_cmd_ready(c_cmd_ready), .mem_cmd_we(c_cmd.we),
    .mem_cmd_addr(c_cmd.addr), .mem_wdata(c_cmd.wdata),
    .mem_rd_valid(c_rd_valid), .mem_rd_data(c_rd_data));

  // core clock <-> memory clock
  async_fifo #(.WIDTH($bits(mem_cmd_t)), .DEPTH(4)) u_cmd_cdc (
    .wclk(clk), .wrst_n(rst_n), .wvalid(c_cmd_valid), .wready(c_cmd_ready), .wdata(c_cmd),
    .rclk(mem_clk), .rrst_n(mem_rst_n), .rvalid(mem_cmd_valid), .rready(mem_cmd_ready), .rdata(m_cmd));

  assign mem_cmd_we   = m_cmd.we;
  assign mem_cmd_addr = m_cmd.addr;
  assign mem_wdata    = m_cmd.wdata;

  async_fifo #(.WIDTH(LANES*COEF_W), .DEPTH(FIFO_DEPTH)) u_rd_cdc (
    .wclk(mem_clk), .wrst_n(mem_rst_n), .wvalid(mem_rd_valid), .wready(rd_cdc_ready), .wdata(mem_rd_data),
    .rclk(clk), .rrst_n(rst_n), .rvalid(c_rd_valid), .rready(1'b1), .rdata(c_rd_data));

  a_rd_cdc_no_overflow: assert property (@(posedge mem_clk) disable iff (!mem_rst_n)
    mem_rd_valid |-> rd_cdc_ready);

  // reconstructor -> integrator
  logic                         res_valid, res_ready, res_last;
  logic [$clog2(MAX_WORDS)-1:0] res_word;
  logic [LANES*ACC_W-1:0]       res_data;

  ao_reconstructor #(.LANES(LANES), .MAX_NSUB(MAX_NSUB)) u_rec (
    .clk, .rst_n, .cfg_nsub,
    .slope_valid, .slope_ready, .slope_data,
    .req_valid, .req_ready, .req_row, .req_part,
    .coef_valid, .coef_ready, .coef_data,
    .res_valid, .res_ready, .res_word, .res_data, .res_last);

  // integrator -> actuator conditioning
  logic                     ph_valid, ph_ready, ph_last_unused;
  logic [LANES*PHASE_W-1:0] ph_data;

  phase_integrator #(.LANES(LANES), .MAX_NSUB(MAX_NSUB)) u_int (
    .clk, .rst_n, .cfg_gain, .cfg_leak, .cfg_res_shift, .phase_clear,
    .res_valid, .res_ready, .res_word, .res_data, .res_last,
    .ph_valid, .ph_ready, .ph_data, .ph_last(ph_last_unused));

  act_cond #(.LANES(LANES), .MAX_NSUB(MAX_NSUB)) u_act (
    .clk, .rst_n, .cfg_nsub, .cfg_act_min, .cfg_act_max,
    .ph_valid, .ph_ready, .ph_data,
    .act_valid, .act_ready, .act_data, .act_last, .act_index);

  assign frame_done = act_valid && act_ready && act_last;

endmodule

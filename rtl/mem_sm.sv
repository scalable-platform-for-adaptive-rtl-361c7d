// mem_sm: memory state machine of SPARC.
//
// Owns the external memory that holds the reconstruction matrix. It
//   1. takes the matrix from the host as a stream of LANES-coefficient beats
//      and writes it to consecutive memory words from address 0; after the
//      beat marked mat_last it raises matrix_ready (a new load clears it);
//   2. on a request from the AO reconstructor for (row r, part X or Y),
//      reads that part's sub-matrix and delivers it, in order, through the
//      matrix FIFO on the coef stream.
// Memory layout (this implementation's choice; the host prepares it): the
// (n+1)^2 x 2n^2 matrix is stored column by column, one column per slope,
// each column padded to S = ceil((n+1)^2 / LANES) words; lane l of word w of
// column c is element (w*LANES + l, c). Columns 0..n^2-1 belong to the x
// slopes, n^2..2n^2-1 to the y slopes, subaperture k = r*n + j owning column
// k (x) and n^2 + k (y). The X sub-matrix of row r is then one contiguous
// block of n*S words starting at r*n*S, the Y sub-matrix one starting at
// (n^2 + r*n)*S.
// Reads are issued only while the FIFO has room for them and for all reads
// still outstanding, so the FIFO never overflows whatever the memory's
// latency; the memory may return data any number of cycles later, in order.
//
// Memory port: a generic command interface (valid/ready, write enable,
// word address, write data) and an in-order read-data return, similar to
// what FPGA DDR controllers offer. The design only says the interface is
// FIFO-based and adapts to the memory's frequency and width; the rest is
// this implementation's own.
module mem_sm
  import sparc_pkg::*;
#(
  parameter int unsigned LANES      = 64,
  parameter int unsigned ADDR_W     = 26,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned MAX_NSUB   = 50
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(MAX_NSUB+1)-1:0] cfg_nsub,
  // matrix from host
  input  logic                          mat_valid,
  output logic                          mat_ready,
  input  logic [LANES*COEF_W-1:0]       mat_data,
  input  logic                          mat_last,
  output logic                          matrix_ready,
  // sub-matrix requests from the reconstructor
  input  logic                          req_valid,
  output logic                          req_ready,
  input  logic [$clog2(MAX_NSUB+1)-1:0] req_row,
  input  part_e                         req_part,
  // sub-matrix data to the reconstructor
  output logic                          coef_valid,
  input  logic                          coef_ready,
  output logic [LANES*COEF_W-1:0]       coef_data,
  // external memory
  output logic                          mem_cmd_valid,
  input  logic                          mem_cmd_ready,
  output logic                          mem_cmd_we,
  output logic [ADDR_W-1:0]             mem_cmd_addr,
  output logic [LANES*COEF_W-1:0]       mem_wdata,
  input  logic                          mem_rd_valid,
  input  logic [LANES*COEF_W-1:0]       mem_rd_data
);
  localparam int unsigned DW = LANES * COEF_W;
  localparam int unsigned CW = $clog2(FIFO_DEPTH+1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RD_SETUP, S_READ} state_e;
  state_e state;

  // words per column: S = ceil((n+1)^2 / LANES)
  logic [ADDR_W-1:0] stride;
  always_ff @(posedge clk) stride <= ADDR_W'(((32'(cfg_nsub) + 1) * (32'(cfg_nsub) + 1) + LANES - 1) / LANES);

  logic [ADDR_W-1:0] wr_addr, rd_addr, rd_left;
  logic [ADDR_W-1:0] col0;       // first column of the requested part
  logic [CW-1:0]     outstanding, fifo_cnt;
  logic              room, rd_issue, wr_issue, fifo_in_ready;

  assign room      = (32'(fifo_cnt) + 32'(outstanding)) < FIFO_DEPTH;
  assign req_ready = (state == S_IDLE) && matrix_ready;
  assign mat_ready = ((state == S_IDLE && !(req_valid && matrix_ready)) || state == S_LOAD)
                     && mem_cmd_ready;
  assign wr_issue  = mat_valid && mat_ready;
  assign rd_issue  = (state == S_READ) && room && mem_cmd_ready;

  always_comb begin
    mem_cmd_valid = wr_issue || ((state == S_READ) && room);
    mem_cmd_we    = (state != S_READ);
    mem_cmd_addr  = (state == S_READ) ? rd_addr : wr_addr;
    mem_wdata     = mat_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      matrix_ready <= 1'b0;
      wr_addr      <= '0;
      rd_addr      <= '0;
      rd_left      <= '0;
      col0         <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (req_valid && matrix_ready) begin
            col0  <= (req_part == PART_X)
                     ? ADDR_W'(32'(req_row) * 32'(cfg_nsub))
                     : ADDR_W'(32'(cfg_nsub) * 32'(cfg_nsub) + 32'(req_row) * 32'(cfg_nsub));
            state <= S_RD_SETUP;
          end else if (wr_issue) begin
            matrix_ready <= 1'b0;
            wr_addr      <= mat_last ? '0 : wr_addr + 1'b1;
            if (mat_last) matrix_ready <= 1'b1;
            else          state        <= S_LOAD;
          end
        end
        S_LOAD: if (wr_issue) begin
          wr_addr <= mat_last ? '0 : wr_addr + 1'b1;
          if (mat_last) begin
            matrix_ready <= 1'b1;
            state        <= S_IDLE;
          end
        end
        S_RD_SETUP: begin
          rd_addr <= ADDR_W'(col0 * stride);
          rd_left <= ADDR_W'(32'(cfg_nsub) * 32'(stride));
          state   <= S_READ;
        end
        S_READ: if (rd_issue) begin
          rd_addr <= rd_addr + 1'b1;
          rd_left <= rd_left - 1'b1;
          if (rd_left == ADDR_W'(1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else        outstanding <= outstanding + CW'(rd_issue) - CW'(mem_rd_valid);
  end

  sync_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_matrix_fifo (
    .clk, .rst_n,
    .in_valid(mem_rd_valid), .in_ready(fifo_in_ready), .in_data(mem_rd_data),
    .out_valid(coef_valid), .out_ready(coef_ready), .out_data(coef_data),
    .count(fifo_cnt));

  a_fifo_never_overflows: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_valid |-> fifo_in_ready);
  a_no_unrequested_data: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_valid |-> outstanding != '0);

endmodule

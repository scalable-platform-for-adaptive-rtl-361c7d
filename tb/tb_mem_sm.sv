// tb_mem_sm: loads a random reconstruction matrix (n = 5, 4 lanes) through
// the host port into a memory model with random latency, checks the ready
// flag, then requests the X and Y sub-matrices of every row of subapertures
// in a random order and compares each delivered word with the expected
// column-major block. The consumer stalls at times, so the FIFO fills and
// reads must be held back.
module tb_mem_sm;
  import sparc_pkg::*;
  localparam int L = 4, AW = 16, FD = 8, MAXN = 6, N = 5;
  localparam int S = ((N + 1) * (N + 1) + L - 1) / L;    // words per column
  localparam int WORDS = 2 * N * N * S;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MAXN+1)-1:0] cfg_nsub, req_row;
  logic mat_valid, mat_ready, mat_last, matrix_ready, req_valid, req_ready;
  logic coef_valid, coef_ready, mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_rd_valid;
  logic [L*16-1:0] mat_data, coef_data, mem_wdata, mem_rd_data;
  logic [AW-1:0] mem_cmd_addr;
  part_e req_part;
  int checks = 0, failures = 0, fifo_full_cycles = 0;
  logic [L*16-1:0] image [WORDS];
  logic [L*16-1:0] expq [$];
  bit cons_stall = 0;

  mem_sm #(.LANES(L), .ADDR_W(AW), .FIFO_DEPTH(FD), .MAX_NSUB(MAXN)) dut (.*);
  ddr_model #(.LANES(L), .ADDR_W(AW), .DEPTH(4096)) u_ddr (
    .clk, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready), .cmd_we(mem_cmd_we),
    .cmd_addr(mem_cmd_addr), .wdata(mem_wdata), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("timeout: state %0d expq %0d matrix_ready %0d out %0d cnt %0d left %0d reads %0d q %0d", dut.state, expq.size(), matrix_ready, dut.outstanding, dut.fifo_cnt, dut.rd_left, u_ddr.reads, u_ddr.q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    coef_ready = !cons_stall && ($urandom % 100 < 70);
    if (rst_n && coef_valid && coef_ready) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected word"); end
      else begin
        logic [L*16-1:0] e;
        e = expq.pop_front();
        if (coef_data !== e) begin failures++; $display("word %h exp %h", coef_data, e); end
      end
    end
    if (rst_n && dut.fifo_cnt == FD) fifo_full_cycles++;
  end

  initial begin
    int order [2*N];
    cfg_nsub = N; mat_valid = 0; mat_last = 0; mat_data = 0; req_valid = 0; req_row = 0; req_part = PART_X;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (matrix_ready) begin failures++; $display("ready before load"); end
    for (int i = 0; i < WORDS; i++) begin
      for (int l = 0; l < L; l++) image[i][l*16 +: 16] = 16'($urandom);
      mat_valid = 1; mat_data = image[i]; mat_last = (i == WORDS - 1);
      while (!mat_ready) @(negedge clk);
      @(negedge clk);
      if (i < WORDS - 1 && matrix_ready) begin failures++; $display("ready during load"); end
    end
    mat_valid = 0; mat_last = 0;
    @(negedge clk);
    checks++;
    if (!matrix_ready) begin failures++; $display("ready flag did not go high"); end
    for (int i = 0; i < 2*N; i++) order[i] = i;
    order.shuffle();
    for (int q = 0; q < 2*N; q++) begin
      int r, col0;
      part_e pt;
      r = order[q] % N; pt = (order[q] >= N) ? PART_Y : PART_X;
      col0 = (pt == PART_X) ? r * N : N * N + r * N;
      for (int w = 0; w < N * S; w++) expq.push_back(image[col0 * S + w]);
      req_valid = 1; req_row = $bits(req_row)'(r); req_part = pt;
      while (!req_ready) @(negedge clk);
      @(negedge clk);
      req_valid = 0;
      if (q == 0) fork begin cons_stall = 1; repeat (200) @(negedge clk); cons_stall = 0; end join_none
    end
    while (expq.size() != 0) @(negedge clk);
    repeat (50) @(negedge clk);
    checks++;
    if (fifo_full_cycles == 0) begin failures++; $display("FIFO never filled"); end
    checks++;
    if (u_ddr.reads != 2 * N * N * S) begin failures++; $display("reads %0d exp %0d", u_ddr.reads, 2*N*N*S); end
    $display("fifo full cycles %0d, memory busy cycles %0d", fifo_full_cycles, u_ddr.busy_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

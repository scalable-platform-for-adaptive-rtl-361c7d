// tb_pixel_acq: streams frames of random pixels (n = 5, p = 4, then n = 3,
// p = 2) into pixel_acq and reads every subaperture back, checking that all
// p*p pixels of a subaperture come out together in the right banks, that
// unused banks read zero, and that the input stalls while both row buffers
// are full.
module tb_pixel_acq;
  import sparc_pkg::*;
  localparam int P = 4, MAXN = 8;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MAXN+1)-1:0] cfg_nsub;
  logic [$clog2(P+1)-1:0]    cfg_pside;
  logic pix_valid, pix_ready, row_avail, rd_en, row_release;
  pix_t pix_data;
  logic [$clog2(MAXN)-1:0] rd_addr;
  pix_t rd_pix [P*P];
  int checks = 0, failures = 0, stalls = 0;
  int unsigned img [64][64];

  pixel_acq #(.PIX_SIDE(P), .MAX_NSUB(MAXN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pixel source: pushes a whole frame, counts cycles where it is stalled
  task automatic send_frame(input int n, input int p);
    for (int y = 0; y < n*p; y++)
      for (int x = 0; x < n*p; x++) begin
        img[y][x] = $urandom & 16'hffff;
        pix_valid = 1'b1;
        pix_data  = pix_t'(img[y][x]);
        while (!pix_ready) begin stalls++; @(negedge clk); end
        @(negedge clk);
      end
    pix_valid = 1'b0;
  endtask

  task automatic read_rows(input int n, input int p);
    for (int r = 0; r < n; r++) begin
      // let the writer fill the other buffer before draining the first
      repeat ((r == 0) ? 3 * n * p * p : 0) @(negedge clk);
      while (!row_avail) @(negedge clk);
      for (int j = 0; j < n; j++) begin
        rd_en = 1'b1; rd_addr = $bits(rd_addr)'(j);
        @(negedge clk);
        rd_en = 1'b0;
        for (int b = 0; b < P*P; b++) begin
          int by, bx;
          int unsigned exp;
          by = b / P; bx = b % P;
          exp = (by < p && bx < p) ? img[r*p + by][j*p + bx] : 0;
          checks++;
          if (rd_pix[b] != pix_t'(exp)) begin
            failures++;
            $display("row %0d sub %0d bank %0d: got %h exp %h", r, j, b, rd_pix[b], exp);
          end
        end
      end
      row_release = 1'b1;
      @(negedge clk);
      row_release = 1'b0;
    end
  endtask

  initial begin
    pix_valid = 0; pix_data = 0; rd_en = 0; rd_addr = 0; row_release = 0;
    cfg_nsub = 5; cfg_pside = 4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      send_frame(5, 4);
      read_rows(5, 4);
    join
    checks++;
    if (stalls == 0) begin failures++; $display("input never stalled"); end
    repeat (5) @(negedge clk);
    cfg_nsub = 3; cfg_pside = 2;
    fork
      send_frame(3, 2);
      read_rows(3, 2);
    join
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

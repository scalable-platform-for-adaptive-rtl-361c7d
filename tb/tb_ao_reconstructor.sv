// tb_ao_reconstructor: plays the WPU (slope pairs) and the memory state
// machine (sub-matrix words on request) around the reconstructor, 4 lanes.
// Checks that requests come as (row r, X) then (row r, Y) for every row, that
// the drained residuals equal the matrix-vector product computed here, that
// the accumulators restart from zero on the next frame, and that with the
// memory never starving it the MAC array takes one word per clock.
module tb_ao_reconstructor;
  import sparc_pkg::*;
  localparam int L = 4, MAXN = 6;
  localparam int MAXW = ((MAXN + 1) * (MAXN + 1) + L - 1) / L;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MAXN+1)-1:0] cfg_nsub, req_row;
  logic slope_valid, slope_ready, req_valid, req_ready, coef_valid, coef_ready;
  logic res_valid, res_ready, res_last;
  slope_pair_t slope_data;
  part_e req_part;
  logic [L*16-1:0] coef_data;
  logic [$clog2(MAXW)-1:0] res_word;
  logic [L*ACC_W-1:0] res_data;
  int checks = 0, failures = 0;
  int mat [64][72];        // [actuator][column]
  int slopes [72];         // column order: x slopes then y slopes
  longint beats = 0, mac_cycles = 0;

  ao_reconstructor #(.LANES(L), .MAX_NSUB(MAXN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (coef_valid && coef_ready) beats++;
    if (coef_ready) mac_cycles++;   // coef_ready is high exactly in the MAC state
  end

  task automatic run_frame(input int n, input bit gaps);
    int S, exp_row;
    part_e exp_part;
    S = ((n + 1) * (n + 1) + L - 1) / L;
    cfg_nsub = $bits(cfg_nsub)'(n);
    for (int k = 0; k < 64; k++)
      for (int c = 0; c < 72; c++)
        mat[k][c] = (k < (n+1)*(n+1) && c < 2*n*n) ? int'($urandom % 65536) - 32768 : 0;
    for (int c = 0; c < 2*n*n; c++) slopes[c] = int'($urandom % 65536) - 32768;
    repeat (2) @(negedge clk);
    for (int r = 0; r < n; r++) begin
      // slopes of row r
      for (int j = 0; j < n; j++) begin
        slope_valid = 1;
        slope_data.sx = slope_t'(slopes[r*n + j]);
        slope_data.sy = slope_t'(slopes[n*n + r*n + j]);
        while (!slope_ready) @(negedge clk);
        @(negedge clk);
        slope_valid = 0;
        if (gaps) repeat ($urandom % 3) @(negedge clk);
      end
      // two sub-matrix requests
      for (int pt = 0; pt < 2; pt++) begin
        int col0;
        while (!req_valid) @(negedge clk);
        checks++;
        if (int'(req_row) != r || int'(req_part) != pt) begin
          failures++; $display("request (%0d,%0d) exp (%0d,%0d)", req_row, req_part, r, pt);
        end
        req_ready = 1;
        @(negedge clk);
        req_ready = 0;
        col0 = (pt == 0) ? r*n : n*n + r*n;
        for (int c = col0; c < col0 + n; c++)
          for (int w = 0; w < S; w++) begin
            coef_valid = 1;
            for (int l = 0; l < L; l++) coef_data[l*16 +: 16] = 16'(mat[w*L + l][c]);
            while (!coef_ready) @(negedge clk);
            @(negedge clk);
            coef_valid = 0;
            if (gaps && ($urandom % 4 == 0)) @(negedge clk);
          end
      end
    end
    // residuals
    for (int w = 0; w < S; w++) begin
      res_ready = gaps ? ($urandom % 2 == 0) : 1'b1;
      while (!(res_valid && res_ready)) begin
        @(negedge clk);
        res_ready = gaps ? ($urandom % 2 == 0) : 1'b1;
      end
      checks += 2;
      if (int'(res_word) != w || res_last != (w == S - 1)) begin failures++; $display("word index %0d exp %0d", res_word, w); end
      for (int l = 0; l < L; l++) begin
        longint e;
        e = 0;
        for (int c = 0; c < 2*n*n; c++) e += longint'(mat[w*L + l][c]) * longint'(slopes[c]);
        checks++;
        if ($signed(res_data[l*ACC_W +: ACC_W]) != e) begin
          failures++; $display("actuator %0d: got %0d exp %0d", w*L + l, $signed(res_data[l*ACC_W +: ACC_W]), e);
        end
      end
      @(negedge clk);
      res_ready = 0;
    end
  endtask

  initial begin
    slope_valid = 0; slope_data = '0; req_ready = 0; coef_valid = 0; coef_data = 0; res_ready = 0;
    cfg_nsub = 5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (MAXW + 2) @(negedge clk);
    run_frame(5, 1);
    run_frame(3, 1);
    beats = 0; mac_cycles = 0;
    run_frame(6, 0);
    checks++;
    if (beats != 2 * 6 * 6 * 13 || mac_cycles != beats) begin
      failures++; $display("beats %0d, cycles in MAC %0d, expected %0d each", beats, mac_cycles, 2*6*6*13);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sparc_full: one complete closed-loop operation of the SPARC core at its
// default sizes and at the largest geometry it is built for: 50 x 50
// subapertures of 4 x 4 pixels (a 200 x 200 pixel frame, 5000 slopes,
// 2601 actuators, a 2601 x 5000 reconstruction matrix of 16-bit
// coefficients). The host model loads the matrix into the memory model,
// streams two frames and checks all 2601 actuator values of each against
// the reference computed here, in the simulation set-up of the design
// (no slope corrections, residual added to the previous phases). It
// reports the clocks from first pixel to last actuator and the matrix words
// read per frame (must be 2*n*n*S = 205000).
module tb_sparc_full;
  import sparc_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 64, DDR_DEPTH = 262144;
  localparam int N = 50, P = 4;

  logic clk = 0, rst_n = 1;   // pulled low at 1 ns so the asynchronous resets see an edge
  logic pix_clk = 0, pix_rst_n;
  assign pix_rst_n = rst_n;
  logic mem_clk = 0, mem_rst_n;
  assign mem_rst_n = rst_n;
  logic [5:0] cfg_nsub;
  logic [2:0] cfg_pside;
  logic cfg_lin_en, cfg_off_en, phase_clear, lut_we;
  logic [15:0] cfg_gain, cfg_leak;
  logic [5:0] cfg_res_shift;
  act_t cfg_act_min, cfg_act_max;
  logic [1:0] lut_sel;
  logic [11:0] lut_addr;
  slope_t lut_wdata;
  logic pix_valid, pix_ready;
  pix_t pix_data;
  logic mat_valid, mat_ready, mat_last, matrix_ready;
  logic [L*16-1:0] mat_data, mem_wdata, mem_rd_data;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_rd_valid;
  logic [25:0] mem_cmd_addr;
  logic act_valid, act_ready, act_last, frame_done;
  act_t act_data;
  logic [11:0] act_index;

  sparc_top dut (.*);
  ddr_model #(.LANES(L), .ADDR_W(26), .DEPTH(DDR_DEPTH)) u_ddr (
    .clk(mem_clk), .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready), .cmd_we(mem_cmd_we),
    .cmd_addr(mem_cmd_addr), .wdata(mem_wdata), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));

  always #5 clk = ~clk;
  always #4 pix_clk = ~pix_clk;   // pixels arrive on a faster clock of their own
  always #3 mem_clk = ~mem_clk;   // and the memory runs on another

  int checks = 0, failures = 0;
  // mechanism counters
  int n_pix_stall = 0, n_fifo_full = 0, n_mem_busy = 0, n_act_stall = 0, n_clamp = 0;
  int n_mode_switch = 0, n_reload = 0, n_phase_clear = 0;

  int R [];            // R[a * ncols + c]
  int lin [1024];
  int offx [2500], offy [2500];
  longint phi [];
  int expq [$];
  int n_cur, ncols;
  longint cyc = 0, t_first_pix = -1;
  bit act_hold = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: expq %0d", expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    act_ready <= !act_hold && (($urandom % 100) < 85);
  end

  always @(negedge clk) if (rst_n) begin
    if (pix_valid && !pix_ready) n_pix_stall++;
    if (dut.coef_ready && !dut.coef_valid) n_fifo_full++;   // MAC array waiting for memory
    if (!mem_cmd_ready) n_mem_busy++;
    if (act_valid && !act_ready) n_act_stall++;
    if (act_valid && act_ready) begin
      int e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected actuator value"); end
      else begin
        e = expq.pop_front();
        if (int'(act_data) != e) begin
          failures++;
          if (failures < 10) $display("actuator %0d: got %0d exp %0d", act_index, act_data, e);
        end
      end
    end
  end

  task automatic host_load_matrix(input int n, input int cmax);
    int S, na;
    na = (n + 1) * (n + 1);
    ncols = 2 * n * n;
    S = (na + L - 1) / L;
    R = new[na * ncols];
    foreach (R[i]) R[i] = int'($urandom % (2 * cmax + 1)) - cmax;
    for (int c = 0; c < ncols; c++)
      for (int w = 0; w < S; w++) begin
        logic [L*16-1:0] d;
        for (int l = 0; l < L; l++) d[l*16 +: 16] = (w*L + l < na) ? 16'(R[(w*L + l) * ncols + c]) : 16'h0;
        mat_valid = 1; mat_data = d; mat_last = (c == ncols - 1) && (w == S - 1);
        while (!mat_ready) @(negedge clk);
        @(negedge clk);
      end
    mat_valid = 0; mat_last = 0;
    @(negedge clk);
    checks++;
    if (!matrix_ready) begin failures++; $display("matrix_ready not set after load"); end
  endtask

  task automatic load_tables();
    for (int i = 0; i < 1024; i++) begin
      lin[i] = int'($urandom % 301) - 150;
      lut_we = 1; lut_sel = 0; lut_addr = 12'(i); lut_wdata = slope_t'(lin[i]); @(negedge clk);
    end
    for (int i = 0; i < 2500; i++) begin
      offx[i] = int'($urandom % 1001) - 500;
      lut_we = 1; lut_sel = 1; lut_addr = 12'(i); lut_wdata = slope_t'(offx[i]); @(negedge clk);
      offy[i] = int'($urandom % 1001) - 500;
      lut_we = 1; lut_sel = 2; lut_addr = 12'(i); lut_wdata = slope_t'(offy[i]); @(negedge clk);
    end
    lut_we = 0;
  endtask

  // Generates one frame, computes the expected actuators, streams the pixels.
  task automatic frame(input int n, input int p, input int reads_per_frame);
    int unsigned img [][];
    int s [];
    int na, base_reads;
    longint t0;
    na = (n + 1) * (n + 1);
    img = new[n*p];
    foreach (img[y]) img[y] = new[n*p];
    s = new[2*n*n];
    // random spot per subaperture on a dim background, a few dark ones
    for (int r = 0; r < n; r++)
      for (int j = 0; j < n; j++) begin
        int sx, sy, amp;
        sx = $urandom % p; sy = $urandom % p; amp = ($urandom % 9 == 0) ? 0 : 2000 + ($urandom % 30000);
        for (int y = 0; y < p; y++)
          for (int x = 0; x < p; x++)
            img[r*p + y][j*p + x] = (amp == 0) ? 0 :
              ((x == sx && y == sy) ? amp : (amp / (4 + 4 * ((x-sx)*(x-sx) + (y-sy)*(y-sy))))) + ($urandom % 50);
      end
    // reference
    for (int r = 0; r < n; r++)
      for (int j = 0; j < n; j++) begin
        int unsigned sub [16];
        int k, gx, gy;
        k = r*n + j;
        for (int b = 0; b < 16; b++) sub[b] = ((b/4) < p && (b%4) < p) ? img[r*p + b/4][j*p + b%4] : 0;
        gx = cog_ref(sub, 4, p, 1'b0);
        gy = cog_ref(sub, 4, p, 1'b1);
        s[k]       = linoff_ref(gx, lin[lin_index(gx)], offx[k], cfg_lin_en, cfg_off_en);
        s[n*n + k] = linoff_ref(gy, lin[lin_index(gy)], offy[k], cfg_lin_en, cfg_off_en);
      end
    for (int a = 0; a < na; a++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < 2*n*n; c++) acc += longint'(R[a * 2*n*n + c]) * longint'(s[c]);
      phi[a] = integ_ref(phi[a], acc, int'(cfg_res_shift), int'(cfg_gain), int'(cfg_leak));
      expq.push_back(clamp_ref(phi[a], int'(cfg_act_min), int'(cfg_act_max)));
      if (phi[a] < longint'(cfg_act_min) || phi[a] > longint'(cfg_act_max)) n_clamp++;
    end
    base_reads = u_ddr.reads;
    t0 = -1;
    @(negedge pix_clk);
    for (int y = 0; y < n*p; y++)
      for (int x = 0; x < n*p; x++) begin
        pix_valid = 1; pix_data = pix_t'(img[y][x]);
        while (!pix_ready) @(negedge pix_clk);
        if (t0 < 0) t0 = cyc;
        @(negedge pix_clk);
      end
    pix_valid = 0;
    while (expq.size() != 0) @(negedge clk);
    $display("frame n=%0d p=%0d: %0d clocks from first pixel to last actuator, %0d matrix words read",
             n, p, cyc - t0, u_ddr.reads - base_reads);
    checks++;
    if (u_ddr.reads - base_reads != reads_per_frame) begin
      failures++; $display("matrix words read %0d, expected %0d", u_ddr.reads - base_reads, reads_per_frame);
    end
  endtask

  function automatic int words_per_frame(input int n);
    return 2 * n * n * (((n + 1) * (n + 1) + L - 1) / L);
  endfunction

  initial begin
    cfg_nsub = N; cfg_pside = P; cfg_lin_en = 0; cfg_off_en = 0; phase_clear = 0;
    cfg_gain = 16'h8000; cfg_leak = 0; cfg_res_shift = 20;
    cfg_act_min = -32768; cfg_act_max = 32767;
    lut_we = 0; lut_sel = 0; lut_addr = 0; lut_wdata = 0;
    pix_valid = 0; pix_data = 0; mat_valid = 0; mat_last = 0; mat_data = 0; act_ready = 0;
    phi = new[51*51];
    foreach (phi[i]) phi[i] = 0;
    for (int i = 0; i < 1024; i++) lin[i] = 0;
    for (int i = 0; i < 2500; i++) begin offx[i] = 0; offy[i] = 0; end
    #1 rst_n = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (100) @(negedge clk);
    host_load_matrix(N, 30000);
    frame(N, P, words_per_frame(N));
    frame(N, P, words_per_frame(N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

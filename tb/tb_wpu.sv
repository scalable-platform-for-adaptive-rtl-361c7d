// tb_wpu: sends whole wavefront-sensor frames into the WPU and compares the
// slope stream with a reference (CoG, then linearization and offset):
//   frame 1: n = 12, p = 4, corrections off, slope consumer stalled for a
//            while so that the pixel input must stall too;
//   frame 2: n = 11, p = 2 (the iRobo-AO geometry), corrections on;
//   frame 3: n = 11, p = 2, corrections on, random consumer stalls.
module tb_wpu;
  import sparc_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 4, MAXN = 50;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MAXN+1)-1:0] cfg_nsub;
  logic [$clog2(P+1)-1:0]    cfg_pside;
  logic cfg_lin_en, cfg_off_en, lut_we, pix_valid, pix_ready, slope_valid, slope_ready;
  logic [1:0] lut_sel;
  logic [11:0] lut_addr;
  slope_t lut_wdata;
  pix_t pix_data;
  slope_pair_t slope_data;
  int checks = 0, failures = 0, pix_stalls = 0;
  int lin [1024];
  int offx [2500], offy [2500];
  int exp_x [$], exp_y [$];
  int unsigned img [200][200];
  bit stall_mode = 0, rand_stall = 0;

  wpu #(.PIX_SIDE(P), .MAX_NSUB(MAXN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer
  always @(negedge clk) begin
    slope_ready = !stall_mode && (!rand_stall || ($urandom % 100 < 40));
    if (rst_n && slope_valid && slope_ready) begin
      int ex, ey;
      checks++;
      if (exp_x.size() == 0) begin failures++; $display("extra slope"); end
      else begin
        ex = exp_x.pop_front(); ey = exp_y.pop_front();
        if (int'(slope_data.sx) != ex || int'(slope_data.sy) != ey) begin
          failures++; $display("slope got (%0d,%0d) exp (%0d,%0d)", slope_data.sx, slope_data.sy, ex, ey);
        end
      end
    end
  end

  task automatic wr(input int sel, input int addr, input int val);
    lut_we = 1; lut_sel = 2'(sel); lut_addr = 12'(addr); lut_wdata = slope_t'(val);
    @(negedge clk);
    lut_we = 0;
  endtask

  task automatic frame(input int n, input int p, input bit corr);
    int unsigned sub [16];
    cfg_nsub = $bits(cfg_nsub)'(n); cfg_pside = $bits(cfg_pside)'(p);
    cfg_lin_en = corr; cfg_off_en = corr;
    for (int y = 0; y < n*p; y++)
      for (int x = 0; x < n*p; x++) img[y][x] = ($urandom % 7 == 0) ? 0 : ($urandom & 16'h0fff);
    for (int r = 0; r < n; r++)
      for (int j = 0; j < n; j++) begin
        int sx, sy;
        for (int b = 0; b < 16; b++) sub[b] = ((b / P) < p && (b % P) < p) ? img[r*p + b/P][j*p + b%P] : 0;
        sx = cog_ref(sub, P, p, 1'b0);
        sy = cog_ref(sub, P, p, 1'b1);
        exp_x.push_back(linoff_ref(sx, lin[lin_index(sx)], offx[r*n+j], corr, corr));
        exp_y.push_back(linoff_ref(sy, lin[lin_index(sy)], offy[r*n+j], corr, corr));
      end
    for (int y = 0; y < n*p; y++)
      for (int x = 0; x < n*p; x++) begin
        pix_valid = 1; pix_data = pix_t'(img[y][x]);
        while (!pix_ready) begin pix_stalls++; @(negedge clk); end
        @(negedge clk);
      end
    pix_valid = 0;
    while (exp_x.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    cfg_nsub = 6; cfg_pside = 4; cfg_lin_en = 0; cfg_off_en = 0;
    lut_we = 0; lut_sel = 0; lut_addr = 0; lut_wdata = 0; pix_valid = 0; pix_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1024; i++) begin lin[i] = int'($urandom % 801) - 400; wr(0, i, lin[i]); end
    for (int i = 0; i < 121; i++) begin
      offx[i] = int'($urandom % 2001) - 1000; wr(1, i, offx[i]);
      offy[i] = int'($urandom % 2001) - 1000; wr(2, i, offy[i]);
    end
    stall_mode = 1;
    fork
      frame(12, 4, 0);
      begin repeat (3000) @(negedge clk); stall_mode = 0; end
    join
    checks++;
    if (pix_stalls == 0) begin failures++; $display("pixel input never stalled"); end
    frame(11, 2, 1);
    rand_stall = 1;
    frame(11, 2, 1);
    $display("pixel stall cycles %0d", pix_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

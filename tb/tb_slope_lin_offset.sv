// tb_slope_lin_offset: loads random linearization and offset tables, then
// sends random slope pairs with the four combinations of the two enables and
// compares with a reference; includes values that saturate.
module tb_slope_lin_offset;
  import sparc_pkg::*;
  import tb_ref_pkg::*;
  localparam int MAXN = 10, TW = 12;
  logic clk = 0, rst_n = 0;
  logic cfg_lin_en, cfg_off_en, lut_we, in_valid, out_valid;
  logic [1:0] lut_sel;
  logic [TW-1:0] lut_addr, in_k, out_k;
  slope_t lut_wdata;
  slope_pair_t in_slopes, out_slopes;
  int checks = 0, failures = 0;
  int lin [1024];
  int offx [MAXN*MAXN], offy [MAXN*MAXN];

  slope_lin_offset #(.MAX_NSUB(MAXN), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int sel, input int addr, input int val);
    lut_we = 1; lut_sel = 2'(sel); lut_addr = TW'(addr); lut_wdata = slope_t'(val);
    @(negedge clk);
    lut_we = 0;
  endtask

  function automatic int rnd16(input int range);
    return int'($urandom % (2 * range + 1)) - range;
  endfunction

  initial begin
    cfg_lin_en = 0; cfg_off_en = 0; lut_we = 0; lut_sel = 0; lut_addr = 0; lut_wdata = 0;
    in_valid = 0; in_k = 0; in_slopes = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1024; i++) begin lin[i] = rnd16(2000); wr(0, i, lin[i]); end
    for (int i = 0; i < MAXN*MAXN; i++) begin
      offx[i] = rnd16(3000); wr(1, i, offx[i]);
      offy[i] = rnd16(3000); wr(2, i, offy[i]);
    end
    for (int mode = 0; mode < 4; mode++) begin
      cfg_lin_en = mode[0]; cfg_off_en = mode[1];
      for (int i = 0; i < 400; i++) begin
        int sx, sy, k, ex, ey;
        sx = (i % 10 == 0) ? 32767 - int'($urandom % 100) : rnd16(32768);
        sy = (i % 10 == 1) ? -32768 + int'($urandom % 100) : rnd16(32768);
        if (sx > 32767) sx = 32767;
        if (sy > 32767) sy = 32767;
        k  = $urandom % (MAXN*MAXN);
        in_valid = 1; in_slopes.sx = slope_t'(sx); in_slopes.sy = slope_t'(sy); in_k = TW'(k);
        ex = linoff_ref(sx, lin[lin_index(sx)], offx[k], mode[0], mode[1]);
        ey = linoff_ref(sy, lin[lin_index(sy)], offy[k], mode[0], mode[1]);
        @(negedge clk);
        checks += 3;
        if (!out_valid) begin failures++; $display("no valid"); end
        if (int'(out_slopes.sx) != ex || int'(out_slopes.sy) != ey) begin
          failures++; $display("mode %0d: got (%0d,%0d) exp (%0d,%0d)", mode, out_slopes.sx, out_slopes.sy, ex, ey);
        end
        if (int'(out_k) != k) begin failures++; $display("k wrong"); end
      end
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

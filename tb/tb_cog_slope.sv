// tb_cog_slope: feeds random subapertures (p = 4, then p = 2, plus a dark one
// and single bright pixels) one per clock and compares the centre-of-gravity
// slopes with a reference computed here; checks the 18-clock latency and the
// order of the tags.
module tb_cog_slope;
  import sparc_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 4, TW = 12, LAT = 18;
  logic clk = 0, rst_n = 0;
  logic [$clog2(P+1)-1:0] cfg_pside;
  logic in_valid, out_valid;
  pix_t in_pix [P*P];
  logic [TW-1:0] in_tag, out_tag;
  slope_pair_t out_slopes;
  int checks = 0, failures = 0;
  int exp_x [$], exp_y [$], exp_t [$];
  longint in_time [$];
  longint cyc = 0;

  cog_slope #(.PIX_SIDE(P), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (exp_x.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      int ex, ey, et; longint t0;
      ex = exp_x.pop_front(); ey = exp_y.pop_front(); et = exp_t.pop_front(); t0 = in_time.pop_front();
      if (int'(out_slopes.sx) != ex || int'(out_slopes.sy) != ey) begin
        failures++; $display("tag %0d: got (%0d,%0d) exp (%0d,%0d)", out_tag, out_slopes.sx, out_slopes.sy, ex, ey);
      end
      if (int'(out_tag) != et) begin failures++; $display("tag %0d exp %0d", out_tag, et); end
      if (cyc - t0 != LAT) begin failures++; $display("latency %0d exp %0d", cyc - t0, LAT); end
    end
  end

  task automatic drive(input int p, input int unsigned pix [16], input int tag);
    for (int b = 0; b < P*P; b++) in_pix[b] = pix_t'(pix[b]);
    in_valid = 1; in_tag = TW'(tag);
    exp_x.push_back(cog_ref(pix, P, p, 1'b0));
    exp_y.push_back(cog_ref(pix, P, p, 1'b1));
    exp_t.push_back(tag);
    in_time.push_back(cyc);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int unsigned pix [16];
    in_valid = 0; in_tag = 0; cfg_pside = 4;
    for (int b = 0; b < P*P; b++) in_pix[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 4; p >= 2; p -= 2) begin
      cfg_pside = $bits(cfg_pside)'(p);
      for (int i = 0; i < 300; i++) begin
        for (int b = 0; b < 16; b++) begin
          pix[b] = $urandom & ((i % 3 == 0) ? 16'hffff : 16'h00ff);
          if ((b / P) >= p || (b % P) >= p) pix[b] = 0;
        end
        if (i == 5) for (int b = 0; b < 16; b++) pix[b] = 0;                 // dark
        if (i == 6) begin for (int b = 0; b < 16; b++) pix[b] = 0; pix[0] = 1000; end
        if (i == 7) begin for (int b = 0; b < 16; b++) pix[b] = 0; pix[(p-1)*P + p-1] = 65535; end
        drive(p, pix, i + ((p == 4) ? 0 : 2000));
        if (i % 50 == 49) repeat (3) @(negedge clk);   // gaps in the stream
      end
      repeat (LAT + 4) @(negedge clk);
    end
    checks++;
    if (exp_x.size() != 0) begin failures++; $display("%0d results missing", exp_x.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

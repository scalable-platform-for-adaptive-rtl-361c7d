// tb_act_cond: feeds phase words for n = 5 (36 actuators, 4 lanes: the last
// word only partly used) and n = 3, with random output stalls, and checks
// the order, the clamping to the thresholds, the index and the last flag.
module tb_act_cond;
  import sparc_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 4, MAXN = 6;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MAXN+1)-1:0] cfg_nsub;
  act_t cfg_act_min, cfg_act_max, act_data;
  logic ph_valid, ph_ready, act_valid, act_ready, act_last;
  logic [L*PHASE_W-1:0] ph_data;
  logic [11:0] act_index;
  int checks = 0, failures = 0, clamps = 0;
  int expq [$];

  act_cond #(.LANES(L), .MAX_NSUB(MAXN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int total, seen;
  // ready changes just after a rising edge, so it is stable when sampled
  always @(posedge clk) act_ready <= ($urandom % 100) < 70;

  always @(negedge clk) begin
    if (rst_n && act_valid && act_ready) begin
      int e;
      e = expq.pop_front();
      checks += 3;
      if (int'(act_data) != e) begin failures++; $display("act %0d got %0d exp %0d", seen, act_data, e); end
      if (int'(act_index) != seen) begin failures++; $display("index %0d exp %0d", act_index, seen); end
      if (act_last != (seen == total - 1)) begin failures++; $display("last flag wrong at %0d", seen); end
      seen = (seen == total - 1) ? 0 : seen + 1;
    end
  end

  task automatic frame(input int n, input int lo, input int hi);
    int words;
    cfg_nsub = $bits(cfg_nsub)'(n); cfg_act_min = act_t'(lo); cfg_act_max = act_t'(hi);
    total = (n + 1) * (n + 1); seen = 0;
    words = (total + L - 1) / L;
    repeat (2) @(negedge clk);
    for (int w = 0; w < words; w++) begin
      ph_valid = 1;
      for (int l = 0; l < L; l++) begin
        int v;
        v = int'($urandom % 200001) - 100000;
        ph_data[l*PHASE_W +: PHASE_W] = PHASE_W'(v);
        if (w*L + l < total) begin
          expq.push_back(clamp_ref(v, lo, hi));
          if (v < lo || v > hi) clamps++;
        end
      end
      while (!ph_ready) @(negedge clk);
      @(negedge clk);
      ph_valid = 0;
    end
    while (expq.size() != 0) @(negedge clk);
  endtask

  initial begin
    act_ready = 0; ph_valid = 0; ph_data = 0; cfg_nsub = 5; cfg_act_min = -32768; cfg_act_max = 32767;
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame(5, -32768, 32767);
    frame(5, -20000, 15000);
    frame(3, -100, 100);
    checks++;
    if (clamps == 0) begin failures++; $display("no clamping exercised"); end
    $display("clamped values: %0d", clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

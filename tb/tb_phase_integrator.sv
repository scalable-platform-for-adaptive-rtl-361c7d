// tb_phase_integrator: three frames of random residual words with different
// gain, leak and scaling shift, compared with the integrator law computed
// here; includes residuals large enough to saturate, a stalled output, and a
// phase_clear that must bring the phases back to zero.
module tb_phase_integrator;
  import sparc_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 4, MAXN = 6;
  localparam int MAXW = ((MAXN + 1) * (MAXN + 1) + L - 1) / L;
  logic clk = 0, rst_n = 0;
  logic [15:0] cfg_gain, cfg_leak;
  logic [5:0] cfg_res_shift;
  logic phase_clear, res_valid, res_ready, res_last, ph_valid, ph_ready, ph_last;
  logic [$clog2(MAXW)-1:0] res_word;
  logic [L*ACC_W-1:0] res_data;
  logic [L*PHASE_W-1:0] ph_data;
  int checks = 0, failures = 0, sat_hits = 0;
  longint phi [MAXW*L];
  longint expq [$];

  phase_integrator #(.LANES(L), .MAX_NSUB(MAXN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ready changes just after a rising edge, so it is stable when sampled
  always @(posedge clk) ph_ready <= ($urandom % 100) < 60;

  always @(negedge clk) begin
    if (rst_n && ph_valid && ph_ready) begin
      for (int l = 0; l < L; l++) begin
        longint e;
        e = expq.pop_front();
        checks++;
        if (longint'($signed(ph_data[l*PHASE_W +: PHASE_W])) != e) begin
          failures++; $display("phase got %0d exp %0d", $signed(ph_data[l*PHASE_W +: PHASE_W]), e);
        end
      end
    end
  end

  task automatic frame(input int words, input int gain, input int leak, input int shift, input bit big);
    cfg_gain = 16'(gain); cfg_leak = 16'(leak); cfg_res_shift = 6'(shift);
    for (int w = 0; w < words; w++) begin
      res_valid = 1; res_word = $bits(res_word)'(w); res_last = (w == words - 1);
      for (int l = 0; l < L; l++) begin
        longint r;
        r = big ? (longint'($urandom) << 14) * (($urandom % 2) ? 1 : -1)
                : longint'(int'($urandom % 2000001) - 1000000) << 8;
        res_data[l*ACC_W +: ACC_W] = ACC_W'(r);
        phi[w*L + l] = integ_ref(phi[w*L + l], r, shift, gain, leak);
        if (phi[w*L + l] == 64'sd2147483647 || phi[w*L + l] == -64'sd2147483648) sat_hits++;
        expq.push_back(phi[w*L + l]);
      end
      while (!res_ready) @(negedge clk);   // data held until accepted
      @(negedge clk);
    end
    res_valid = 0;
    while (expq.size() != 0) @(negedge clk);
  endtask

  initial begin
    ph_ready = 0; phase_clear = 0; res_valid = 0; res_word = 0; res_data = 0; res_last = 0;
    cfg_gain = 16'h8000; cfg_leak = 0; cfg_res_shift = 12;
    for (int i = 0; i < MAXW*L; i++) phi[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!res_ready) @(negedge clk);
    frame(MAXW, 16'h8000, 0, 12, 0);       // plain addition
    frame(MAXW, 16'h4ccd, 16'h0148, 10, 0); // gain 0.6, leak 0.01
    frame(MAXW, 16'hffff, 16'h0000, 0, 1);  // saturating
    checks++;
    if (sat_hits == 0) begin failures++; $display("no saturation exercised"); end
    phase_clear = 1;
    @(negedge clk);
    phase_clear = 0;
    for (int i = 0; i < MAXW*L; i++) phi[i] = 0;
    while (!res_ready) @(negedge clk);
    frame(MAXW, 16'h8000, 16'h1000, 4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, count, that a full FIFO refuses data and that it fills completely.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, full_seen = 0;
  bit push, pop;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((i / 500) % 2 ? 80 : 30);
      out_ready = ($urandom % 100) < ((i / 500) % 2 ? 30 : 80);
      in_data   = W'($urandom);
      // checks at the sampling point
      checks++;
      if (count != $bits(count)'(model.size())) begin
        failures++; $display("count %0d model %0d", count, model.size());
      end
      checks++;
      if (in_ready != (model.size() < D)) begin failures++; $display("in_ready wrong"); end
      if (out_valid) begin
        checks++;
        if (out_data !== model[0]) begin failures++; $display("data %h exp %h", out_data, model[0]); end
      end
      if (model.size() == D) full_seen++;
      pop  = out_valid && out_ready;
      push = in_valid && in_ready;
      @(posedge clk);
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(in_data);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FIFO never became full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

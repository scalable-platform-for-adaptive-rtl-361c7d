// tb_async_fifo: checks the dual-clock pixel FIFO at several clock ratios
// (write clock faster, slower and nearly equal to the read clock). A
// random writer and a random reader move 3000 words per ratio; every word
// read is compared with a reference queue, so loss, duplication or
// reordering is caught. It also checks that the FIFO reports full after
// DEPTH writes with no reads, and that a word written into an empty FIFO
// shows on the read side within five read-clock edges.
module tb_async_fifo;
  localparam int W = 16, D = 16;

  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wvalid, wready, rvalid, rready;
  logic [W-1:0] wdata, rdata;
  int wper = 7, rper = 10;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #(wper) wclk = ~wclk;
  always #(rper) rclk = ~rclk;

  int checks = 0, failures = 0;
  logic [W-1:0] ref_q [$];
  int n_read = 0, wr_pct = 100, rd_pct = 100;
  bit reading = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader: random ready, compare on every pop
  always @(negedge rclk) begin
    if (rrst_n && reading) begin
      rready = (($urandom % 100) < rd_pct);
      if (rvalid && rready) begin
        checks++;
        if (ref_q.size() == 0) begin failures++; $display("read from empty FIFO"); end
        else if (rdata != ref_q[0]) begin
          failures++;
          if (failures < 10) $display("got %h exp %h", rdata, ref_q[0]);
          void'(ref_q.pop_front());
        end else void'(ref_q.pop_front());
        n_read++;
      end
    end else rready = 0;
  end

  task automatic write_words(input int count);
    int k;
    k = 0;
    while (k < count) begin
      @(negedge wclk);
      if (($urandom % 100) < wr_pct) begin
        wvalid = 1; wdata = W'($urandom);
        if (wready) begin ref_q.push_back(wdata); k++; end
      end else wvalid = 0;
    end
    @(negedge wclk);
    wvalid = 0;
  endtask

  task automatic run_ratio(input int wp, input int rp, input int wpct, input int rpct);
    wper = wp; rper = rp; wr_pct = wpct; rd_pct = rpct;
    n_read = 0;
    reading = 1;
    write_words(3000);
    while (ref_q.size() != 0) @(negedge rclk);
    checks++;
    if (n_read != 3000) begin failures++; $display("read %0d words, expected 3000", n_read); end
    reading = 0;
    repeat (10) @(negedge rclk);
  endtask

  initial begin
    int lat;
    wvalid = 0; wdata = 0; rready = 0;
    #100 wrst_n = 1; rrst_n = 1;
    repeat (5) @(negedge wclk);

    // full after DEPTH writes with the reader stopped
    for (int i = 0; i < D; i++) begin
      @(negedge wclk);
      wvalid = 1; wdata = W'(i);
      if (!wready) begin failures++; $display("not ready at write %0d", i); end
      checks++;
      ref_q.push_back(wdata);
    end
    @(negedge wclk);
    wvalid = 0;
    repeat (2) @(negedge wclk);
    checks++;
    if (wready) begin failures++; $display("wready still high with %0d words held", D); end
    reading = 1;
    while (ref_q.size() != 0) @(negedge rclk);
    reading = 0;
    repeat (10) @(negedge wclk);

    // latency of one word into an empty FIFO
    @(negedge wclk); wvalid = 1; wdata = 16'hbeef; ref_q.push_back(wdata);
    @(negedge wclk); wvalid = 0;
    lat = 0;
    while (!rvalid && lat < 20) begin @(negedge rclk); lat++; end
    checks++;
    if (lat > 5) begin failures++; $display("word took %0d read clocks to appear", lat); end
    reading = 1;
    while (ref_q.size() != 0) @(negedge rclk);
    reading = 0;

    run_ratio(7, 10, 90, 60);    // fast writer, slow reader: FIFO runs full
    run_ratio(13, 5, 70, 90);    // slow writer: FIFO runs empty
    run_ratio(9, 10, 80, 80);    // nearly equal clocks
    run_ratio(5, 23, 100, 100);  // widely different clocks

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// ddr_model: behavioural model of the external matrix memory (not
// synthesizable). It stands for the DDR3 modules and their controller: a
// word-addressed memory of DEPTH words of LANES*16 bits behind a
// valid/ready command port, returning read data in order after a random
// latency of MIN_LAT..MAX_LAT clocks and refusing commands now and then
// (cmd_ready low), to imitate refresh and bank conflicts. Words never
// written read as zero.
module ddr_model #(
  parameter int unsigned LANES   = 64,
  parameter int unsigned ADDR_W  = 26,
  parameter int unsigned DEPTH   = 4096,
  parameter int unsigned MIN_LAT = 4,
  parameter int unsigned MAX_LAT = 30,
  parameter int unsigned BUSY_PCT = 10
) (
  input  logic                    clk,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  logic                    cmd_we,
  input  logic [ADDR_W-1:0]       cmd_addr,
  input  logic [LANES*16-1:0]     wdata,
  output logic                    rd_valid,
  output logic [LANES*16-1:0]     rd_data
);
  typedef struct {
    logic [LANES*16-1:0] data;
    longint              due;
  } rd_t;

  logic [LANES*16-1:0] mem [DEPTH];
  rd_t                 q [$];
  longint              now = 0;
  longint              last_due = 0;
  int unsigned         reads = 0, writes = 0, busy_cycles = 0;

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
    cmd_ready = 1'b1;
    rd_valid  = 1'b0;
    rd_data   = '0;
  end

  always @(posedge clk) begin
    rd_t e;
    longint due;
    now++;
    if (cmd_valid && cmd_ready) begin
      if (int'(cmd_addr) >= int'(DEPTH)) $fatal(1, "ddr_model: address %0d out of range", cmd_addr);
      if (cmd_we) begin
        mem[cmd_addr] <= wdata;
        writes++;
      end else begin
        due = now + MIN_LAT + ($urandom % (MAX_LAT - MIN_LAT + 1));
        if (due < last_due) due = last_due;  // in order
        last_due = due;
        e.data = mem[cmd_addr];
        e.due  = due;
        q.push_back(e);
        reads++;
      end
    end
    rd_valid <= 1'b0;
    if (q.size() > 0 && q[0].due <= now) begin
      rd_valid <= 1'b1;
      rd_data  <= q[0].data;
      void'(q.pop_front());
    end
    cmd_ready <= (($urandom % 100) >= BUSY_PCT);
    if (!cmd_ready) busy_cycles++;
  end

endmodule

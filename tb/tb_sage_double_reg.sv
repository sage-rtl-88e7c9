// tb_sage_double_reg: checks the consensus double registers on their own.
// The testbench plays the Read Construction Unit (it issues base lookups and
// moves on when one hits) in front of the behavioural consensus memory
// tb_cons_mem (random latency of 1..4 cycles). Every hit is compared with the
// consensus word in memory. Three access patterns are run: a sequential scan
// (the normal case, where prefetching the next word must keep the lookups
// hitting in nearly every cycle), short forward/backward jumps (a new read
// starting near the last one), and random addresses; then a clear followed by
// a new consensus checks that stale words are dropped.
// No ports; 10 ns clock. Two 64-bit registers follow the published design; the
// tag / prefetch behaviour and the hit-rate bound checked here are this
// design's own.
module tb_sage_double_reg;
  import sage_pkg::*;
  import sage_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear;
  logic req, hit;
  logic [POS_BITS-1:0] addr;
  logic [1:0] base;
  logic fetch_valid, fetch_ready, word_valid;
  logic [POS_BITS-6:0] fetch_addr;
  logic [DREG_BITS-1:0] word_data;

  sage_double_reg dut (.clk, .rst_n, .clear, .req, .addr, .hit, .base,
    .fetch_valid, .fetch_addr, .fetch_ready, .word_valid, .word_data);

  tb_cons_mem #(.CH(0)) u_mem (.clk, .rst_n, .fetch_valid, .fetch_addr, .fetch_ready,
    .word_valid, .word_data);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  localparam int NWORDS = 64;

  function automatic bit [1:0] ref_base(int a);
    bit [63:0] w;
    w = cons_words[0][a / 32];
    return w[2 * (a % 32) +: 2];
  endfunction

  // lookup driver: mode 0 sequential, 1 short jumps, 2 random
  int mode, hits, cycles, todo;
  always @(posedge clk) begin
    if (req) cycles++;
    if (req && hit) begin
      check(base == ref_base(int'(addr)), $sformatf("addr %0d base %0d exp %0d",
            addr, base, ref_base(int'(addr))));
      hits++;
      todo--;
      if (todo <= 0) req <= 1'b0;
      unique case (mode)
        0: addr <= (int'(addr) + 1) % (NWORDS * 32);
        1: addr <= POS_BITS'((int'(addr) + $urandom_range(40) + NWORDS * 32 - 20) % (NWORDS * 32));
        default: addr <= POS_BITS'($urandom_range(NWORDS * 32 - 1));
      endcase
    end
  end

  task automatic fill(int seed);
    cons_words[0].delete();
    for (int i = 0; i < NWORDS; i++)
      cons_words[0].push_back({$urandom(), $urandom()} ^ 64'(seed));
  endtask

  task automatic run(int m, int n, int start);
    mode = m; hits = 0; cycles = 0; todo = n;
    @(posedge clk);
    addr <= POS_BITS'(start); req <= 1'b1;
    @(posedge clk);
    while (req) @(posedge clk);
    check(hits == n, $sformatf("mode %0d: %0d hits of %0d", m, hits, n));
    $display("mode %0d: %0d lookups in %0d cycles", m, hits, cycles);
  endtask

  initial begin
    clear = 1'b0; req = 1'b0; addr = '0;
    fill(0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0, 1500, 5);
    check(cycles <= 1500 + 1500 / 32 * 2 + 10, $sformatf("sequential scan took %0d cycles", cycles));
    run(1, 1000, 700);
    run(2, 400, 0);
    // clear and load a different consensus: no stale hits
    @(posedge clk); clear <= 1'b1;
    @(posedge clk); clear <= 1'b0;
    fill(32'h5a5a_1234);
    run(0, 300, 40);
    run(2, 200, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_sage_control_unit: checks the Control Unit on its own. The testbench
// plays the Scan Unit and the Read Construction Unit with a small model: after
// the start pulse the "SU" reports its configuration (a random read count)
// a few cycles later and raises su_done after a random time, while the "RCU"
// finishes reads at random moments. Checked: the command is taken only when
// the unit is idle or done, exactly one clear cycle followed by exactly one
// start cycle per command, the output format is latched from the command and
// held, commands other than SAGe_Read are ignored, reads_out counts finished
// reads, and done rises exactly when the last read has left and the SU has
// finished (never earlier), then stays until the next command.
// No ports; 10 ns clock. The published design names the Control Unit and its
// role only, so every behaviour checked here is this design's own protocol.
module tb_sage_control_unit;
  import sage_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_op_t cmd_op;
  fmt_t cmd_fmt;
  logic clear, su_start;
  fmt_t fmt;
  logic su_cfg_done, su_done, read_out;
  logic [31:0] su_num_reads;
  logic busy, done;
  logic [31:0] reads_out;

  sage_control_unit dut (.clk, .rst_n, .cmd_valid, .cmd_op, .cmd_fmt, .cmd_ready,
    .clear, .su_start, .fmt, .su_cfg_done, .su_num_reads, .su_done, .read_out,
    .busy, .done, .reads_out);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // SU / RCU model
  int n_clear, n_start, nreads, set_reads, sent, cfg_wait, done_wait;
  bit active;
  always @(posedge clk) begin
    if (clear) begin
      n_clear++;
      su_cfg_done <= 1'b0; su_done <= 1'b0; read_out <= 1'b0; active <= 1'b0;
    end else if (su_start) begin
      n_start++;
      active <= 1'b1; sent <= 0; set_reads <= nreads;
      cfg_wait <= 2 + $urandom_range(5);
      done_wait <= 10 + $urandom_range(60);
    end else if (active) begin
      read_out <= 1'b0;
      if (cfg_wait > 0) cfg_wait <= cfg_wait - 1;
      else begin
        su_cfg_done  <= 1'b1;
        su_num_reads <= 32'(set_reads);
      end
      if (done_wait > 0) done_wait <= done_wait - 1;
      else su_done <= 1'b1;
      if (sent < set_reads && $urandom_range(3) == 0) begin
        read_out <= 1'b1;
        sent <= sent + 1;
      end
    end
    // done only after every read has left and the SU is finished
    if (rst_n && done) check(su_done && su_cfg_done && reads_out == su_num_reads,
                    $sformatf("done with %0d of %0d reads", reads_out, su_num_reads));
    if (rst_n && busy) check(fmt == cmd_fmt_latched, $sformatf("format held during a command: %0d vs %0d at %0t", fmt, cmd_fmt_latched, $time));
  end

  fmt_t cmd_fmt_latched;

  task automatic command(int n, fmt_t f, bit wrong_op);
    int t;
    nreads = n;
    n_clear = 0; n_start = 0;
    @(posedge clk);
    cmd_valid <= 1'b1; cmd_op <= wrong_op ? CMD_NOP : CMD_SAGE_READ; cmd_fmt <= f;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1'b0;
    if (!wrong_op) cmd_fmt_latched = f;
    @(posedge clk);
    if (wrong_op) begin
      repeat (5) @(posedge clk);
      check(!busy && n_clear == 0 && n_start == 0, "non-read command ignored");
      return;
    end
    check(busy, "busy after the command");
    // a second command while busy must not be taken
    cmd_valid <= 1'b1; cmd_op <= CMD_SAGE_READ; cmd_fmt <= FMT_ONEHOT;
    t = 0;
    while (!done && t < 5000) begin
      @(posedge clk);
      t++;
      check(!cmd_ready || done, "command port closed while busy");
      if (t == 5) cmd_valid <= 1'b0;   // withdrawn before the SU can finish
    end
    check(done, "command completed");
    check(reads_out == 32'(n), $sformatf("reads_out %0d exp %0d", reads_out, n));
    check(n_clear == 1 && n_start == 1, $sformatf("clear %0d start %0d pulses", n_clear, n_start));
    check(fmt == f, "format latched");
    repeat (3) @(posedge clk);
    check(done && reads_out == 32'(n), "done held");
  endtask

  initial begin
    cmd_valid = 1'b0; cmd_op = CMD_NOP; cmd_fmt = FMT_2BIT; cmd_fmt_latched = FMT_2BIT;
    su_cfg_done = 1'b0; su_done = 1'b0; read_out = 1'b0; su_num_reads = '0;
    active = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    command(5, FMT_ASCII, 1'b1);
    for (int i = 0; i < 30; i++)
      command($urandom_range(40), fmt_t'($urandom_range(3)), 1'b0);
    command(0, FMT_ASCII, 1'b0);
    command(3, FMT_3BIT, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

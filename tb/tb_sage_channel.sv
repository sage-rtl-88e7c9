// tb_sage_channel: end-to-end test of one SAGe channel. Random read sets
// (fixed-length short reads and variable-length long reads, with
// substitutions, short and long insertions and deletions, N bases and
// corner-case reads) are encoded by sage_tb_pkg, streamed into the channel
// with random stalls, and every output chunk is compared base by base with the
// reads that were drawn, in each output format. Also checked: chunking at 150
// bases, out_last placement, read and event counts, command completion, and
// that a 150-base read without mismatches takes at most ~1 cycle per base.
// No ports; 10 ns clock. The decoding rules follow the published design; the
// stream layout, handshakes and the rate bound are this design's own.
module tb_sage_channel;
  import sage_pkg::*;
  import sage_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_op_t cmd_op;
  fmt_t cmd_fmt;
  logic [5:0] s_valid, s_ready;
  logic [7:0] s_data [6];
  logic cf_valid, cf_ready, cw_valid;
  logic [26:0] cf_addr;
  logic [63:0] cw_data;
  logic out_valid, out_last, out_ready;
  logic [7:0] out_data [CHUNK_BASES];
  logic [7:0] out_count;
  logic busy, done;
  logic [31:0] reads_out;
  logic ev_sub, ev_ins, ev_del, ev_corner;

  sage_channel dut (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_fmt, .cmd_ready,
    .cfg_valid(s_valid[0]), .cfg_data(s_data[0]), .cfg_ready(s_ready[0]),
    .mpga_valid(s_valid[1]), .mpga_data(s_data[1]), .mpga_ready(s_ready[1]),
    .mpa_valid(s_valid[2]), .mpa_data(s_data[2]), .mpa_ready(s_ready[2]),
    .mmpga_valid(s_valid[3]), .mmpga_data(s_data[3]), .mmpga_ready(s_ready[3]),
    .mmpa_valid(s_valid[4]), .mmpa_data(s_data[4]), .mmpa_ready(s_ready[4]),
    .mbta_valid(s_valid[5]), .mbta_data(s_data[5]), .mbta_ready(s_ready[5]),
    .cons_fetch_valid(cf_valid), .cons_fetch_addr(cf_addr), .cons_fetch_ready(cf_ready),
    .cons_word_valid(cw_valid), .cons_word_data(cw_data),
    .out_valid, .out_data, .out_count, .out_last, .out_ready,
    .busy, .done, .reads_out, .ev_sub, .ev_ins, .ev_del, .ev_corner
  );

  int stall_pct = 20;
  for (genvar s = 0; s < 6; s++) begin : g_src
    tb_byte_source #(.CH(0), .SID(s)) u_src (.clk, .rst_n, .valid(s_valid[s]),
      .data(s_data[s]), .ready(s_ready[s]));
  end
  tb_cons_mem #(.CH(0)) u_mem (.clk, .rst_n, .fetch_valid(cf_valid), .fetch_addr(cf_addr),
    .fetch_ready(cf_ready), .word_valid(cw_valid), .word_data(cw_data));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // output checker
  int cur_fmt;
  int bidx, ridx, in_read, cnt_sub, cnt_ins, cnt_del, cnt_corner;
  int chunk_full_seen, ready_pct = 70;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(99) < ready_pct);
    if (rst_n) begin
      cnt_sub    <= cnt_sub + int'(ev_sub);
      cnt_ins    <= cnt_ins + int'(ev_ins);
      cnt_del    <= cnt_del + int'(ev_del);
      cnt_corner <= cnt_corner + int'(ev_corner);
    end
    if (out_valid && out_ready) begin
      int rlen, remain, expn;
      rlen   = (ridx < exp_lens[0].size()) ? exp_lens[0][ridx] : 0;
      remain = rlen - in_read;
      expn   = (remain > CHUNK_BASES) ? CHUNK_BASES : remain;
      check(int'(out_count) == expn, $sformatf("read %0d chunk count %0d, expected %0d", ridx, out_count, expn));
      check(out_last == (remain <= CHUNK_BASES), $sformatf("read %0d out_last", ridx));
      if (out_count == CHUNK_BASES) chunk_full_seen++;
      for (int i = 0; i < int'(out_count) && i < expn; i++) begin
        bit [7:0] e;
        e = fmt_ref(cur_fmt, exp_bases[0][bidx + i]);
        if (out_data[i] !== e) begin
          failures++;
          if (failures < 20) $display("FAIL: read %0d base %0d got %02h exp %02h", ridx, in_read + i, out_data[i], e);
        end
        checks++;
      end
      bidx += int'(out_count);
      if (out_last) begin ridx++; in_read = 0; end
      else in_read += int'(out_count);
    end
  end

  task automatic run(int nreads, int fixed_len, int min_len, int max_len, int mm_pct, fmt_t f);
    int t0;
    build(0, nreads, fixed_len, min_len, max_len, mm_pct);
    cur_fmt = int'(f);
    bidx = 0; ridx = 0; in_read = 0;
    cnt_sub = 0; cnt_ins = 0; cnt_del = 0; cnt_corner = 0;
    @(posedge clk);
    cmd_valid <= 1'b1; cmd_op <= CMD_SAGE_READ; cmd_fmt <= f;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1'b0;
    t0 = cyc;
    @(posedge clk);
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    check(ridx == nreads, $sformatf("reads seen %0d of %0d", ridx, nreads));
    check(reads_out == 32'(nreads), "reads_out");
    check(bidx == exp_bases[0].size(), "total bases");
    check(cnt_sub == n_sub[0], $sformatf("substitutions %0d/%0d", cnt_sub, n_sub[0]));
    check(cnt_ins == n_ins[0], $sformatf("insertions %0d/%0d", cnt_ins, n_ins[0]));
    check(cnt_del == n_del[0], $sformatf("deletions %0d/%0d", cnt_del, n_del[0]));
    check(cnt_corner == n_corner[0], $sformatf("corner reads %0d/%0d", cnt_corner, n_corner[0]));
    $display("run: %0d reads, %0d bases, %0d cycles, sub %0d ins %0d del %0d long %0d corner %0d",
             nreads, bidx, cyc - t0, cnt_sub, cnt_ins, cnt_del, n_long[0], cnt_corner);
  endtask

  initial begin
    cmd_valid = 1'b0; cmd_op = CMD_NOP; cmd_fmt = FMT_2BIT;
    out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(30, 150, 0, 150, 70, FMT_ASCII);
    run(12, 0, 100, 500, 80, FMT_ONEHOT);
    run(20, 100, 0, 100, 60, FMT_3BIT);
    run(20, 150, 0, 150, 50, FMT_2BIT);
    check(chunk_full_seen > 0, "a read longer than the 150-base register was split");
    // rate: 150-base reads without mismatches, downstream always ready
    begin
      int t0;
      ready_pct = 100;
      build(0, 8, 150, 0, 150, 0);
      cur_fmt = int'(FMT_ASCII);
      bidx = 0; ridx = 0; in_read = 0;
      cmd_valid <= 1'b1; cmd_op <= CMD_SAGE_READ; cmd_fmt <= FMT_ASCII;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      cmd_valid <= 1'b0;
      t0 = cyc;
      @(posedge clk);
      while (!done) @(posedge clk);
      $display("rate: 8 x 150 bases in %0d cycles", cyc - t0);
      check(ridx == 8, "rate run reads");
      check(cyc - t0 < 8 * 150 * 2, $sformatf("rate: %0d cycles for 1200 bases", cyc - t0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_sage_top: whole-design test of the eight-channel SAGe hardware at its
// default parameters. Each channel gets its own random read set (short
// fixed-length reads on even channels, variable-length long reads on odd
// ones), streamed from its own sources and consensus memory with random
// stalls. Every output base of every channel is compared with the reads that
// were drawn. Two commands are issued with different output formats. Each
// mechanism of the design is counted and must occur at least once:
// substitution, short and long insertion and deletion, corner-case read,
// split of a read longer than the 150-base register, consensus word fetch,
// output back-pressure, and a format change between commands.
// No ports; 10 ns clock; the top runs with its default parameters (8
// channels, 150-base register), as in the published configuration.
module tb_sage_top;
  import sage_pkg::*;
  import sage_tb_pkg::*;

  localparam int NCH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_op_t cmd_op;
  fmt_t cmd_fmt;
  logic [NCH-1:0] v [6];
  logic [NCH-1:0] r [6];
  logic [7:0] d [6][NCH];
  logic [NCH-1:0] cf_valid, cf_ready, cw_valid;
  logic [26:0] cf_addr [NCH];
  logic [63:0] cw_data [NCH];
  logic [NCH-1:0] out_valid, out_last, out_ready;
  logic [7:0] out_data [NCH][CHUNK_BASES];
  logic [7:0] out_count [NCH];
  logic [NCH-1:0] ch_busy, ch_done, ev_sub, ev_ins, ev_del, ev_corner;
  logic [31:0] reads_out [NCH];
  logic done;

  sage_top dut (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_fmt, .cmd_ready,
    .cfg_valid(v[0]),   .cfg_data(d[0]),   .cfg_ready(r[0]),
    .mpga_valid(v[1]),  .mpga_data(d[1]),  .mpga_ready(r[1]),
    .mpa_valid(v[2]),   .mpa_data(d[2]),   .mpa_ready(r[2]),
    .mmpga_valid(v[3]), .mmpga_data(d[3]), .mmpga_ready(r[3]),
    .mmpa_valid(v[4]),  .mmpa_data(d[4]),  .mmpa_ready(r[4]),
    .mbta_valid(v[5]),  .mbta_data(d[5]),  .mbta_ready(r[5]),
    .cons_fetch_valid(cf_valid), .cons_fetch_addr(cf_addr), .cons_fetch_ready(cf_ready),
    .cons_word_valid(cw_valid), .cons_word_data(cw_data),
    .out_valid, .out_data, .out_count, .out_last, .out_ready,
    .ch_busy, .ch_done, .reads_out, .ev_sub, .ev_ins, .ev_del, .ev_corner, .done
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    for (genvar s = 0; s < 6; s++) begin : g_src
      tb_byte_source #(.CH(c), .SID(s), .STALL_PCT(10 + 5 * c)) u_src (.clk, .rst_n,
        .valid(v[s][c]), .data(d[s][c]), .ready(r[s][c]));
    end
    tb_cons_mem #(.CH(c)) u_mem (.clk, .rst_n, .fetch_valid(cf_valid[c]),
      .fetch_addr(cf_addr[c]), .fetch_ready(cf_ready[c]), .word_valid(cw_valid[c]),
      .word_data(cw_data[c]));
  end

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

  int cur_fmt;
  int bidx [NCH], ridx [NCH], in_read [NCH];
  int m_sub, m_ins, m_del, m_corner, m_split, m_fetch, m_backpressure, m_fmt_change, m_long;

  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      out_ready[c] <= ($urandom_range(99) < 75);
      if (rst_n) begin
        m_sub    = m_sub + int'(ev_sub[c]);
        m_ins    = m_ins + int'(ev_ins[c]);
        m_del    = m_del + int'(ev_del[c]);
        m_corner = m_corner + int'(ev_corner[c]);
        if (cf_valid[c] && cf_ready[c]) m_fetch = m_fetch + 1;
        if (out_valid[c] && !out_ready[c]) m_backpressure = m_backpressure + 1;
      end
      if (out_valid[c] && out_ready[c]) begin
        int rlen, remain, expn;
        rlen   = (ridx[c] < exp_lens[c].size()) ? exp_lens[c][ridx[c]] : 0;
        remain = rlen - in_read[c];
        expn   = (remain > CHUNK_BASES) ? CHUNK_BASES : remain;
        check(int'(out_count[c]) == expn, $sformatf("ch %0d read %0d chunk count %0d exp %0d",
              c, ridx[c], out_count[c], expn));
        check(out_last[c] == (remain <= CHUNK_BASES), $sformatf("ch %0d out_last", c));
        if (!out_last[c]) m_split = m_split + 1;
        for (int i = 0; i < int'(out_count[c]) && i < expn; i++) begin
          checks++;
          if (out_data[c][i] !== fmt_ref(cur_fmt, exp_bases[c][bidx[c] + i])) begin
            failures++;
            if (failures < 20) $display("FAIL: ch %0d read %0d base %0d", c, ridx[c], in_read[c] + i);
          end
        end
        bidx[c] += int'(out_count[c]);
        if (out_last[c]) begin ridx[c]++; in_read[c] = 0; end
        else in_read[c] += int'(out_count[c]);
      end
    end
  end

  task automatic run(int nreads, fmt_t f);
    int t0;
    for (int c = 0; c < NCH; c++) begin
      if (c % 2 == 0) build(c, nreads, 150, 0, 150, 60);
      else            build(c, nreads / 2, 0, 100, 600, 85);
      bidx[c] = 0; ridx[c] = 0; in_read[c] = 0;
    end
    if (cur_fmt != int'(f)) m_fmt_change++;
    cur_fmt = int'(f);
    @(posedge clk);
    cmd_valid <= 1'b1; cmd_op <= CMD_SAGE_READ; cmd_fmt <= f;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1'b0;
    t0 = cyc;
    @(posedge clk);
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin
      check(ridx[c] == n_reads[c], $sformatf("ch %0d reads %0d of %0d", c, ridx[c], n_reads[c]));
      check(reads_out[c] == 32'(n_reads[c]), $sformatf("ch %0d reads_out", c));
      check(bidx[c] == exp_bases[c].size(), $sformatf("ch %0d total bases", c));
      m_long += n_long[c];
    end
    $display("command done in %0d cycles", cyc - t0);
  endtask

  initial begin
    cmd_valid = 1'b0; cmd_op = CMD_NOP; cmd_fmt = FMT_2BIT;
    out_ready = '0;
    cur_fmt = 0;
    m_sub = 0; m_ins = 0; m_del = 0; m_corner = 0; m_split = 0; m_fetch = 0;
    m_backpressure = 0; m_fmt_change = 0; m_long = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(24, FMT_ASCII);
    run(16, FMT_2BIT);
    $display("events: sub %0d ins %0d del %0d long-indel %0d corner %0d split %0d fetch %0d backpressure %0d fmt-change %0d",
             m_sub, m_ins, m_del, m_long, m_corner, m_split, m_fetch, m_backpressure, m_fmt_change);
    check(m_sub > 0, "no substitution");
    check(m_ins > 0, "no insertion");
    check(m_del > 0, "no deletion");
    check(m_long > 0, "no long indel");
    check(m_corner > 0, "no corner-case read");
    check(m_split > 0, "no read split across chunks");
    check(m_fetch > 0, "no consensus fetch");
    check(m_backpressure > 0, "no output back-pressure");
    check(m_fmt_change > 0, "no format change");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

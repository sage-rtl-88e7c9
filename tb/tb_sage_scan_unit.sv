// tb_sage_scan_unit: checks the Scan Unit on its own. The testbench plays the
// Read Construction Unit: it takes tokens (with random back-pressure),
// answers each mismatch with the indel verdict the encoder recorded, and
// takes the indel lengths. First a directed case rebuilt from the paper's
// worked example (mismatch count stored as 0011 in the guide array; three
// position widths 2, 4, 8 coded 0, 10, 110; the first position coded 10 and
// read as the 4 bits 1110), then random read sets with fixed and per-read
// lengths. Every token field and every indel length is compared with the
// encoder's record.
// No ports; 10 ns clock. The prefix codes and the worked example follow the
// published design; the expected values come from the encoder in sage_tb_pkg,
// which writes this design's own bitstream layout.
module tb_sage_scan_unit;
  import sage_pkg::*;
  import sage_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, start;
  logic [4:0] v, r;
  logic [7:0] d [5];
  logic cfg_done, su_done;
  logic [31:0] num_reads;
  logic tok_valid, tok_ready;
  su_token_t tok;
  logic vd_valid, vd_indel, vd_ready;
  logic il_valid, il_ready;
  logic [7:0] il_len;

  sage_scan_unit dut (
    .clk, .rst_n, .clear, .start,
    .cfg_valid(v[0]), .cfg_data(d[0]), .cfg_ready(r[0]),
    .mpga_valid(v[1]), .mpga_data(d[1]), .mpga_ready(r[1]),
    .mpa_valid(v[2]), .mpa_data(d[2]), .mpa_ready(r[2]),
    .mmpga_valid(v[3]), .mmpga_data(d[3]), .mmpga_ready(r[3]),
    .mmpa_valid(v[4]), .mmpa_data(d[4]), .mmpa_ready(r[4]),
    .cfg_done, .num_reads, .su_done,
    .tok_valid, .tok, .tok_ready,
    .vd_valid, .vd_indel, .vd_ready,
    .il_valid, .il_len, .il_ready
  );

  for (genvar s = 0; s < 5; s++) begin : g_src
    tb_byte_source #(.CH(0), .SID(s)) u_src (.clk, .rst_n, .valid(v[s]), .data(d[s]), .ready(r[s]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // RCU model
  int ti, vi, ii;
  bit wait_vd;
  always @(posedge clk) begin
    tok_ready <= ($urandom_range(99) < 70);
    il_ready  <= ($urandom_range(99) < 70);
    vd_valid  <= 1'b0;
    if (tok_valid && tok_ready) begin
      if (ti >= exp_toks[0].size()) check(0, "extra token");
      else begin
        tok_t e;
        e = exp_toks[0][ti];
        check(tok.kind == (e.is_mm ? TOK_MM : TOK_READ), $sformatf("token %0d kind", ti));
        if (!e.is_mm) begin
          check(int'(tok.pos) == e.pos, $sformatf("token %0d pos %0d exp %0d", ti, tok.pos, e.pos));
          check(int'(tok.len) == e.len, $sformatf("token %0d len %0d exp %0d", ti, tok.len, e.len));
          check(int'(tok.count) == e.count, $sformatf("token %0d count %0d exp %0d", ti, tok.count, e.count));
        end else begin
          check(int'(tok.gap) == e.gap, $sformatf("token %0d gap %0d exp %0d", ti, tok.gap, e.gap));
          wait_vd <= 1'b1;
        end
      end
      ti++;
    end
    if (wait_vd && vd_ready && !vd_valid && $urandom_range(1)) begin
      vd_valid <= 1'b1;
      vd_indel <= exp_vd[0][vi];
      vi++;
      wait_vd <= 1'b0;
    end
    if (il_valid && il_ready) begin
      check(ii < exp_il[0].size() && int'(il_len) == exp_il[0][ii],
            $sformatf("indel length %0d", il_len));
      ii++;
    end
  end

  task automatic go(int nreads);
    ti = 0; vi = 0; ii = 0; wait_vd = 1'b0;
    @(posedge clk); clear <= 1'b1;
    @(posedge clk); clear <= 1'b0; start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    while (!su_done) @(posedge clk);
    repeat (4) @(posedge clk);
    check(cfg_done, "cfg_done");
    check(num_reads == 32'(nreads), "num_reads");
    check(ti == exp_toks[0].size(), $sformatf("tokens %0d of %0d", ti, exp_toks[0].size()));
    check(ii == exp_il[0].size(), "indel lengths");
  endtask

  initial begin
    clear = 1'b0; start = 1'b0; vd_valid = 1'b0; vd_indel = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // directed: the paper's mismatch-position example
    reset_ch(0);
    foreach (streams[0][s]) streams[0][s].delete();
    streams[0][S_CFG] = '{8'd0, 8'd0, 8'd0, 8'd1, 8'd0, 8'd150,
                          8'd1, 8'd8,                 // matching positions: one class, 8 bits
                          8'd1, 8'd4,                 // mismatch count: one class, 4 bits
                          8'd3, 8'd2, 8'd4, 8'd8};    // mismatch positions: 2, 4, 8 bits
    put(0, S_MPA, 7, 8);                              // matching position 7
    put(0, S_MMPGA, 4'b0011, 4);                      // count 3
    put(0, S_MMPGA, 2'b10, 2);  put(0, S_MMPA, 4'b1110, 4);     // 14
    put(0, S_MMPGA, 1'b0, 1);   put(0, S_MMPA, 2'b01, 2);       // 1, an indel
    put(0, S_MMPGA, 1'b1, 1);   put(0, S_MMPA, 8'd200, 8);      // long indel of 200
    put(0, S_MMPGA, 3'b110, 3); put(0, S_MMPA, 8'd131, 8);      // 131
    flush(0);
    exp_toks[0] = '{'{0, 7, 150, 3, 0}, '{1, 0, 0, 0, 14}, '{1, 0, 0, 0, 1}, '{1, 0, 0, 0, 131}};
    exp_vd[0]   = '{0, 1, 0};
    exp_il[0]   = '{200};
    go(1);

    build(0, 40, 150, 0, 150, 70);
    go(40);
    build(0, 15, 0, 100, 800, 85);
    go(15);
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

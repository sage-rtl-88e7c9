// tb_sage_read_construction_unit: checks the Read Construction Unit on its
// own. The testbench plays the Scan Unit (it sends the encoder's tokens,
// checks every indel verdict against the encoder's record and returns the
// indel lengths) and the double registers (a consensus lookup hits in a
// random 80% of cycles). The MBTA comes from a byte source. Every output
// base is compared with the drawn reads, in all four output formats, and the
// substitution / insertion / deletion / corner-case strobes are counted.
// A directed case rebuilds the paper's Fig. 1 example read AGCAAATGTACGATG
// from the consensus ATACGTAGAAAAAGTCGATGCTTG... at position 6 (the figure
// numbers it 7, counting from 1) with gaps 2, 3, 2: two substitutions (C, T)
// and an insertion (A).
// No ports; 10 ns clock. The Fig. 1 read and the substitution / indel rules
// follow the published design; the MBTA field order and the handshakes being
// driven are this design's own.
module tb_sage_read_construction_unit;
  import sage_pkg::*;
  import sage_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear;
  fmt_t fmt;
  logic tok_valid, tok_ready;
  su_token_t tok;
  logic vd_valid, vd_indel, vd_ready;
  logic il_valid, il_ready;
  logic [7:0] il_len;
  logic mb_valid, mb_ready;
  logic [7:0] mb_data;
  logic cons_req, cons_hit;
  logic [31:0] cons_addr;
  logic [1:0] cons_base;
  logic out_valid, out_last, out_ready;
  logic [7:0] out_data [CHUNK_BASES];
  logic [7:0] out_count;
  logic ev_sub, ev_ins, ev_del, ev_corner;

  sage_read_construction_unit dut (
    .clk, .rst_n, .clear, .fmt,
    .tok_valid, .tok, .tok_ready,
    .vd_valid, .vd_indel, .vd_ready,
    .il_valid, .il_len, .il_ready,
    .mbta_valid(mb_valid), .mbta_data(mb_data), .mbta_ready(mb_ready),
    .cons_req, .cons_addr, .cons_hit, .cons_base,
    .out_valid, .out_data, .out_count, .out_last, .out_ready,
    .ev_sub, .ev_ins, .ev_del, .ev_corner
  );

  tb_byte_source #(.CH(0), .SID(S_MBTA)) u_src (.clk, .rst_n, .valid(mb_valid),
    .data(mb_data), .ready(mb_ready));

  // consensus model
  logic hit_en;
  always @(posedge clk) hit_en <= ($urandom_range(99) < 80);
  always_comb begin
    bit [63:0] w;
    w = (int'(cons_addr >> 5) < cons_words[0].size()) ? cons_words[0][cons_addr >> 5] : '0;
    cons_hit  = cons_req && hit_en;
    cons_base = w[{cons_addr[4:0], 1'b0} +: 2];
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // SU model
  int ti = 0, vi = 0, ii = 0;
  bit need_il = 0;
  bit run_en = 0;
  always @(posedge clk) begin
    if (tok_valid && tok_ready) ti <= ti + 1;
    if (vd_valid && vd_ready) begin
      check(vi < exp_vd[0].size() && vd_indel == exp_vd[0][vi], $sformatf("verdict %0d", vi));
      vi++;
      if (vd_indel) need_il = 1'b1;
    end
    if (il_valid && il_ready) begin
      il_valid <= 1'b0;
      ii++;
    end else if (need_il && !il_valid && $urandom_range(1)) begin
      il_valid <= 1'b1;
      il_len   <= 8'(exp_il[0][ii]);
      need_il = 1'b0;
    end
  end
  always_comb begin
    tok_valid = run_en && (ti < exp_toks[0].size());
    tok = '0;
    if (tok_valid) begin
      tok.kind  = exp_toks[0][ti].is_mm ? TOK_MM : TOK_READ;
      tok.pos   = 32'(exp_toks[0][ti].pos);
      tok.len   = 16'(exp_toks[0][ti].len);
      tok.count = 16'(exp_toks[0][ti].count);
      tok.gap   = 16'(exp_toks[0][ti].gap);
    end
  end
  always @(posedge clk) vd_ready <= ($urandom_range(99) < 70);

  // output checker
  int bidx, ridx, in_read, c_sub, c_ins, c_del, c_corner;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(99) < 70);
    c_sub    = c_sub + int'(ev_sub);
    c_ins    = c_ins + int'(ev_ins);
    c_del    = c_del + int'(ev_del);
    c_corner = c_corner + int'(ev_corner);
    if (out_valid && out_ready) begin
      int remain, expn;
      remain = ((ridx < exp_lens[0].size()) ? exp_lens[0][ridx] : 0) - in_read;
      expn   = (remain > CHUNK_BASES) ? CHUNK_BASES : remain;
      check(int'(out_count) == expn, $sformatf("read %0d count %0d exp %0d", ridx, out_count, expn));
      check(out_last == (remain <= CHUNK_BASES), "out_last");
      for (int i = 0; i < int'(out_count) && i < expn; i++) begin
        checks++;
        if (out_data[i] !== fmt_ref(int'(fmt), exp_bases[0][bidx + i])) begin
          failures++;
          if (failures < 20) $display("FAIL: read %0d base %0d", ridx, in_read + i);
        end
      end
      bidx += int'(out_count);
      if (out_last) begin ridx++; in_read = 0; end else in_read += int'(out_count);
    end
  end

  task automatic go(fmt_t f);
    ti = 0; vi = 0; ii = 0; need_il = 0; bidx = 0; ridx = 0; in_read = 0;
    c_sub = 0; c_ins = 0; c_del = 0; c_corner = 0;
    fmt = f;
    @(posedge clk); clear <= 1'b1;
    @(posedge clk); clear <= 1'b0; run_en <= 1'b1;
    while (ridx < exp_lens[0].size()) @(posedge clk);
    repeat (3) @(posedge clk);
    check(bidx == exp_bases[0].size(), "total bases");
    check(vi == exp_vd[0].size(), "verdicts");
    check(c_sub == n_sub[0] && c_ins == n_ins[0] && c_del == n_del[0] && c_corner == n_corner[0],
          $sformatf("events sub %0d/%0d ins %0d/%0d del %0d/%0d corner %0d/%0d",
                    c_sub, n_sub[0], c_ins, n_ins[0], c_del, n_del[0], c_corner, n_corner[0]));
    run_en <= 1'b0;
    @(posedge clk);
  endtask

  // Fig. 1 example
  localparam string CONS = "ATACGTAGAAAAAGTCGATGCTTGCATAAGTCGATAGTT";
  localparam string READ = "AGCAAATGTACGATG";
  function automatic int code(byte c);
    case (c) "A": return 0; "C": return 1; "G": return 2; default: return 3; endcase
  endfunction

  initial begin
    clear = 1'b0; il_valid = 1'b0; il_len = '0; fmt = FMT_ASCII;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    reset_ch(0);
    begin
      bit [63:0] w0 = '0, w1 = '0;
      for (int i = 0; i < CONS.len(); i++)
        if (i < 32) w0[2*i +: 2] = 2'(code(CONS[i])); else w1[2*(i-32) +: 2] = 2'(code(CONS[i]));
      cons_words[0] = '{w0, w1};
    end
    for (int i = 0; i < READ.len(); i++) exp_bases[0].push_back(3'(code(READ[i])));
    exp_lens[0] = '{READ.len()};
    exp_toks[0] = '{'{0, 6, 15, 3, 0}, '{1, 0, 0, 0, 2}, '{1, 0, 0, 0, 3}, '{1, 0, 0, 0, 2}};
    exp_vd[0]   = '{0, 0, 1};
    exp_il[0]   = '{1};
    put(0, S_MBTA, code("C"), 2);                      // substitution A->C
    put(0, S_MBTA, code("T"), 2);                      // substitution A->T
    put(0, S_MBTA, code(CONS[6 + 9]), 2);              // equals consensus: indel
    put(0, S_MBTA, 0, 1);                              // insertion
    put(0, S_MBTA, code("A"), 2);                      // inserted base
    flush(0);
    n_sub[0] = 2; n_ins[0] = 1;
    go(FMT_ASCII);

    build(0, 40, 150, 0, 150, 70);
    go(FMT_ASCII);
    build(0, 12, 0, 100, 700, 85);
    go(FMT_ONEHOT);
    build(0, 30, 120, 0, 120, 60);
    go(FMT_3BIT);
    build(0, 30, 150, 0, 150, 60);
    go(FMT_2BIT);
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

// sage_read_construction_unit (RCU): rebuilds each read from the consensus
// sequence and the mismatch information decoded by the Scan Unit, decodes the
// mismatch bases and types from the MBTA array, and emits the read, formatted,
// in chunks of up to 150 bases.
//
// How it works. A TOK_READ token sets the consensus cursor to the read's
// matching position. Each TOK_MM token carries the number of matching bases
// before the next mismatch; the RCU copies that many consensus bases into the
// read register and then decodes the mismatch from the MBTA:
//   * base code (2 bits; 3 bits in a corner-case read, where N = 4 exists);
//   * base differs from the consensus at the cursor: substitution, the base
//     replaces the consensus base;
//   * base equals the consensus: it must be an indel; one more MBTA bit tells
//     insertion (0) from deletion (1). The RCU tells the SU (verdict) and the
//     SU returns the indel length L. An insertion takes L new bases from the
//     MBTA; a deletion skips L consensus bases.
// If the first mismatch of a read has a gap of 0 (mismatch at position 0),
// one MBTA bit says whether it is a real mismatch (0) or a marker that makes
// the read a corner case (1). After the last mismatch the rest of the read
// is copied from the consensus until the read length is reached.
//
// Interface: SU token stream (tok_*), verdict (vd_*) and indel length (il_*)
// handshakes, MBTA byte stream, consensus lookup port (cons_req/cons_addr in,
// cons_hit/cons_base back in the same cycle from the double registers), and
// the chunk output (out_valid/out_ready, CHUNK lanes of 8 bits, out_count
// valid lanes, out_last on the read's final chunk). fmt selects the output
// format and must be stable while a read set is decoded.
// Timing: one consensus base per cycle while copying; a mismatch costs its
// MBTA bits plus a few cycles of handshake; a full chunk waits for out_ready.
//
// Follows the paper: substitution/indel detection by comparison with the
// consensus, single insertion/deletion bit, indel signal to the SU, position-0
// corner-case marker with one MBTA bit, 150-base register, output formats.
// Own choices: the order of MBTA fields, explicit inserted bases after the
// type bit, 3-bit bases for corner-case reads (the paper does not give the
// corner-case layout), and the handshakes.
// Reset is asynchronous and active low; it also disables the assertions at
// the end, which lint reports as a synchronous use of rst_n (no flop uses it so).
module sage_read_construction_unit
  import sage_pkg::*;
#(
  parameter int unsigned CHUNK = CHUNK_BASES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  fmt_t                  fmt,
  // tokens from the SU
  input  logic                  tok_valid,
  input  su_token_t             tok,
  output logic                  tok_ready,
  // verdict to the SU, indel length back
  output logic                  vd_valid,
  output logic                  vd_indel,
  input  logic                  vd_ready,
  input  logic                  il_valid,
  input  logic [INDEL_LEN_BITS-1:0] il_len,
  output logic                  il_ready,
  // MBTA byte stream
  input  logic                  mbta_valid,
  input  logic [7:0]            mbta_data,
  output logic                  mbta_ready,
  // consensus lookup
  output logic                  cons_req,
  output logic [POS_BITS-1:0]   cons_addr,
  input  logic                  cons_hit,
  input  logic [1:0]            cons_base,
  // reconstructed reads
  output logic                  out_valid,
  output logic [7:0]            out_data [CHUNK],
  output logic [7:0]            out_count,
  output logic                  out_last,
  input  logic                  out_ready,
  // event counters' strobes (one cycle each)
  output logic                  ev_sub,
  output logic                  ev_ins,
  output logic                  ev_del,
  output logic                  ev_corner
);

  typedef enum logic [3:0] {
    R_IDLE, R_NEXT, R_GAP, R_FLAG, R_BASE, R_CMP, R_TYPE, R_VD, R_IL,
    R_INS, R_TAIL, R_END
  } rstate_t;

  rstate_t               st_q;
  logic [POS_BITS-1:0]   cur_q;       // consensus cursor
  logic [LEN_BITS-1:0]   len_q;       // read length
  logic [LEN_BITS-1:0]   outn_q;      // bases emitted for this read
  logic [LEN_BITS-1:0]   mm_left_q;
  logic [LEN_BITS-1:0]   gap_q;
  logic                  first_q;     // first mismatch entry of the read
  logic                  gap0_q;      // current entry had a zero gap
  logic                  corner_q;
  logic [2:0]            mbase_q;
  logic                  indel_q;
  logic                  is_del_q;
  logic [INDEL_LEN_BITS-1:0] ins_left_q;
  logic [2:0]            chunk_q [CHUNK];
  logic [7:0]            cnt_q;       // bases in the chunk register
  logic                  pend_q;

  // MBTA bit reader
  logic                      mb_req, mb_done;
  logic [WIDTH_BITS-1:0]     mb_n;
  logic [2:0]                mb_val;
  logic                      mb_reads;

  sage_bitreader #(.FW(3)) u_mbta (.clk, .rst_n, .clear,
    .in_valid(mbta_valid), .in_data(mbta_data), .in_ready(mbta_ready),
    .rd_req(mb_req), .rd_n(mb_n), .rd_done(mb_done), .rd_val(mb_val));

  logic [WIDTH_BITS-1:0] base_bits;
  assign base_bits = corner_q ? WIDTH_BITS'(3) : WIDTH_BITS'(2);

  always_comb begin
    mb_reads = 1'b0;
    mb_n     = WIDTH_BITS'(1);
    unique case (st_q)
      R_FLAG: begin mb_reads = 1'b1; mb_n = WIDTH_BITS'(1); end
      R_BASE: begin mb_reads = 1'b1; mb_n = base_bits; end
      R_TYPE: begin mb_reads = 1'b1; mb_n = WIDTH_BITS'(1); end
      R_INS:  begin mb_reads = (ins_left_q != '0); mb_n = base_bits; end
      default: ;
    endcase
  end

  logic full;
  assign full = (cnt_q == 8'(CHUNK));

  // base emission requests
  logic       want_emit;
  logic [2:0] emit_base;
  logic       need_cons;
  always_comb begin
    want_emit = 1'b0;
    emit_base = {1'b0, cons_base};
    need_cons = 1'b0;
    unique case (st_q)
      R_GAP:  begin need_cons = (gap_q != '0); want_emit = need_cons && cons_hit; end
      R_TAIL: begin need_cons = (outn_q != len_q); want_emit = need_cons && cons_hit; end
      R_CMP:  begin need_cons = 1'b1;
                    want_emit = cons_hit && (mbase_q != {1'b0, cons_base});
                    emit_base = mbase_q; end
      R_INS:  begin want_emit = pend_q && mb_done;
                    emit_base = mb_val[2:0]; end
      default: ;
    endcase
  end

  logic emit;
  assign emit = want_emit && !full;

  // the MBTA read is only started when its result can be used
  assign mb_req = mb_reads && !pend_q && !(st_q == R_INS && full);

  assign cons_req  = need_cons;
  assign cons_addr = cur_q;

  assign tok_ready = (st_q == R_IDLE) || (st_q == R_NEXT && mm_left_q != '0);
  assign vd_valid  = (st_q == R_VD);
  assign vd_indel  = indel_q;
  assign il_ready  = (st_q == R_IL);

  // A full chunk is offered when the next base is ready to enter it. That
  // moment depends on a consensus hit, so the offer is held in out_hold_q
  // until it is taken: out_valid never drops while out_ready is low.
  logic out_hold_q;
  assign out_valid = (st_q == R_END) || (want_emit && full) ||
                     (st_q == R_INS && mb_reads && full) || out_hold_q;
  assign out_last  = (st_q == R_END);
  assign out_count = cnt_q;
  always_comb begin
    for (int i = 0; i < CHUNK; i++) out_data[i] = format_base(fmt, chunk_q[i]);
  end

  assign ev_sub    = (st_q == R_CMP) && emit;
  assign ev_ins    = (st_q == R_IL) && il_valid && !is_del_q;
  assign ev_del    = (st_q == R_IL) && il_valid && is_del_q;
  assign ev_corner = (st_q == R_FLAG) && pend_q && mb_done && mb_val[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= R_IDLE;
      cur_q      <= '0;
      len_q      <= '0;
      outn_q     <= '0;
      mm_left_q  <= '0;
      gap_q      <= '0;
      first_q    <= 1'b0;
      gap0_q     <= 1'b0;
      corner_q   <= 1'b0;
      mbase_q    <= '0;
      indel_q    <= 1'b0;
      is_del_q   <= 1'b0;
      ins_left_q <= '0;
      cnt_q      <= '0;
      pend_q     <= 1'b0;
      out_hold_q <= 1'b0;
      for (int i = 0; i < CHUNK; i++) chunk_q[i] <= '0;
    end else if (clear) begin
      st_q       <= R_IDLE;
      cnt_q      <= '0;
      pend_q     <= 1'b0;
      out_hold_q <= 1'b0;
    end else begin
      out_hold_q <= out_valid && !out_ready && (st_q != R_END);
      if (mb_req)  pend_q <= 1'b1;
      if (pend_q && mb_done) pend_q <= 1'b0;

      // chunk register: flush on acceptance, append on emission
      if (out_valid && out_ready) cnt_q <= '0;
      if (emit) begin
        chunk_q[cnt_q] <= emit_base;
        cnt_q          <= cnt_q + 8'd1;
        outn_q         <= outn_q + 1'b1;
      end

      unique case (st_q)
        R_IDLE: if (tok_valid && tok.kind == TOK_READ) begin
          cur_q     <= tok.pos;
          len_q     <= tok.len;
          mm_left_q <= tok.count;
          outn_q    <= '0;
          first_q   <= 1'b1;
          corner_q  <= 1'b0;
          st_q      <= R_NEXT;
        end

        R_NEXT: begin
          if (mm_left_q == '0) st_q <= R_TAIL;
          else if (tok_valid) begin
            gap_q     <= tok.gap;
            gap0_q    <= (tok.gap == '0);
            mm_left_q <= mm_left_q - 1'b1;
            st_q      <= R_GAP;
          end
        end

        R_GAP: begin
          if (gap_q == '0) st_q <= (first_q && gap0_q) ? R_FLAG : R_BASE;
          else if (emit) begin
            cur_q <= cur_q + 1'b1;
            gap_q <= gap_q - 1'b1;
          end
        end

        R_FLAG: if (pend_q && mb_done) begin
          first_q <= 1'b0;
          if (mb_val[0]) begin
            corner_q <= 1'b1;
            indel_q  <= 1'b0;
            st_q     <= R_VD;
          end else begin
            st_q <= R_BASE;
          end
        end

        R_BASE: if (pend_q && mb_done) begin
          first_q <= 1'b0;
          mbase_q <= mb_val[2:0];
          st_q    <= R_CMP;
        end

        R_CMP: if (cons_hit) begin
          if (mbase_q != {1'b0, cons_base}) begin
            if (emit) begin
              cur_q   <= cur_q + 1'b1;
              indel_q <= 1'b0;
              st_q    <= R_VD;
            end
          end else begin
            st_q <= R_TYPE;
          end
        end

        R_TYPE: if (pend_q && mb_done) begin
          is_del_q <= mb_val[0];
          indel_q  <= 1'b1;
          st_q     <= R_VD;
        end

        R_VD: if (vd_ready) st_q <= indel_q ? R_IL : R_NEXT;

        R_IL: if (il_valid) begin
          if (is_del_q) begin
            cur_q <= cur_q + POS_BITS'(il_len);
            st_q  <= R_NEXT;
          end else begin
            ins_left_q <= il_len;
            st_q       <= R_INS;
          end
        end

        R_INS: begin
          if (ins_left_q == '0) st_q <= R_NEXT;
          else if (emit) ins_left_q <= ins_left_q - 1'b1;
        end

        R_TAIL: begin
          if (outn_q == len_q) st_q <= R_END;
          else if (emit) cur_q <= cur_q + 1'b1;
        end

        R_END: if (out_ready) st_q <= R_IDLE;

        default: st_q <= R_IDLE;
      endcase
    end
  end

  // a mismatch token never arrives while the RCU waits for a new read
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   (st_q == R_IDLE && tok_valid) |-> tok.kind == TOK_READ);
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   out_valid && !out_ready |=> out_valid);

endmodule

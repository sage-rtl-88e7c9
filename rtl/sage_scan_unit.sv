// sage_scan_unit (SU): streams through the position guide arrays and position
// arrays of a SAGe read set and hands the decoded matching positions, mismatch
// counts, mismatch positions and indel lengths to the Read Construction Unit.
//
// How it works. After start, the SU first loads the read set's configuration
// in 8-bit chunks: the number of reads, a fixed read length (0 = each read
// carries its own 16-bit length in the MPA) and three association tables
// (matching-position widths, mismatch-count widths, mismatch-position widths;
// 1..8 classes each). A table with K classes is addressed by a prefix code
// in the guide array: class i is written as i ones followed by a zero
// (0, 10, 110, 1110, ... as in the paper); a one-class table uses no prefix
// bits at all. Then, for every read:
//   1. MPGA prefix -> width w, w bits of MPA -> delta; position = last + delta
//   2. (variable-length mode) 16 bits of MPA -> read length
//   3. MMPGA prefix -> width w, w bits of MMPGA -> mismatch count
//   4. token TOK_READ {pos, len, count} to the RCU
//   5. per mismatch: MMPGA prefix -> width w, w bits of MMPA -> gap; token
//      TOK_MM; wait for the RCU's verdict; on an indel read one MMPGA bit
//      (0: length 1, 1: eight MMPA bits hold the length) and return the length.
// The mismatch counter is decremented per decoded mismatch and a new count is
// read when it reaches zero, as the paper's operation steps describe.
//
// Interface: five byte streams (cfg, mpga, mpa, mmpga, mmpa; valid/ready),
// token stream to the RCU (tok_valid/tok_ready), verdict in (vd_valid/
// vd_ready/vd_indel), indel length out (il_valid/il_ready/il_len).
// Timing: bit-serial, one array bit per cycle per stream; a field of n bits
// costs n+1 cycles. Two streams are read in parallel only across states, not
// within one, which keeps the unit to one small FSM.
//
// Follows the paper: arrays, guide arrays, prefix codes, association tables,
// 1-bit short/long indel flag in the guide array and 8-bit long indel length,
// mismatch count held in the guide array. Own choices: the configuration
// byte layout, field widths up to 16 bits, gap (not absolute) mismatch
// positions, and the valid/ready handshakes.
// Reset is asynchronous and active low; it also disables the assertions at
// the end, which lint reports as a synchronous use of rst_n (no flop uses it so).
module sage_scan_unit
  import sage_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,       // abandon state, new command
  input  logic                 start,       // begin configuration + decoding
  // byte streams
  input  logic                 cfg_valid,
  input  logic [7:0]           cfg_data,
  output logic                 cfg_ready,
  input  logic                 mpga_valid,
  input  logic [7:0]           mpga_data,
  output logic                 mpga_ready,
  input  logic                 mpa_valid,
  input  logic [7:0]           mpa_data,
  output logic                 mpa_ready,
  input  logic                 mmpga_valid,
  input  logic [7:0]           mmpga_data,
  output logic                 mmpga_ready,
  input  logic                 mmpa_valid,
  input  logic [7:0]           mmpa_data,
  output logic                 mmpa_ready,
  // status
  output logic                 cfg_done,
  output logic [31:0]          num_reads,
  output logic                 su_done,
  // to / from the RCU
  output logic                 tok_valid,
  output su_token_t            tok,
  input  logic                 tok_ready,
  input  logic                 vd_valid,
  input  logic                 vd_indel,
  output logic                 vd_ready,
  output logic                 il_valid,
  output logic [INDEL_LEN_BITS-1:0] il_len,
  input  logic                 il_ready
);

  typedef enum logic [4:0] {
    S_IDLE, S_CFG, S_READ, S_MP_CODE, S_MP_VAL, S_LEN_VAL, S_CNT_CODE,
    S_CNT_VAL, S_SEND_READ, S_MM_NEXT, S_MM_CODE, S_MM_VAL, S_SEND_MM,
    S_WAIT_VD, S_IL_FLAG, S_IL_VAL, S_SEND_IL, S_DONE
  } state_t;

  typedef enum logic [1:0] { R_MPGA, R_MPA, R_MMPGA, R_MMPA } rsel_t;

  localparam int unsigned T_MP = 0, T_CNT = 1, T_MM = 2;

  state_t state_q;

  // configuration
  logic [31:0]           num_reads_q;
  logic [LEN_BITS-1:0]   read_len_q;
  logic [3:0]            k_q   [3];
  logic [WIDTH_BITS-1:0] w_q   [3][MAX_CLASSES];
  logic [1:0]            cfg_tab_q;     // table being loaded
  logic [3:0]            cfg_idx_q;     // entry within table, 0 = class count byte
  logic [2:0]            cfg_hdr_q;     // header byte counter (0..5)
  logic                  cfg_in_hdr_q;

  // decoding state
  logic [31:0]           reads_left_q;
  logic [POS_BITS-1:0]   pos_q;
  logic [LEN_BITS-1:0]   len_q;
  logic [LEN_BITS-1:0]   mm_left_q;
  logic [LEN_BITS-1:0]   gap_q;
  logic [3:0]            cls_q;
  logic [INDEL_LEN_BITS-1:0] il_q;
  logic                  pend_q;

  // bit readers
  logic                      rd_req   [4];
  logic [WIDTH_BITS-1:0]     rd_n;
  logic                      rd_done  [4];
  logic [MAX_FIELD_BITS-1:0] rd_val   [4];

  sage_bitreader u_mpga (.clk, .rst_n, .clear,
    .in_valid(mpga_valid), .in_data(mpga_data), .in_ready(mpga_ready),
    .rd_req(rd_req[R_MPGA]), .rd_n, .rd_done(rd_done[R_MPGA]), .rd_val(rd_val[R_MPGA]));
  sage_bitreader u_mpa (.clk, .rst_n, .clear,
    .in_valid(mpa_valid), .in_data(mpa_data), .in_ready(mpa_ready),
    .rd_req(rd_req[R_MPA]), .rd_n, .rd_done(rd_done[R_MPA]), .rd_val(rd_val[R_MPA]));
  sage_bitreader u_mmpga (.clk, .rst_n, .clear,
    .in_valid(mmpga_valid), .in_data(mmpga_data), .in_ready(mmpga_ready),
    .rd_req(rd_req[R_MMPGA]), .rd_n, .rd_done(rd_done[R_MMPGA]), .rd_val(rd_val[R_MMPGA]));
  sage_bitreader u_mmpa (.clk, .rst_n, .clear,
    .in_valid(mmpa_valid), .in_data(mmpa_data), .in_ready(mmpa_ready),
    .rd_req(rd_req[R_MMPA]), .rd_n, .rd_done(rd_done[R_MMPA]), .rd_val(rd_val[R_MMPA]));

  // which reader and how many bits the current state reads
  rsel_t cur_sel;
  logic  cur_reads;
  always_comb begin
    cur_sel   = R_MPGA;
    cur_reads = 1'b1;
    rd_n      = WIDTH_BITS'(1);
    unique case (state_q)
      S_MP_CODE:  begin cur_sel = R_MPGA;  rd_n = WIDTH_BITS'(1); end
      S_MP_VAL:   begin cur_sel = R_MPA;   rd_n = w_q[T_MP][cls_q[2:0]]; end
      S_LEN_VAL:  begin cur_sel = R_MPA;   rd_n = WIDTH_BITS'(LEN_BITS); end
      S_CNT_CODE: begin cur_sel = R_MMPGA; rd_n = WIDTH_BITS'(1); end
      S_CNT_VAL:  begin cur_sel = R_MMPGA; rd_n = w_q[T_CNT][cls_q[2:0]]; end
      S_MM_CODE:  begin cur_sel = R_MMPGA; rd_n = WIDTH_BITS'(1); end
      S_MM_VAL:   begin cur_sel = R_MMPA;  rd_n = w_q[T_MM][cls_q[2:0]]; end
      S_IL_FLAG:  begin cur_sel = R_MMPGA; rd_n = WIDTH_BITS'(1); end
      S_IL_VAL:   begin cur_sel = R_MMPA;  rd_n = WIDTH_BITS'(INDEL_LEN_BITS); end
      default:    cur_reads = 1'b0;
    endcase
  end

  always_comb begin
    for (int i = 0; i < 4; i++) rd_req[i] = 1'b0;
    rd_req[cur_sel] = cur_reads && !pend_q;
  end

  logic                      f_done;
  logic [MAX_FIELD_BITS-1:0] f_val;
  assign f_done = cur_reads && pend_q && rd_done[cur_sel];
  assign f_val  = rd_val[cur_sel];

  assign cfg_ready = (state_q == S_CFG);
  assign cfg_done  = (state_q != S_IDLE) && (state_q != S_CFG);
  assign num_reads = num_reads_q;
  assign su_done   = (state_q == S_DONE);
  assign tok_valid = (state_q == S_SEND_READ) || (state_q == S_SEND_MM);
  assign vd_ready  = (state_q == S_WAIT_VD);
  assign il_valid  = (state_q == S_SEND_IL);
  assign il_len    = il_q;

  always_comb begin
    tok       = '0;
    tok.kind  = (state_q == S_SEND_MM) ? TOK_MM : TOK_READ;
    tok.pos   = pos_q;
    tok.len   = len_q;
    tok.count = mm_left_q;
    tok.gap   = gap_q;
  end

  // state entry for a prefix code: a one-class table has no prefix bits
  function automatic state_t code_or_val(logic [3:0] k, state_t code_s, state_t val_s);
    return (k <= 4'd1) ? val_s : code_s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      num_reads_q  <= '0;
      read_len_q   <= '0;
      for (int t = 0; t < 3; t++) begin
        k_q[t] <= 4'd1;
        for (int c = 0; c < MAX_CLASSES; c++) w_q[t][c] <= '0;
      end
      cfg_tab_q    <= '0;
      cfg_idx_q    <= '0;
      cfg_hdr_q    <= '0;
      cfg_in_hdr_q <= 1'b1;
      reads_left_q <= '0;
      pos_q        <= '0;
      len_q        <= '0;
      mm_left_q    <= '0;
      gap_q        <= '0;
      cls_q        <= '0;
      il_q         <= '0;
      pend_q       <= 1'b0;
    end else if (clear) begin
      state_q <= S_IDLE;
      pend_q  <= 1'b0;
    end else begin
      if (cur_reads && !pend_q) pend_q <= 1'b1;
      if (f_done)               pend_q <= 1'b0;

      unique case (state_q)
        S_IDLE: if (start) begin
          state_q      <= S_CFG;
          cfg_tab_q    <= '0;
          cfg_idx_q    <= '0;
          cfg_hdr_q    <= '0;
          cfg_in_hdr_q <= 1'b1;
          pos_q        <= '0;
        end

        // configuration: 4 bytes read count, 2 bytes read length, then per
        // table one class-count byte followed by one width byte per class
        S_CFG: if (cfg_valid) begin
          if (cfg_in_hdr_q) begin
            if (cfg_hdr_q < 3'd4) num_reads_q <= {num_reads_q[23:0], cfg_data};
            else                  read_len_q  <= {read_len_q[7:0], cfg_data};
            cfg_hdr_q <= cfg_hdr_q + 3'd1;
            if (cfg_hdr_q == 3'd5) cfg_in_hdr_q <= 1'b0;
          end else if (cfg_idx_q == '0) begin
            k_q[cfg_tab_q] <= (cfg_data[3:0] == '0) ? 4'd1 :
                              (cfg_data[3:0] > 4'(MAX_CLASSES)) ? 4'(MAX_CLASSES) : cfg_data[3:0];
            cfg_idx_q <= 4'd1;
          end else begin
            w_q[cfg_tab_q][cfg_idx_q[2:0] - 3'd1] <=
              (cfg_data > 8'(MAX_FIELD_BITS)) ? WIDTH_BITS'(MAX_FIELD_BITS) : cfg_data[WIDTH_BITS-1:0];
            if (cfg_idx_q == k_q[cfg_tab_q]) begin
              cfg_idx_q <= '0;
              if (cfg_tab_q == 2'd2) begin
                state_q      <= S_READ;
                reads_left_q <= num_reads_q;
              end
              cfg_tab_q <= cfg_tab_q + 2'd1;
            end else begin
              cfg_idx_q <= cfg_idx_q + 4'd1;
            end
          end
        end

        S_READ: begin
          cls_q <= '0;
          if (reads_left_q == '0) state_q <= S_DONE;
          else                    state_q <= code_or_val(k_q[T_MP], S_MP_CODE, S_MP_VAL);
        end

        S_MP_CODE: if (f_done) begin
          if (f_val[0] && (cls_q < k_q[T_MP] - 4'd1)) cls_q <= cls_q + 4'd1;
          else if (!f_val[0]) state_q <= S_MP_VAL;
        end

        S_MP_VAL: if (f_done) begin
          pos_q   <= pos_q + POS_BITS'(f_val);
          len_q   <= read_len_q;
          cls_q   <= '0;
          state_q <= (read_len_q == '0) ? S_LEN_VAL
                                        : code_or_val(k_q[T_CNT], S_CNT_CODE, S_CNT_VAL);
        end

        S_LEN_VAL: if (f_done) begin
          len_q   <= f_val;
          state_q <= code_or_val(k_q[T_CNT], S_CNT_CODE, S_CNT_VAL);
        end

        S_CNT_CODE: if (f_done) begin
          if (f_val[0] && (cls_q < k_q[T_CNT] - 4'd1)) cls_q <= cls_q + 4'd1;
          else if (!f_val[0]) state_q <= S_CNT_VAL;
        end

        S_CNT_VAL: if (f_done) begin
          mm_left_q <= f_val;
          state_q   <= S_SEND_READ;
        end

        S_SEND_READ: if (tok_ready) begin
          reads_left_q <= reads_left_q - 32'd1;
          state_q      <= S_MM_NEXT;
        end

        S_MM_NEXT: begin
          cls_q <= '0;
          if (mm_left_q == '0) state_q <= S_READ;
          else                 state_q <= code_or_val(k_q[T_MM], S_MM_CODE, S_MM_VAL);
        end

        S_MM_CODE: if (f_done) begin
          if (f_val[0] && (cls_q < k_q[T_MM] - 4'd1)) cls_q <= cls_q + 4'd1;
          else if (!f_val[0]) state_q <= S_MM_VAL;
        end

        S_MM_VAL: if (f_done) begin
          gap_q   <= f_val;
          state_q <= S_SEND_MM;
        end

        S_SEND_MM: if (tok_ready) begin
          mm_left_q <= mm_left_q - 1'b1;
          state_q   <= S_WAIT_VD;
        end

        S_WAIT_VD: if (vd_valid) begin
          state_q <= vd_indel ? S_IL_FLAG : S_MM_NEXT;
        end

        S_IL_FLAG: if (f_done) begin
          il_q    <= INDEL_LEN_BITS'(1);
          state_q <= f_val[0] ? S_IL_VAL : S_SEND_IL;
        end

        S_IL_VAL: if (f_done) begin
          il_q    <= f_val[INDEL_LEN_BITS-1:0];
          state_q <= S_SEND_IL;
        end

        S_SEND_IL: if (il_ready) state_q <= S_MM_NEXT;

        S_DONE: ;

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // handshake rules: a token is held stable until it is taken
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   tok_valid && !tok_ready |=> tok_valid && $stable(tok));
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   il_valid && !il_ready |=> il_valid && $stable(il_len));

endmodule

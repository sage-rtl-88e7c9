// sage_double_reg: the two 64-bit registers that double-buffer the consensus
// sequence arriving from flash (or host memory) for the Read Construction Unit.
//
// How it works. The consensus is stored 2 bits per base, 32 bases per 64-bit
// word, base i of a word in bits [2i+1:2i]. Each register holds one word and
// its word address. A lookup that finds its word in either register is
// answered in the same cycle. When the RCU works out of one register and the
// other does not hold the next word, the next word is requested at once, so
// sequential scanning of the consensus sees no gaps: one register is the
// computation input, the other receives the following chunk. A lookup that
// misses both registers (a new read starting behind the cursor, or a jump)
// requests its word into the register not in use and waits. One request is
// outstanding at a time.
//
// Interface: lookup (req/addr in, hit/base out, combinational); word request
// (fetch_valid/fetch_addr out, held until fetch_ready) and word response
// (word_valid/word_data, one per accepted request, any latency).
// Timing: hit in the cycle of the lookup; a miss costs one request plus the
// memory's latency.
//
// Follows the paper: two 64-bit registers per channel, one consumed while the
// next chunk arrives (integration mode 3). Own choice: they buffer the
// consensus, whose sequential scan is the stream they suit, and the tag /
// prefetch policy.
// Reset is asynchronous and active low; it also disables the assertions at
// the end, which lint reports as a synchronous use of rst_n (no flop uses it so).
module sage_double_reg
  import sage_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  // lookup
  input  logic                req,
  input  logic [POS_BITS-1:0] addr,
  output logic                hit,
  output logic [1:0]          base,
  // word request / response
  output logic                fetch_valid,
  output logic [POS_BITS-6:0] fetch_addr,
  input  logic                fetch_ready,
  input  logic                word_valid,
  input  logic [DREG_BITS-1:0] word_data
);

  localparam int unsigned OB = $clog2(BASES_PER_WORD);  // base offset bits
  localparam int unsigned WA = POS_BITS - OB;           // word address bits

  logic [DREG_BITS-1:0] reg_q  [2];
  logic [WA-1:0]        tag_q  [2];
  logic                 val_q  [2];
  logic                 cur_q;                 // register last used
  logic                 req_q;                 // request waiting for fetch_ready
  logic                 wait_q;                // response outstanding
  logic                 slot_q;                // register being filled
  logic [WA-1:0]        ftag_q;

  logic [WA-1:0] waddr;
  logic [OB-1:0] off;
  logic          h0, h1;
  assign waddr = addr[POS_BITS-1:OB];
  assign off   = addr[OB-1:0];
  assign h0    = val_q[0] && (tag_q[0] == waddr);
  assign h1    = val_q[1] && (tag_q[1] == waddr);
  assign hit   = req && (h0 || h1);

  logic [DREG_BITS-1:0] word;
  assign word = h1 ? reg_q[1] : reg_q[0];
  assign base = word[{off, 1'b0} +: 2];

  assign fetch_valid = req_q;
  assign fetch_addr  = ftag_q;

  // next request: demand miss first, otherwise prefetch of the next word
  logic          busy;
  logic          hslot;
  logic          other;
  logic          do_miss, do_pref;
  logic [WA-1:0] nxt;
  assign busy    = req_q || wait_q;
  assign hslot   = h1;
  assign other   = ~hslot;
  assign nxt     = waddr + 1'b1;
  assign do_miss = !busy && req && !h0 && !h1;
  assign do_pref = !busy && hit && !(val_q[other] && tag_q[other] == nxt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) begin
        reg_q[i] <= '0;
        tag_q[i] <= '0;
        val_q[i] <= 1'b0;
      end
      cur_q  <= 1'b0;
      req_q  <= 1'b0;
      wait_q <= 1'b0;
      slot_q <= 1'b0;
      ftag_q <= '0;
    end else if (clear) begin
      val_q[0] <= 1'b0;
      val_q[1] <= 1'b0;
      req_q    <= 1'b0;
      wait_q   <= 1'b0;
    end else begin
      if (hit) cur_q <= hslot;
      if (do_miss) begin
        req_q           <= 1'b1;
        slot_q          <= ~cur_q;
        ftag_q          <= waddr;
        val_q[~cur_q]   <= 1'b0;
      end else if (do_pref) begin
        req_q           <= 1'b1;
        slot_q          <= other;
        ftag_q          <= nxt;
        val_q[other]    <= 1'b0;
      end
      if (req_q && fetch_ready) begin
        req_q  <= 1'b0;
        wait_q <= 1'b1;
      end
      if (wait_q && word_valid) begin
        wait_q         <= 1'b0;
        reg_q[slot_q]  <= word_data;
        tag_q[slot_q]  <= ftag_q;
        val_q[slot_q]  <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   fetch_valid && !fetch_ready |=> fetch_valid && $stable(fetch_addr));

endmodule

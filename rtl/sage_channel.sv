// sage_channel: the SAGe decompression hardware of one storage channel.
//
// The compressed read set is partitioned across channels (each channel holds
// one slice of the consensus and the mismatch information of the reads that
// map to it), so every channel runs one independent copy of this block.
// It wires together the Control Unit (command, start, completion), the Scan
// Unit (association tables, matching positions, mismatch counts and
// positions, indel lengths), the Read Construction Unit (bases and types,
// consensus scan, read assembly and formatting) and the double registers that
// buffer the consensus.
//
// Interface: one command port; six byte streams, one per array (cfg, mpga,
// mpa, mmpga, mmpa, mbta), each valid/ready; a consensus word request /
// response port; the read-chunk output; status (busy, done, reads_out) and
// one-cycle event strobes for substitutions, insertions, deletions and
// corner-case reads. The byte streams come from the flash controller or the
// host interface, which are outside this design.
// Timing: see the units; reads leave in chunks of up to CHUNK bases.
module sage_channel
  import sage_pkg::*;
#(
  parameter int unsigned CHUNK = CHUNK_BASES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 cmd_valid,
  input  cmd_op_t              cmd_op,
  input  fmt_t                 cmd_fmt,
  output logic                 cmd_ready,
  // array byte streams
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
  input  logic                 mbta_valid,
  input  logic [7:0]           mbta_data,
  output logic                 mbta_ready,
  // consensus words
  output logic                 cons_fetch_valid,
  output logic [POS_BITS-6:0]  cons_fetch_addr,
  input  logic                 cons_fetch_ready,
  input  logic                 cons_word_valid,
  input  logic [DREG_BITS-1:0] cons_word_data,
  // reconstructed reads
  output logic                 out_valid,
  output logic [7:0]           out_data [CHUNK],
  output logic [7:0]           out_count,
  output logic                 out_last,
  input  logic                 out_ready,
  // status
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          reads_out,
  output logic                 ev_sub,
  output logic                 ev_ins,
  output logic                 ev_del,
  output logic                 ev_corner
);

  logic        clear, su_start;
  fmt_t        fmt;
  logic        su_cfg_done, su_done;
  logic [31:0] su_num_reads;

  logic        tok_valid, tok_ready;
  su_token_t   tok;
  logic        vd_valid, vd_indel, vd_ready;
  logic        il_valid, il_ready;
  logic [INDEL_LEN_BITS-1:0] il_len;

  logic                cons_req, cons_hit;
  logic [POS_BITS-1:0] cons_addr;
  logic [1:0]          cons_base;

  logic read_out;
  assign read_out = out_valid && out_ready && out_last;

  sage_control_unit u_cu (
    .clk, .rst_n,
    .cmd_valid, .cmd_op, .cmd_fmt, .cmd_ready,
    .clear, .su_start, .fmt,
    .su_cfg_done, .su_num_reads, .su_done, .read_out,
    .busy, .done, .reads_out
  );

  sage_scan_unit u_su (
    .clk, .rst_n, .clear, .start(su_start),
    .cfg_valid, .cfg_data, .cfg_ready,
    .mpga_valid, .mpga_data, .mpga_ready,
    .mpa_valid, .mpa_data, .mpa_ready,
    .mmpga_valid, .mmpga_data, .mmpga_ready,
    .mmpa_valid, .mmpa_data, .mmpa_ready,
    .cfg_done(su_cfg_done), .num_reads(su_num_reads), .su_done,
    .tok_valid, .tok, .tok_ready,
    .vd_valid, .vd_indel, .vd_ready,
    .il_valid, .il_len, .il_ready
  );

  sage_read_construction_unit #(.CHUNK(CHUNK)) u_rcu (
    .clk, .rst_n, .clear, .fmt,
    .tok_valid, .tok, .tok_ready,
    .vd_valid, .vd_indel, .vd_ready,
    .il_valid, .il_len, .il_ready,
    .mbta_valid, .mbta_data, .mbta_ready,
    .cons_req, .cons_addr, .cons_hit, .cons_base,
    .out_valid, .out_data, .out_count, .out_last, .out_ready,
    .ev_sub, .ev_ins, .ev_del, .ev_corner
  );

  sage_double_reg u_dreg (
    .clk, .rst_n, .clear,
    .req(cons_req), .addr(cons_addr), .hit(cons_hit), .base(cons_base),
    .fetch_valid(cons_fetch_valid), .fetch_addr(cons_fetch_addr),
    .fetch_ready(cons_fetch_ready),
    .word_valid(cons_word_valid), .word_data(cons_word_data)
  );

endmodule

// sage_top: SAGe decompression hardware for a multi-channel SSD, one
// independent sage_channel per flash channel (eight by default, the SSD the
// paper sizes its area and power for).
//
// SAGe's data layout places each partition of the consensus, together with
// the compressed mismatch information of the reads mapped to it, in its own
// channel, so channels never exchange data: this module only replicates the
// channel and fans one read command out to all of them. Per-channel ports are
// arrays indexed by channel. done rises when every channel has finished.
//
// Interface: command (broadcast, accepted when every channel is ready); per
// channel: six array byte streams, consensus word port, read-chunk output,
// status and event strobes. The flash controllers, the host interface and
// the analysis accelerator that consumes the reads are outside this design.
// Timing: that of sage_channel, per channel, all channels in parallel.
module sage_top
  import sage_pkg::*;
#(
  parameter int unsigned NUM_CH = 8,
  parameter int unsigned CHUNK  = CHUNK_BASES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  cmd_op_t              cmd_op,
  input  fmt_t                 cmd_fmt,
  output logic                 cmd_ready,
  input  logic [NUM_CH-1:0]    cfg_valid,
  input  logic [7:0]           cfg_data   [NUM_CH],
  output logic [NUM_CH-1:0]    cfg_ready,
  input  logic [NUM_CH-1:0]    mpga_valid,
  input  logic [7:0]           mpga_data  [NUM_CH],
  output logic [NUM_CH-1:0]    mpga_ready,
  input  logic [NUM_CH-1:0]    mpa_valid,
  input  logic [7:0]           mpa_data   [NUM_CH],
  output logic [NUM_CH-1:0]    mpa_ready,
  input  logic [NUM_CH-1:0]    mmpga_valid,
  input  logic [7:0]           mmpga_data [NUM_CH],
  output logic [NUM_CH-1:0]    mmpga_ready,
  input  logic [NUM_CH-1:0]    mmpa_valid,
  input  logic [7:0]           mmpa_data  [NUM_CH],
  output logic [NUM_CH-1:0]    mmpa_ready,
  input  logic [NUM_CH-1:0]    mbta_valid,
  input  logic [7:0]           mbta_data  [NUM_CH],
  output logic [NUM_CH-1:0]    mbta_ready,
  output logic [NUM_CH-1:0]    cons_fetch_valid,
  output logic [POS_BITS-6:0]  cons_fetch_addr [NUM_CH],
  input  logic [NUM_CH-1:0]    cons_fetch_ready,
  input  logic [NUM_CH-1:0]    cons_word_valid,
  input  logic [DREG_BITS-1:0] cons_word_data [NUM_CH],
  output logic [NUM_CH-1:0]    out_valid,
  output logic [7:0]           out_data  [NUM_CH][CHUNK],
  output logic [7:0]           out_count [NUM_CH],
  output logic [NUM_CH-1:0]    out_last,
  input  logic [NUM_CH-1:0]    out_ready,
  output logic [NUM_CH-1:0]    ch_busy,
  output logic [NUM_CH-1:0]    ch_done,
  output logic [31:0]          reads_out [NUM_CH],
  output logic [NUM_CH-1:0]    ev_sub,
  output logic [NUM_CH-1:0]    ev_ins,
  output logic [NUM_CH-1:0]    ev_del,
  output logic [NUM_CH-1:0]    ev_corner,
  output logic                 done
);

  logic [NUM_CH-1:0] ch_cmd_ready;
  assign cmd_ready = &ch_cmd_ready;
  assign done      = &ch_done;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    sage_channel #(.CHUNK(CHUNK)) u_ch (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && cmd_ready), .cmd_op, .cmd_fmt,
      .cmd_ready(ch_cmd_ready[c]),
      .cfg_valid(cfg_valid[c]),     .cfg_data(cfg_data[c]),     .cfg_ready(cfg_ready[c]),
      .mpga_valid(mpga_valid[c]),   .mpga_data(mpga_data[c]),   .mpga_ready(mpga_ready[c]),
      .mpa_valid(mpa_valid[c]),     .mpa_data(mpa_data[c]),     .mpa_ready(mpa_ready[c]),
      .mmpga_valid(mmpga_valid[c]), .mmpga_data(mmpga_data[c]), .mmpga_ready(mmpga_ready[c]),
      .mmpa_valid(mmpa_valid[c]),   .mmpa_data(mmpa_data[c]),   .mmpa_ready(mmpa_ready[c]),
      .mbta_valid(mbta_valid[c]),   .mbta_data(mbta_data[c]),   .mbta_ready(mbta_ready[c]),
      .cons_fetch_valid(cons_fetch_valid[c]), .cons_fetch_addr(cons_fetch_addr[c]),
      .cons_fetch_ready(cons_fetch_ready[c]),
      .cons_word_valid(cons_word_valid[c]), .cons_word_data(cons_word_data[c]),
      .out_valid(out_valid[c]), .out_data(out_data[c]), .out_count(out_count[c]),
      .out_last(out_last[c]), .out_ready(out_ready[c]),
      .busy(ch_busy[c]), .done(ch_done[c]), .reads_out(reads_out[c]),
      .ev_sub(ev_sub[c]), .ev_ins(ev_ins[c]), .ev_del(ev_del[c]), .ev_corner(ev_corner[c])
    );
  end

endmodule

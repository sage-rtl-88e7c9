// sage_bitreader: reads bit fields of 0..FW bits (FW = 16 by default), MSB first, out of a byte
// stream. It is the streaming front end of every SAGe array (guide arrays,
// position arrays and the base/type array).
//
// How it works: one 8-bit register holds the current byte of the array (the
// paper sizes each array buffer at eight bits, the widest element its own
// encoding uses). Bits leave the register one per cycle into an accumulator;
// a new byte is accepted in the cycle the last bit of the previous one is
// taken, so an array is read without bubbles as long as bytes keep arriving.
// Bytes are only pulled while a field is pending, never ahead of a command.
//
// Interface: byte stream in (in_valid / in_data / in_ready, a byte moves when
// valid and ready are both high). Field request: pulse rd_req with rd_n; the
// reader answers with rd_done high for one cycle and the value, right-aligned,
// on rd_val. A new request may be issued in the cycle rd_done is high. clear
// drops any buffered bits (start of a new read set).
//
// Timing: an n-bit field costs n+1 cycles from the request to rd_done when the
// stream does not stall, plus one cycle if the byte register was empty at the
// request (the previous field ended on a byte edge); a 0-bit field returns 0
// one cycle after the request.
// Bit-serial extraction is this design's choice; the paper only says the
// arrays are decoded with simple operations and streaming accesses.
// Reset is asynchronous and active low; it also disables the assertions at
// the end, which lint reports as a synchronous use of rst_n (no flop uses it so).
module sage_bitreader
  import sage_pkg::*;
#(
  parameter int unsigned FW = MAX_FIELD_BITS   // widest field read
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  // byte stream
  input  logic                       in_valid,
  input  logic [REG_BITS-1:0]        in_data,
  output logic                       in_ready,
  // field request
  input  logic                       rd_req,
  input  logic [WIDTH_BITS-1:0]      rd_n,
  output logic                       rd_done,
  output logic [FW-1:0]              rd_val
);

  logic [REG_BITS-1:0]       buf_q;
  logic [3:0]                cnt_q;
  logic                      busy_q;
  logic [WIDTH_BITS-1:0]     rem_q;
  logic [FW-1:0]             acc_q;

  logic take;
  logic start;

  assign rd_done  = busy_q && (rem_q == '0);
  assign rd_val   = acc_q;
  assign take     = busy_q && (rem_q != '0) && (cnt_q != '0);
  assign start    = rd_req && (!busy_q || rd_done);
  // bytes are only pulled while a field is being read, so nothing is buffered
  // ahead of a command (clear would otherwise drop it)
  assign in_ready = !clear && busy_q && (rem_q != '0) &&
                    ((cnt_q == '0) || (cnt_q == 4'd1 && take));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      cnt_q  <= '0;
      busy_q <= 1'b0;
      rem_q  <= '0;
      acc_q  <= '0;
    end else if (clear) begin
      buf_q  <= '0;
      cnt_q  <= '0;
      busy_q <= 1'b0;
      rem_q  <= '0;
      acc_q  <= '0;
    end else begin
      // byte register
      if (in_valid && in_ready) begin
        buf_q <= in_data;
        cnt_q <= 4'd8;
      end else if (take) begin
        buf_q <= {buf_q[REG_BITS-2:0], 1'b0};
        cnt_q <= cnt_q - 4'd1;
      end
      // field accumulator
      if (start) begin
        busy_q <= 1'b1;
        rem_q  <= rd_n;
        acc_q  <= '0;
      end else if (rd_done) begin
        busy_q <= 1'b0;
      end else if (take) begin
        acc_q <= {acc_q[FW-2:0], buf_q[REG_BITS-1]};
        rem_q <= rem_q - 1'b1;
      end
    end
  end

  // A field never asks for more bits than the accumulator holds.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> rd_n <= WIDTH_BITS'(FW));

endmodule

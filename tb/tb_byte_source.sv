// tb_byte_source: drives one SAGe array byte stream from the shared test data
// (sage_tb_pkg::streams[CH][SID]) with random idle cycles, obeying valid/ready:
// a byte, once offered, stays on the bus until it is taken.
module tb_byte_source
  import sage_tb_pkg::*;
#(
  parameter int CH  = 0,
  parameter int SID = 0,
  parameter int STALL_PCT = 20
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       valid,
  output logic [7:0] data,
  input  logic       ready
);
  int sent;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      data  <= '0;
      sent  <= 0;
    end else begin
      if (!valid || ready) begin
        if (valid) sent <= sent + 1;
        if (streams[CH][SID].size() != 0 && $urandom_range(99) >= STALL_PCT) begin
          valid <= 1'b1;
          data  <= streams[CH][SID].pop_front();
        end else begin
          valid <= 1'b0;
        end
      end
    end
  end
endmodule

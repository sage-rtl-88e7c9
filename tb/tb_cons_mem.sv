// tb_cons_mem: behavioural model of the memory that holds the consensus words
// of one channel (flash page buffer or host memory). Accepts one word request
// at a time and answers after 1..MAX_LAT cycles from sage_tb_pkg::cons_words.
module tb_cons_mem
  import sage_tb_pkg::*;
#(
  parameter int CH = 0,
  parameter int MAX_LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fetch_valid,
  input  logic [26:0] fetch_addr,
  output logic        fetch_ready,
  output logic        word_valid,
  output logic [63:0] word_data
);
  int   lat;
  logic busy;
  logic [26:0] a;
  int   fetches;
  assign fetch_ready = !busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; word_valid <= 1'b0; word_data <= '0; lat <= 0; a <= '0; fetches <= 0;
    end else begin
      word_valid <= 1'b0;
      if (!busy && fetch_valid) begin
        busy <= 1'b1; a <= fetch_addr; lat <= $urandom_range(MAX_LAT, 1); fetches <= fetches + 1;
      end else if (busy) begin
        if (lat <= 1) begin
          busy       <= 1'b0;
          word_valid <= 1'b1;
          word_data  <= (int'(a) < cons_words[CH].size()) ? cons_words[CH][a] : 64'd0;
        end else lat <= lat - 1;
      end
    end
  end
endmodule

// tb_sage_bitreader: checks the array bit reader on its own. A random bit
// string is packed MSB first into bytes and streamed in with random stalls;
// the testbench asks for random field widths (0..16 bits, back-to-back
// requests issued in the rd_done cycle as well as after idle gaps) and
// compares every returned value with the bits of the string. It also checks
// the timing promise (an n-bit field takes n+1 cycles when bytes are waiting,
// one more when the byte register is empty at the request)
// and that clear drops buffered bits so a new stream starts on a byte edge.
// No ports; 10 ns clock, reset for three cycles. The 8-bit array register
// follows the published design; the field request protocol is this design's own.
module tb_sage_bitreader;
  import sage_pkg::*;
  import sage_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear;
  logic in_valid, in_ready;
  logic [7:0] in_data;
  logic rd_req, rd_done;
  logic [WIDTH_BITS-1:0] rd_n;
  logic [MAX_FIELD_BITS-1:0] rd_val;

  sage_bitreader dut (.clk, .rst_n, .clear, .in_valid, .in_data, .in_ready,
    .rd_req, .rd_n, .rd_done, .rd_val);

  int stall = 30;
  // byte source with adjustable stall rate (registered outputs)
  bit src_en = 1'b0;
  always @(posedge clk) begin
    if (!src_en) in_valid <= 1'b0;
    else if (!in_valid || in_ready) begin
      if ($urandom_range(99) >= stall && streams[0][0].size() > 0) begin
        in_valid <= 1'b1;
        in_data  <= streams[0][0].pop_front();
      end else in_valid <= 1'b0;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  bit bits [$];
  int bp;

  task automatic make(int nbits);
    bit [7:0] b;
    src_en = 1'b0;
    repeat (2) @(posedge clk);
    bits.delete(); streams[0][0].delete(); bp = 0;
    for (int i = 0; i < nbits; i++) bits.push_back(1'($urandom_range(1)));
    for (int i = 0; i < nbits; i += 8) begin
      b = '0;
      for (int k = 0; k < 8; k++) b[7 - k] = (i + k < nbits) ? bits[i + k] : 1'b0;
      streams[0][0].push_back(b);
    end
    src_en = 1'b1;
  endtask

  function automatic int expect_val(int n);
    int v = 0;
    for (int i = 0; i < n; i++) v = (v << 1) | int'(bits[bp + i]);
    return v;
  endfunction

  // reads fields until fewer than 17 bits remain
  task automatic read_all(bit gaps, bit timing);
    int n, t0;
    bit empty;
    while (bits.size() - bp > 16) begin
      #1 empty = (dut.cnt_q == 0);
      n = $urandom_range(16);
      rd_req <= 1'b1; rd_n <= WIDTH_BITS'(n);
      @(posedge clk);
      rd_req <= 1'b0;
      t0 = 0;   // cycles after the request cycle
      while (!rd_done) begin @(posedge clk); t0++; end
      check(int'(rd_val) == expect_val(n), $sformatf("field of %0d bits: %0h exp %0h", n, rd_val, expect_val(n)));
      if (timing) check(t0 <= n + 1 + int'(n != 0 && empty), $sformatf("%0d-bit field took %0d cycles", n, t0));
      bp += n;
      if (gaps) repeat ($urandom_range(3)) @(posedge clk);
    end
  endtask

  initial begin
    clear = 1'b0; rd_req = 1'b0; rd_n = '0; in_valid = 1'b0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    make(4000); read_all(1'b1, 1'b0);
    make(4000); stall = 0;
    @(posedge clk); clear <= 1'b1; @(posedge clk); clear <= 1'b0;
    read_all(1'b0, 1'b0);
    // back-to-back requests issued in the rd_done cycle
    make(3000); stall = 20;
    @(posedge clk); clear <= 1'b1; @(posedge clk); clear <= 1'b0;
    begin
      int n, nxt;   // width of the field in flight, width on rd_n
      n = 1 + $urandom_range(15);
      nxt = n;
      rd_req <= 1'b1; rd_n <= WIDTH_BITS'(n);
      while (bits.size() - bp > 32) begin
        @(posedge clk);
        if (rd_done) begin
          // the next field started in this cycle with the width on rd_n
          check(int'(rd_val) == expect_val(n), $sformatf("back-to-back field of %0d bits", n));
          bp += n;
          n = nxt;
          nxt = $urandom_range(16);
          rd_n <= WIDTH_BITS'(nxt);
        end
      end
      rd_req <= 1'b0;
      do @(posedge clk); while (!rd_done);
      check(int'(rd_val) == expect_val(n), "last back-to-back field");
      @(posedge clk);
    end
    // timing with the stream always ready
    make(2000); stall = 0;
    @(posedge clk); clear <= 1'b1; @(posedge clk); clear <= 1'b0;
    read_all(1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

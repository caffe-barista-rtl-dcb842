// tb_buffer_c: checks that buffer C captures a whole tile in one cycle and
// hands it out in row-major order, one word per pop, with a correct count.
//
// Several random Tr x Tc tiles are captured; the words are popped with random
// gaps and compared with C[i][j] in row-major order. The PE outputs change
// after each capture to confirm that the buffer holds its copy.
module tb_buffer_c;
  import barista_pkg::*;
  localparam int unsigned TR = 3, TC = 4;

  logic clk = 0, rst_n = 0;
  logic capture, pop;
  word_t c_in [TR][TC];
  word_t out_data;
  logic [$clog2(TR*TC+1)-1:0] count;
  int checks = 0, failures = 0;
  word_t tile [TR][TC];

  buffer_c #(.TR(TR), .TC(TC)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    capture = 0; pop = 0;
    for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) c_in[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (count != 0) begin failures++; $display("count not zero after reset"); end
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < TR; i++)
        for (int j = 0; j < TC; j++) begin tile[i][j] = $urandom; c_in[i][j] <= tile[i][j]; end
      capture <= 1;
      @(posedge clk);
      capture <= 0;
      for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) c_in[i][j] <= $urandom;
      @(posedge clk);
      for (int n = 0; n < int'(TR * TC); n++) begin
        @(negedge clk);                   // sample between edges
        checks++;
        if (out_data !== tile[n / TC][n % TC] || count != ($clog2(TR*TC+1))'(TR * TC - n)) begin
          failures++;
          $display("tile %0d word %0d: %h (count %0d), expected %h", rep, n, out_data, count, tile[n / TC][n % TC]);
        end
        pop = 1;
        @(negedge clk);
        pop = 0;
        if ($urandom_range(1, 0) == 1) @(negedge clk);
      end
      @(negedge clk);
      checks++;
      if (count != 0) begin failures++; $display("count %0d after tile", count); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

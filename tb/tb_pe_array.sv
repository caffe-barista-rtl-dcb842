// tb_pe_array: checks the systolic mesh end to end without the buffers.
//
// The testbench itself produces the skewed wavefront: A[i][k] enters row i at
// cycle k + i and B[k][j] enters column j at cycle k + j. After K elements it
// waits for `idle`, pulses reduce_start and expects every PE(i,j) to deliver
// sum_k A[i][k]*B[k][j] (in the kernel's FP32 order: Q+1 round-robin partial
// sums, then summed in order) in the same cycle, (Q+1)^2 cycles after
// reduce_start. Two tiles are run, the second checking that caches were
// cleared. Inputs are driven on the falling edge.
module tb_pe_array;
  import barista_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned TR = 3, TC = 4, Q = 10, K = 37;

  logic clk = 0, rst_n = 0;
  word_t a_row [TR];
  logic  a_row_valid [TR];
  word_t b_col [TC];
  logic  b_col_valid [TC];
  logic  reduce_start, c_valid, idle;
  word_t c_out [TR][TC];
  int checks = 0, failures = 0;

  pe_array #(.TR(TR), .TC(TC), .Q(Q), .ADD_LAT(Q)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t A [TR][K];
  word_t B [K][TC];

  initial begin
    word_t part [Q+1];
    word_t ref_c, acc;
    int t, lat;
    for (int i = 0; i < TR; i++) begin a_row[i] = 0; a_row_valid[i] = 0; end
    for (int j = 0; j < TC; j++) begin b_col[j] = 0; b_col_valid[j] = 0; end
    reduce_start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 2; tile++) begin
      for (int i = 0; i < TR; i++) for (int k = 0; k < K; k++)
        A[i][k] = (tile == 0) ? int2f(int'($urandom_range(10, 0)) - 5) : rand_f(5);
      for (int k = 0; k < K; k++) for (int j = 0; j < TC; j++)
        B[k][j] = (tile == 0) ? int2f(int'($urandom_range(10, 0)) - 5) : rand_f(5);
      for (t = 0; t < int'(K + TR + TC); t++) begin
        @(negedge clk);
        for (int i = 0; i < TR; i++) begin
          a_row_valid[i] = (t - i >= 0 && t - i < int'(K));
          a_row[i] = a_row_valid[i] ? A[i][t - i] : 32'd0;
        end
        for (int j = 0; j < TC; j++) begin
          b_col_valid[j] = (t - j >= 0 && t - j < int'(K));
          b_col[j] = b_col_valid[j] ? B[t - j][j] : 32'd0;
        end
      end
      @(negedge clk);
      for (int i = 0; i < TR; i++) a_row_valid[i] = 0;
      for (int j = 0; j < TC; j++) b_col_valid[j] = 0;
      while (!idle) @(negedge clk);
      reduce_start = 1;
      @(negedge clk);
      reduce_start = 0;
      lat = 1;
      while (!c_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != int'((Q + 1) * (Q + 1))) begin
        failures++; $display("reduction took %0d cycles", lat);
      end
      for (int i = 0; i < TR; i++)
        for (int j = 0; j < TC; j++) begin
          for (int s = 0; s <= int'(Q); s++) part[s] = 32'd0;
          for (int k = 0; k < K; k++) part[k % (Q + 1)] = fadd(fmul(A[i][k], B[k][j]), part[k % (Q + 1)]);
          acc = 32'd0;
          for (int s = 0; s <= int'(Q); s++) acc = fadd(acc, part[s]);
          ref_c = acc;
          checks++;
          if (c_out[i][j] !== ref_c) begin
            failures++; $display("tile %0d C[%0d][%0d] = %h expected %h", tile, i, j, c_out[i][j], ref_c);
          end
        end
      @(negedge clk);
      checks++;
      if (!idle) begin failures++; $display("mesh not idle after reduction"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

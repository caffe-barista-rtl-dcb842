// tb_buffer_a: checks buffer A's tiled load order and its skewed read-out.
//
// A random Tr x Tp tile is loaded row-major with random gaps, then the Tp
// columns are read one per cycle. Mesh row i must present A[i][k] exactly
// k + 1 + i cycles after column k was requested, with valid high only then.
// A second tile is loaded after ld_clear to check the write pointers restart.
module tb_buffer_a;
  import barista_pkg::*;
  localparam int unsigned TR = 4, TP = 8;

  logic clk = 0, rst_n = 0;
  logic ld_clear, ld_valid, rd_valid;
  word_t ld_data;
  logic [$clog2(TP)-1:0] rd_k;
  word_t a_row [TR];
  logic  a_row_valid [TR];
  int checks = 0, failures = 0, cycle = 0;
  word_t tile [TR][TP];
  int rd_start_cycle = -1000;

  buffer_a #(.TR(TR), .TP(TP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // checker: at cycle c, row i should carry column k = c - rd_start_cycle - 1 - i
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < TR; i++) begin
      int k;
      k = cycle - rd_start_cycle - 1 - i;
      checks++;
      if (k >= 0 && k < int'(TP)) begin
        if (!a_row_valid[i] || a_row[i] !== tile[i][k]) begin
          failures++;
          $display("cycle %0d row %0d: got %h/%0d expected %h", cycle, i, a_row[i], a_row_valid[i], tile[i][k]);
        end
      end else if (a_row_valid[i]) begin
        failures++; $display("cycle %0d row %0d: unexpected valid", cycle, i);
      end
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_clear = 0; ld_valid = 0; rd_valid = 0; ld_data = 0; rd_k = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      @(posedge clk);
      ld_clear <= 1;
      @(posedge clk);
      ld_clear <= 0;
      for (int i = 0; i < TR; i++)
        for (int k = 0; k < TP; k++) begin
          tile[i][k] = $urandom;
          ld_valid <= 1; ld_data <= tile[i][k];
          @(posedge clk);
          if ($urandom_range(2, 0) == 0) begin ld_valid <= 0; @(posedge clk); end
        end
      ld_valid <= 0;
      @(posedge clk);
      rd_start_cycle = cycle + 1;        // cycle count at the edge that samples column 0
      for (int k = 0; k < TP; k++) begin
        rd_valid <= 1; rd_k <= k[$clog2(TP)-1:0];
        @(posedge clk);
      end
      rd_valid <= 0;
      repeat (TR + 3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_buffer_b: checks buffer B's tiled load order and its skewed read-out.
//
// A random Tp x Tc tile is loaded row-major with random gaps, then the Tp
// rows are read one per cycle. Mesh column j must present B[k][j] exactly
// k + 1 + j cycles after row k was requested, with valid high only then.
// A second tile is loaded after ld_clear to check the write pointers restart.
module tb_buffer_b;
  import barista_pkg::*;
  localparam int unsigned TC = 5, TP = 8;

  logic clk = 0, rst_n = 0;
  logic ld_clear, ld_valid, rd_valid;
  word_t ld_data;
  logic [$clog2(TP)-1:0] rd_k;
  word_t b_col [TC];
  logic  b_col_valid [TC];
  int checks = 0, failures = 0, cycle = 0;
  word_t tile [TP][TC];
  int rd_start_cycle = -1000;

  buffer_b #(.TC(TC), .TP(TP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // checker: at cycle c, column j should carry row k = c - rd_start_cycle - 1 - j
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < TC; j++) begin
      int k;
      k = cycle - rd_start_cycle - 1 - j;
      checks++;
      if (k >= 0 && k < int'(TP)) begin
        if (!b_col_valid[j] || b_col[j] !== tile[k][j]) begin
          failures++;
          $display("cycle %0d col %0d: got %h/%0d expected %h", cycle, j, b_col[j], b_col_valid[j], tile[k][j]);
        end
      end else if (b_col_valid[j]) begin
        failures++; $display("cycle %0d col %0d: unexpected valid", cycle, j);
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
      for (int k = 0; k < TP; k++)
        for (int j = 0; j < TC; j++) begin
          tile[k][j] = $urandom;
          ld_valid <= 1; ld_data <= tile[k][j];
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
      repeat (TC + 3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

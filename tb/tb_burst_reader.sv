// tb_burst_reader: checks the read-burst engine against the memory model.
//
// Bursts of random length from random addresses are read from a memory filled
// with known values, while the memory stalls the address and data channels at
// random. Every delivered word must be the memory word at base + index, in
// order, the number of words must equal the length, `done` must pulse once
// per burst, and the request on the address channel must carry base and len.
module tb_burst_reader;
  import barista_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, out_valid;
  addr_t base;
  len_t len;
  word_t out_data;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  addr_t ar_addr;
  len_t ar_len;
  word_t r_data;
  logic aw_valid = 0, aw_ready, w_valid = 0, w_ready, w_last = 0, b_valid, b_ready = 0;
  logic [31:0] aw_addr = 0, w_data = 0;
  logic [15:0] aw_len = 0;
  int checks = 0, failures = 0;

  burst_reader dut (.*);
  offchip_mem_model #(.DEPTH(1024), .STALLS(1'b1)) u_mem (.*);

  always #5 clk = ~clk;

  int got = 0, dones = 0;
  addr_t cur_base;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (out_data !== 32'hA000_0000 + cur_base + 32'(got)) begin
        failures++; $display("word %0d: %h", got, out_data);
      end
      got++;
    end
    if (done) dones++;
    if (ar_valid && ar_ready) begin
      checks++;
      if (ar_addr !== cur_base || ar_len !== len) begin failures++; $display("bad request %0d/%0d", ar_addr, ar_len); end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = 0; len = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 32'hA000_0000 + 32'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int b = 0; b < 30; b++) begin
      got = 0;
      cur_base = addr_t'($urandom_range(700, 0));
      base <= cur_base; len <= len_t'($urandom_range(200, 1)); start <= 1;
      @(posedge clk);
      start <= 0;
      @(posedge clk);
      while (busy) @(posedge clk);
      @(posedge clk);
      checks++;
      if (got != int'(len) || dones != b + 1) begin
        failures++; $display("burst %0d: %0d words for len %0d, %0d dones", b, got, len, dones);
      end
    end
    checks++;
    if (u_mem.rd_stall_cycles == 0) begin failures++; $display("no read stalls happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

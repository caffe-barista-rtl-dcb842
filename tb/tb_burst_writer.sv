// tb_burst_writer: checks the write-burst engine against the memory model.
//
// Each burst writes `len` words from a source that advances on src_pop (a
// queue standing in for buffer C) to a random address while the memory holds
// off the address and data channels and delays the write response at random.
// After `done` the memory must hold exactly the source words at base .. base +
// len - 1 and nothing around them may change; `done` must not come before the
// write response.
module tb_burst_writer;
  import barista_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, src_pop;
  addr_t base;
  len_t len;
  word_t src_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  addr_t aw_addr;
  len_t aw_len;
  word_t w_data;
  logic ar_valid = 0, ar_ready, r_valid, r_ready = 0, r_last;
  logic [31:0] ar_addr = 0, r_data;
  logic [15:0] ar_len = 0;
  int checks = 0, failures = 0;

  burst_writer dut (.*);
  offchip_mem_model #(.DEPTH(1024), .STALLS(1'b1)) u_mem (.*);

  always #5 clk = ~clk;

  word_t src [$];
  int    sidx;
  assign src_data = (sidx < src.size()) ? src[sidx] : 32'hffff_ffff;
  always @(posedge clk) if (src_pop) sidx <= sidx + 1;

  int resp_seen;
  always @(posedge clk) if (b_valid && b_ready) resp_seen <= resp_seen + 1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t bs; int n;
    start = 0; base = 0; len = 0; sidx = 0; resp_seen = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 32'h5555_0000 + 32'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int b = 0; b < 20; b++) begin
      bs = addr_t'($urandom_range(800, 1));
      n  = int'($urandom_range(100, 1));
      src.delete();
      for (int i = 0; i < n; i++) src.push_back($urandom);
      sidx = 0;
      base <= bs; len <= len_t'(n); start <= 1;
      @(posedge clk);
      start <= 0;
      while (!done) @(posedge clk);
      checks++;
      if (resp_seen != b + 1) begin failures++; $display("done before write response"); end
      @(posedge clk);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (u_mem.mem[bs + i] !== src[i]) begin
          failures++; $display("burst %0d word %0d: %h expected %h", b, i, u_mem.mem[bs + i], src[i]);
        end
      end
      checks++;
      if (u_mem.mem[bs - 1] !== 32'h5555_0000 + 32'(bs - 1) && b == 0) begin failures++; $display("write before base"); end
      checks++;
      if (sidx != n) begin failures++; $display("popped %0d of %0d", sidx, n); end
    end
    checks++;
    if (u_mem.wr_stall_cycles == 0) begin failures++; $display("no write stalls happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

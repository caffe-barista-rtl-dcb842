// tb_fp32_add: checks the pipelined FP32 adder against double-precision
// reference arithmetic (fp_ref_pkg), including its latency and the side-band
// tag.
//
// Random operands of both signs with exponents close together (to exercise
// cancellation and normalisation) and far apart (to exercise alignment and the
// sticky bit) are issued one per cycle with random gaps, plus special values.
module tb_fp32_add;
  import fp_ref_pkg::*;
  localparam int unsigned LAT = 10;
  localparam int unsigned TAG_W = 4;

  logic             clk = 0, rst_n = 0;
  logic             in_valid, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [31:0]      a, b, s;
  int checks = 0, failures = 0, cycle = 0;

  fp32_add #(.LAT(LAT), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [31:0]      exp_q[$];
  int               t_q[$];
  logic [TAG_W-1:0] tag_q[$];

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e; int t; logic [TAG_W-1:0] g;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output %h", s);
    end else begin
      e = exp_q.pop_front(); t = t_q.pop_front(); g = tag_q.pop_front();
      if (s !== e || cycle - t != LAT || out_tag !== g) begin
        failures++;
        $display("mismatch: got %h expected %h latency %0d tag %0d/%0d", s, e, cycle - t, out_tag, g);
      end
    end
  end

  task automatic issue(input logic [31:0] x, input logic [31:0] y, input logic [31:0] e);
    logic [TAG_W-1:0] g;
    g = TAG_W'($urandom);
    in_valid <= 1; a <= x; b <= y; in_tag <= g;
    @(posedge clk);
    exp_q.push_back(e); t_q.push_back(cycle); tag_q.push_back(g);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, y;
    in_valid = 0; a = 0; b = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    issue(32'h3f800000, 32'h40000000, 32'h40400000);   // 1+2 = 3
    issue(32'h40400000, 32'hc0400000, 32'h00000000);   // 3-3 = +0
    issue(32'h00000000, 32'h80000000, 32'h00000000);   // 0 + -0 = +0
    issue(32'h80000000, 32'h80000000, 32'h80000000);   // -0 + -0 = -0
    issue(32'h7f800000, 32'hff800000, 32'h7fc00000);   // inf-inf = NaN
    issue(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);   // overflow
    issue(32'h3f800000, 32'h33800000, 32'h3f800000);   // 1 + 2^-24: tie to even
    issue(32'h3f800001, 32'h33800000, 32'h3f800002);   // tie rounds up to even
    for (int i = 0; i < 8000; i++) begin
      x = rand_f(20);
      case (i % 3)
        0: y = {~x[31], x[30:23], 23'($urandom)};               // near cancellation
        1: y = {1'($urandom), 8'(x[30:23] - $urandom_range(30, 0)), 23'($urandom)};
        default: y = rand_f(20);
      endcase
      issue(x, y, fadd(x, y));
      if ($urandom_range(3, 0) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fp32_mul: checks the pipelined FP32 multiplier against double-precision
// reference arithmetic (fp_ref_pkg), including its latency.
//
// Random normal operands (some chosen to overflow or underflow) and special
// values are issued one per cycle with random gaps. Each expected product is
// stamped with its issue cycle; every output must match bit for bit and arrive
// exactly LAT cycles after its operands.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  localparam int unsigned LAT = 10;

  logic        clk = 0, rst_n = 0;
  logic        in_valid;
  logic [31:0] a, b, p;
  logic        out_valid;
  int checks = 0, failures = 0, cycle = 0;

  fp32_mul #(.LAT(LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [31:0] exp_q[$];
  int          t_q[$];

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e; int t;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output %h", p);
    end else begin
      e = exp_q.pop_front(); t = t_q.pop_front();
      if (p !== e || cycle - t != LAT) begin
        failures++;
        $display("mismatch: got %h expected %h latency %0d", p, e, cycle - t);
      end
    end
  end

  task automatic issue(input logic [31:0] x, input logic [31:0] y, input logic [31:0] e);
    in_valid <= 1; a <= x; b <= y;
    @(posedge clk);
    exp_q.push_back(e); t_q.push_back(cycle);  // cycle count sampled at the issuing edge
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, y;
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // special values
    issue(32'h3f800000, 32'h40000000, 32'h40000000);   // 1*2 = 2
    issue(32'h00000000, 32'hc0400000, 32'h80000000);   // 0*-3 = -0
    issue(32'h7f800000, 32'h00000000, 32'h7fc00000);   // inf*0 = NaN
    issue(32'h7f800000, 32'hbf800000, 32'hff800000);   // inf*-1 = -inf
    issue(32'h7f000000, 32'h7f000000, 32'h7f800000);   // overflow
    issue(32'h00800000, 32'h00800000, 32'h00000000);   // underflow flush
    issue(32'h3fc00000, 32'h3fc00000, 32'h40100000);   // 1.5*1.5 = 2.25
    for (int i = 0; i < 5000; i++) begin
      x = rand_f((i % 4 == 0) ? 100 : 30);
      y = rand_f((i % 4 == 0) ? 100 : 30);
      issue(x, y, fmul(x, y));
      if ($urandom_range(3, 0) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

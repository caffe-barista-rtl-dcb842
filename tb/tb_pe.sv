// tb_pe: checks one processing element: the interleaved accumulation into Q+1
// cache slots, the final reduction, its (Q+1)^2-cycle latency, the A/B
// forwarding, and that the cache is clean for the next output tile.
//
// For each of several output tiles the testbench streams a random number of
// FP32 operand pairs, in bursts separated by gaps (as successive Tp-tiles
// arrive), waits for `idle`, pulses reduce_start and compares c_out with a
// reference that assigns products to slots round-robin, accumulates each slot
// in FP32 and then sums the slots in order, all through fp_ref_pkg.
module tb_pe;
  import fp_ref_pkg::*;
  localparam int unsigned Q = 10;
  localparam int unsigned SLOTS = Q + 1;

  logic        clk = 0, rst_n = 0;
  logic [31:0] a_in, b_in, a_out, b_out, c_out;
  logic        a_in_valid, b_in_valid, a_out_valid, b_out_valid;
  logic        reduce_start, c_valid, idle;
  int checks = 0, failures = 0, cycle = 0;

  pe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // forwarding check: outputs equal the inputs one cycle earlier
  logic [31:0] a_prev, b_prev; logic v_prev;
  always @(posedge clk) begin
    if (rst_n && (a_out_valid !== v_prev || (v_prev && (a_out !== a_prev || b_out !== b_prev || !b_out_valid)))) begin
      failures++; $display("forwarding error at cycle %0d", cycle);
    end
    a_prev <= a_in; b_prev <= b_in; v_prev <= a_in_valid;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] part [SLOTS];
    logic [31:0] x, y, ref_c, acc;
    int slot, n, t0, lat;
    a_in = 0; b_in = 0; a_in_valid = 0; b_in_valid = 0; reduce_start = 0;
    a_prev = 0; b_prev = 0; v_prev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int tile = 0; tile < 6; tile++) begin
      for (int s = 0; s < SLOTS; s++) part[s] = 32'd0;
      slot = 0;
      n = (tile == 0) ? 5 : (tile == 1) ? 11 : int'($urandom_range(300, 20));
      for (int k = 0; k < n; k++) begin
        // integer-valued operands for the first tiles, random FP32 later
        if (tile < 3) begin x = int2f(int'($urandom_range(20, 0)) - 10); y = int2f(int'($urandom_range(20, 0)) - 10); end
        else begin x = rand_f(8); y = rand_f(8); end
        part[slot] = fadd(fmul(x, y), part[slot]);
        slot = (slot + 1) % SLOTS;
        a_in <= x; b_in <= y; a_in_valid <= 1; b_in_valid <= 1;
        @(posedge clk);
        if (k % 64 == 63) begin           // gap between Tp-tiles
          a_in_valid <= 0; b_in_valid <= 0;
          repeat ($urandom_range(15, 1)) @(posedge clk);
        end
      end
      a_in_valid <= 0; b_in_valid <= 0;
      @(posedge clk);
      while (!idle) @(posedge clk);
      acc = 32'd0;
      for (int s = 0; s < SLOTS; s++) acc = fadd(acc, part[s]);
      ref_c = acc;
      reduce_start <= 1;
      @(posedge clk);
      t0 = cycle;
      reduce_start <= 0;
      while (!c_valid) @(posedge clk);
      lat = cycle - t0;
      checks++;
      if (c_out !== ref_c) begin
        failures++; $display("tile %0d: c_out %h expected %h", tile, c_out, ref_c);
      end
      checks++;
      if (lat != SLOTS * SLOTS) begin
        failures++; $display("tile %0d: reduction took %0d cycles, expected %0d", tile, lat, SLOTS * SLOTS);
      end
      @(posedge clk);
      checks++;
      if (!idle) begin failures++; $display("not idle after reduction"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

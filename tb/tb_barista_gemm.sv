// tb_barista_gemm: end-to-end test of the GEMM kernel at a reduced mesh size
// (4 x 4 PEs, Tp = 8, full FP32 datapath with Q = 10).
//
// Three GEMMs run back to back through gemm_host, which tiles and pads the
// matrices, launches the kernel and checks every element of C and the
// compute-cycle count. Besides the results, the testbench confirms that each
// mechanism of the design happened at least once: zero padding of partial
// tiles, accumulation across several Tp-tiles, several output tiles (row and
// column of tiles changing), the round-robin slot pointer of the interleaved
// accumulation wrapping round, the PE reduction, stalls on the memory read
// data, back-pressure on the write data and waits on the address channels.
module tb_barista_gemm;
  localparam int unsigned TR = 4, TC = 4, TP = 8, Q = 10;

  logic        clk = 0;
  logic        rst_n, start, busy, done;
  logic [31:0] a_base, b_base, c_base, cyc_total, cyc_compute, tiles_done;
  logic [15:0] n_rt, n_ct, n_pt;
  barista_pkg::ctrl_state_e state;
  logic        ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic        aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] ar_addr, aw_addr, r_data, w_data;
  logic [15:0] ar_len, aw_len;
  int checks, failures, padded_jobs, multi_pt_jobs, multi_tile_jobs;
  bit finished;

  always #5 clk = ~clk;

  barista_gemm #(.TR(TR), .TC(TC), .TP(TP), .Q(Q)) dut (.*);

  gemm_host #(
    .TR(TR), .TC(TC), .TP(TP), .Q(Q), .ADD_LAT(Q), .NJOBS(3),
    .JOB_R('{9, 4, 3, 1}), .JOB_C('{7, 8, 2, 1}), .JOB_P('{21, 8, 5, 1}),
    .JOB_INT('{1'b1, 1'b0, 1'b0, 1'b0}), .MEM_DEPTH(4096)
  ) host (.*);

  // mechanism counters
  int slot_wraps = 0, reductions = 0, drains = 0;
  always @(posedge clk) begin
    if (dut.u_mesh.g_row[0].g_col[0].u_pe.mul_valid &&
        dut.u_mesh.g_row[0].g_col[0].u_pe.acc_slot == 4'(Q)) slot_wraps++;
    if (dut.u_mesh.reduce_start) reductions++;
    if (state == barista_pkg::ST_DRAIN) drains++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int f;
    wait (finished);
    f = failures;
    $display("padded jobs %0d, multi-Tp jobs %0d, multi-tile jobs %0d, slot wraps %0d, reductions %0d",
             padded_jobs, multi_pt_jobs, multi_tile_jobs, slot_wraps, reductions);
    $display("read stalls %0d, write stalls %0d, address waits %0d",
             host.u_mem.rd_stall_cycles, host.u_mem.wr_stall_cycles, host.u_mem.addr_wait_cycles);
    if (padded_jobs == 0)                    begin f++; $display("no zero padding exercised"); end
    if (multi_pt_jobs == 0)                  begin f++; $display("no multi-Tp accumulation"); end
    if (multi_tile_jobs == 0)                begin f++; $display("no multi-tile job"); end
    if (slot_wraps == 0)                     begin f++; $display("interleave slot never wrapped"); end
    if (reductions == 0)                     begin f++; $display("no reduction"); end
    if (host.u_mem.rd_stall_cycles == 0)     begin f++; $display("no read stall"); end
    if (host.u_mem.wr_stall_cycles == 0)     begin f++; $display("no write back-pressure"); end
    if (host.u_mem.addr_wait_cycles == 0)    begin f++; $display("no address wait"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks + 8, f);
    $finish;
  end
endmodule

// tb_barista_gemm_full: the GEMM kernel at its default size, the evaluated
// configuration <Tr,Tc,Tp> = <16,16,64> with the FP32 datapath (Q = 10).
//
// One GEMM of a 20 x 100 by 100 x 18 random FP32 product runs end to end
// through gemm_host: 2 x 2 output tiles of 2 inner tiles each, with zero
// padding on all three dimensions and random memory stalls. Every element of
// C and the compute-cycle count are checked.
module tb_barista_gemm_full;
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

  barista_gemm dut (.*);

  gemm_host #(
    .TR(16), .TC(16), .TP(64), .Q(10), .ADD_LAT(10), .NJOBS(1),
    .JOB_R('{20, 1, 1, 1}), .JOB_C('{18, 1, 1, 1}), .JOB_P('{100, 1, 1, 1}),
    .JOB_INT('{1'b0, 1'b0, 1'b0, 1'b0}), .MEM_DEPTH(16384)
  ) host (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

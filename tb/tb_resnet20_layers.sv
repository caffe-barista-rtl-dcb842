// tb_resnet20_layers: two forward-pass GEMMs of ResNet20 CONV layers on
// CIFAR-10 run on the kernel at its default size <Tr,Tc,Tp> = <16,16,64>.
//
// Layer shapes (standard ResNet20, one 32x32 image; im2col form
// weights[M x K*K*Cin] * columns[K*K*Cin x H*W]):
//   conv0          16 x 27  by 27  x 1024  -> 1 x 64 output tiles, 1 inner tile
//   group 1, 3x3   32 x 288 by 288 x 256   -> 2 x 16 output tiles, 5 inner tiles
// Both need zero padding of the inner dimension (27 -> 64, 288 -> 320). The
// backward-pass GEMMs of these layers have the same dimensions in another
// order and exercise nothing further. Random FP32 data; every output element,
// the compute-cycle count and the off-chip traffic are checked by gemm_host.
module tb_resnet20_layers;
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
    .TR(16), .TC(16), .TP(64), .Q(10), .ADD_LAT(10), .NJOBS(2),
    .JOB_R('{16, 32, 1, 1}), .JOB_C('{1024, 256, 1, 1}), .JOB_P('{27, 288, 1, 1}),
    .JOB_INT('{1'b0, 1'b0, 1'b0, 1'b0}), .MEM_DEPTH(131072)
  ) host (.*);

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
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

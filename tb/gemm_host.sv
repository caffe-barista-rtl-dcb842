// gemm_host: behavioural model of the host side of the GEMM kernel, used by
// the end-to-end testbenches. It contains the off-chip memory model.
//
// For each job (R x P times P x C) it does what the host runtime does: draws
// A and B, zero-pads them to whole tiles, writes them into off-chip memory in
// the tiled layout the kernel expects (A tiles, then B tiles, then room for the
// C tiles, each tile row-major), starts the kernel with the tile counts,
// waits for done, and untiles C. C is compared element by element with a
// reference that follows the kernel's FP32 arithmetic order: the products of
// each output element go round-robin into Q+1 partial sums, which are then
// summed in order (fp_ref_pkg). It also checks the compute-cycle count against
// ceil(R/Tr)*ceil(C/Tc)*(ceil(P/Tp)*(Tp+Tc+Tr-2)+(Q+1)^2), the number of
// output tiles written, and the off-chip traffic against the data model
// ceil(R/Tr)*ceil(C/Tc)*((Tr*P' + Tc*P') + Tr*Tc) words, P' = P padded to Tp. Jobs whose index is in INT_JOBS use small integers
// (exact in any order); the others random FP32 values.
module gemm_host
  import fp_ref_pkg::*;
#(
  parameter int unsigned TR      = 16,
  parameter int unsigned TC      = 16,
  parameter int unsigned TP      = 64,
  parameter int unsigned Q       = 10,
  parameter int unsigned ADD_LAT = 10,
  parameter int unsigned NJOBS   = 1,
  parameter int unsigned JOB_R [4] = '{20, 1, 1, 1},
  parameter int unsigned JOB_C [4] = '{18, 1, 1, 1},
  parameter int unsigned JOB_P [4] = '{100, 1, 1, 1},
  parameter bit          JOB_INT [4] = '{1'b0, 1'b0, 1'b0, 1'b0},
  parameter int unsigned MEM_DEPTH = 65536,
  parameter bit          STALLS  = 1'b1
) (
  input  logic        clk,
  output logic        rst_n,
  output logic        start,
  output logic [31:0] a_base,
  output logic [31:0] b_base,
  output logic [31:0] c_base,
  output logic [15:0] n_rt,
  output logic [15:0] n_ct,
  output logic [15:0] n_pt,
  input  logic        done,
  input  logic [31:0] cyc_total,
  input  logic [31:0] cyc_compute,
  input  logic [31:0] tiles_done,
  input  logic        ar_valid,
  output logic        ar_ready,
  input  logic [31:0] ar_addr,
  input  logic [15:0] ar_len,
  output logic        r_valid,
  input  logic        r_ready,
  output logic [31:0] r_data,
  output logic        r_last,
  input  logic        aw_valid,
  output logic        aw_ready,
  input  logic [31:0] aw_addr,
  input  logic [15:0] aw_len,
  input  logic        w_valid,
  output logic        w_ready,
  input  logic [31:0] w_data,
  input  logic        w_last,
  output logic        b_valid,
  input  logic        b_ready,
  // results for the enclosing testbench
  output int          checks,
  output int          failures,
  output int          padded_jobs,
  output int          multi_pt_jobs,
  output int          multi_tile_jobs,
  output bit          finished
);
  offchip_mem_model #(.DEPTH(MEM_DEPTH), .STALLS(STALLS)) u_mem (.*);

  initial begin
    int R, C, P, nrt, nct, npt, Rp, Cp, Pp, a_words, b_words, slot, base, cnt;
    int exp_cyc, rd0, wr0;
    logic [31:0] A [], B [], part [], acc;
    logic [31:0] ref_c;
    checks = 0; failures = 0; padded_jobs = 0; multi_pt_jobs = 0; multi_tile_jobs = 0;
    finished = 0;
    rst_n = 0; start = 0; a_base = 0; b_base = 0; c_base = 0; n_rt = 0; n_ct = 0; n_pt = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int job = 0; job < int'(NJOBS); job++) begin
      R = int'(JOB_R[job]); C = int'(JOB_C[job]); P = int'(JOB_P[job]);
      nrt = (R + TR - 1) / TR; nct = (C + TC - 1) / TC; npt = (P + TP - 1) / TP;
      Rp = nrt * TR; Cp = nct * TC; Pp = npt * TP;
      if (Rp != R || Cp != C || Pp != P) padded_jobs++;
      if (npt > 1) multi_pt_jobs++;
      if (nrt > 1 && nct > 1) multi_tile_jobs++;
      // matrices, zero padded ("Tiling")
      A = new[Rp * Pp]; B = new[Pp * Cp];
      for (int i = 0; i < Rp; i++)
        for (int k = 0; k < Pp; k++)
          A[i*Pp + k] = (i < R && k < P) ?
              (JOB_INT[job] ? int2f(int'($urandom_range(16, 0)) - 8) : rand_f(6)) : 32'd0;
      for (int k = 0; k < Pp; k++)
        for (int j = 0; j < Cp; j++)
          B[k*Cp + j] = (k < P && j < C) ?
              (JOB_INT[job] ? int2f(int'($urandom_range(16, 0)) - 8) : rand_f(6)) : 32'd0;
      // tiled layout in off-chip memory
      a_words = Rp * Pp; b_words = Pp * Cp;
      base = 16 * job;                              // move the buffers between jobs
      for (int rt = 0; rt < nrt; rt++)
        for (int pt = 0; pt < npt; pt++)
          for (int i = 0; i < TR; i++)
            for (int k = 0; k < TP; k++)
              u_mem.mem[base + (rt*npt + pt)*TR*TP + i*TP + k] = A[(rt*TR + i)*Pp + pt*TP + k];
      for (int ct = 0; ct < nct; ct++)
        for (int pt = 0; pt < npt; pt++)
          for (int k = 0; k < TP; k++)
            for (int j = 0; j < TC; j++)
              u_mem.mem[base + a_words + (ct*npt + pt)*TP*TC + k*TC + j] = B[(pt*TP + k)*Cp + ct*TC + j];
      for (int n = 0; n < Rp * Cp; n++) u_mem.mem[base + a_words + b_words + n] = 32'hdead_beef;
      // launch
      @(posedge clk);
      a_base <= 32'(base); b_base <= 32'(base + a_words); c_base <= 32'(base + a_words + b_words);
      n_rt <= 16'(nrt); n_ct <= 16'(nct); n_pt <= 16'(npt);
      rd0 = u_mem.rd_words; wr0 = u_mem.wr_words;
      start <= 1;
      @(posedge clk);
      start <= 0;
      @(posedge clk);
      while (!done) @(posedge clk);
      // untile and compare
      part = new[Q + 1];
      cnt = 0;
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          int rt, ct, addr;
          for (int s = 0; s <= int'(Q); s++) part[s] = 32'd0;
          slot = 0;
          for (int k = 0; k < Pp; k++) begin
            part[slot] = fadd(fmul(A[i*Pp + k], B[k*Cp + j]), part[slot]);
            slot = (slot + 1) % (Q + 1);
          end
          acc = 32'd0;
          for (int s = 0; s <= int'(Q); s++) acc = fadd(acc, part[s]);
          ref_c = acc;
          rt = i / TR; ct = j / TC;
          addr = base + a_words + b_words + (rt*nct + ct)*TR*TC + (i % TR)*TC + (j % TC);
          checks++;
          if (u_mem.mem[addr] !== ref_c) begin
            failures++;
            if (cnt++ < 10)
              $display("job %0d: C[%0d][%0d] = %h, expected %h", job, i, j, u_mem.mem[addr], ref_c);
          end
        end
      exp_cyc = nrt * nct * (npt * (TP + TC + TR - 2) + (Q + 1) * (ADD_LAT + 1));
      checks++;
      if (cyc_compute != 32'(exp_cyc)) begin
        failures++;
        $display("job %0d: compute cycles %0d, model %0d", job, cyc_compute, exp_cyc);
      end
      checks++;
      if (tiles_done != 32'(nrt * nct)) begin
        failures++;
        $display("job %0d: %0d output tiles written, expected %0d", job, tiles_done, nrt * nct);
      end
      checks++;
      if (u_mem.rd_words - rd0 != nrt * nct * (TR * Pp + TC * Pp) || u_mem.wr_words - wr0 != nrt * nct * TR * TC) begin
        failures++;
        $display("job %0d: memory traffic %0d read / %0d written, model %0d / %0d", job,
                 u_mem.rd_words - rd0, u_mem.wr_words - wr0, nrt * nct * (TR * Pp + TC * Pp), nrt * nct * TR * TC);
      end
      $display("job %0d: R=%0d C=%0d P=%0d tiles %0dx%0dx%0d compute cycles %0d (model %0d) total %0d",
               job, R, C, P, nrt, nct, npt, cyc_compute, exp_cyc, cyc_total);
    end
    finished = 1;
  end
endmodule

// barista_gemm: FPGA GEMM kernel for CNN training, C = A * B in FP32.
//
// The kernel multiplies matrices that the host has tiled and placed in the
// board's off-chip memory. It works on one Tr x Tc tile of C at a time: for
// each of the ceil(P/Tp) pairs of input tiles it burst-reads a Tr x Tp tile of
// A into buffer A and a Tp x Tc tile of B into buffer B, then streams them
// through a Tr x Tc systolic mesh of PEs (A from the left, B from the top).
// Every PE accumulates its element of C in Q+1 interleaved FP32 partial sums,
// so it accepts one operand pair per cycle although its multiplier takes Q
// cycles. After the last tile pair the PEs reduce their partials, the tile is
// copied into buffer C and burst-written back.
//
// Blocks: gemm_controller (sequencing), burst_reader and burst_writer (memory
// bursts), buffer_a, buffer_b, buffer_c, pe_array (mesh of pe, each with an
// fp32_mul and an fp32_add).
//
// Interface: kernel arguments (tile base addresses in words, tile counts
// n_rt = ceil(R/Tr), n_ct = ceil(C/Tc), n_pt = ceil(P/Tp)) are sampled on a
// one-cycle `start`; `done` pulses when the last C tile has been acknowledged
// by memory. Off-chip memory is reached through one read and one write
// channel pair with valid/ready handshakes (AXI-like, word addresses, burst
// length in words). Counters report total busy cycles and the compute cycles
// of the paper's model. The defaults are the evaluated configuration
// <Tr,Tc,Tp> = <16,16,64>, Q = 10, FP32; the memory protocol, the tile layout
// and the control handshake are this design's own choices.
module barista_gemm
  import barista_pkg::*;
#(
  parameter int unsigned TR      = TR_DEF,
  parameter int unsigned TC      = TC_DEF,
  parameter int unsigned TP      = TP_DEF,
  parameter int unsigned Q       = Q_DEF,
  parameter int unsigned ADD_LAT = Q_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  // kernel control
  input  logic             start,
  input  addr_t            a_base,
  input  addr_t            b_base,
  input  addr_t            c_base,
  input  logic [CNT_W-1:0] n_rt,
  input  logic [CNT_W-1:0] n_ct,
  input  logic [CNT_W-1:0] n_pt,
  output logic             busy,
  output logic             done,
  output ctrl_state_e      state,
  output logic [31:0]      cyc_total,
  output logic [31:0]      cyc_compute,
  output logic [31:0]      tiles_done,
  // off-chip memory: read channels
  output logic             ar_valid,
  input  logic             ar_ready,
  output addr_t            ar_addr,
  output len_t             ar_len,
  input  logic             r_valid,
  output logic             r_ready,
  input  word_t            r_data,
  input  logic             r_last,
  // off-chip memory: write channels
  output logic             aw_valid,
  input  logic             aw_ready,
  output addr_t            aw_addr,
  output len_t             aw_len,
  output logic             w_valid,
  input  logic             w_ready,
  output word_t            w_data,
  output logic             w_last,
  input  logic             b_valid,
  output logic             b_ready
);
  logic                  rd_start, rd_done, rd_busy, rd_out_valid;
  addr_t                 rd_base;
  len_t                  rd_len;
  word_t                 rd_out_data;
  logic                  ld_to_a, a_ld_clear, b_ld_clear;
  logic                  fd_valid;
  logic [$clog2(TP)-1:0] fd_k;
  logic                  reduce_start, arr_c_valid, arr_idle;
  logic                  c_capture, wr_start, wr_done, wr_busy, c_pop;
  addr_t                 wr_base;
  len_t                  wr_len;
  word_t                 c_head;
  logic [$clog2(TR*TC+1)-1:0] c_count;

  word_t a_row [TR];
  logic  a_row_valid [TR];
  word_t b_col [TC];
  logic  b_col_valid [TC];
  word_t c_tile [TR][TC];

  gemm_controller #(.TR(TR), .TC(TC), .TP(TP), .Q(Q), .ADD_LAT(ADD_LAT)) u_ctrl (
    .clk, .rst_n,
    .start, .a_base, .b_base, .c_base, .n_rt, .n_ct, .n_pt,
    .busy, .done, .state,
    .rd_start, .rd_base, .rd_len, .rd_done,
    .ld_to_a, .a_ld_clear, .b_ld_clear,
    .fd_valid, .fd_k,
    .reduce_start, .arr_c_valid, .arr_idle,
    .c_capture, .wr_start, .wr_base, .wr_len, .wr_done,
    .cyc_total, .cyc_compute, .tiles_done
  );

  burst_reader u_rd (
    .clk, .rst_n,
    .start(rd_start), .base(rd_base), .len(rd_len), .busy(rd_busy), .done(rd_done),
    .out_valid(rd_out_valid), .out_data(rd_out_data),
    .ar_valid, .ar_ready, .ar_addr, .ar_len,
    .r_valid, .r_ready, .r_data, .r_last
  );

  buffer_a #(.TR(TR), .TP(TP)) u_buf_a (
    .clk, .rst_n,
    .ld_clear(a_ld_clear), .ld_valid(rd_out_valid && ld_to_a), .ld_data(rd_out_data),
    .rd_valid(fd_valid), .rd_k(fd_k),
    .a_row, .a_row_valid
  );

  buffer_b #(.TC(TC), .TP(TP)) u_buf_b (
    .clk, .rst_n,
    .ld_clear(b_ld_clear), .ld_valid(rd_out_valid && !ld_to_a), .ld_data(rd_out_data),
    .rd_valid(fd_valid), .rd_k(fd_k),
    .b_col, .b_col_valid
  );

  pe_array #(.TR(TR), .TC(TC), .Q(Q), .ADD_LAT(ADD_LAT)) u_mesh (
    .clk, .rst_n,
    .a_row, .a_row_valid, .b_col, .b_col_valid,
    .reduce_start, .c_out(c_tile), .c_valid(arr_c_valid), .idle(arr_idle)
  );

  buffer_c #(.TR(TR), .TC(TC)) u_buf_c (
    .clk, .rst_n,
    .capture(c_capture), .c_in(c_tile), .pop(c_pop),
    .out_data(c_head), .count(c_count)
  );

  burst_writer u_wr (
    .clk, .rst_n,
    .start(wr_start), .base(wr_base), .len(wr_len), .busy(wr_busy), .done(wr_done),
    .src_data(c_head), .src_pop(c_pop),
    .aw_valid, .aw_ready, .aw_addr, .aw_len,
    .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .b_ready
  );

  // A new burst is only started when the engine is free, and a C tile is
  // only written back once all of it has left buffer C.
  assert property (@(posedge clk) disable iff (!rst_n) rd_start |-> !rd_busy)
    else $error("barista_gemm: read burst started while busy");
  assert property (@(posedge clk) disable iff (!rst_n) wr_start |-> !wr_busy)
    else $error("barista_gemm: write burst started while busy");
  assert property (@(posedge clk) disable iff (!rst_n) wr_done |-> (c_count == '0))
    else $error("barista_gemm: write-back finished with words left in buffer C");
endmodule

// gemm_controller: sequences the blocked GEMM C = A * B over tiles.
//
// The host has already cut A into Tr x Tp tiles, B into Tp x Tc tiles (zero
// padded) and laid them out contiguously: A tile (rt, pt) at
// a_base + (rt*n_pt + pt)*Tr*Tp, B tile (ct, pt) at b_base + (ct*n_pt + pt)*Tp*Tc,
// and C tile (rt, ct) is written to c_base + (rt*n_ct + ct)*Tr*Tc. The
// controller computes one output tile at a time, rt in the outer and ct in the
// inner loop. For each output tile it runs, for pt = 0 .. n_pt-1:
//
//   LOAD_A  burst-read A tile (rt, pt) into buffer A
//   LOAD_B  burst-read B tile (ct, pt) into buffer B
//   FEED    Tp + Tr + Tc - 2 cycles: Tp columns/rows are read out of the
//           buffers (one per cycle) and the skewed wavefront crosses the mesh
//
// and then
//
//   DRAIN   until every PE's multiply-add pipeline is empty
//   REDUCE  (Q+1)^2 cycles: every PE sums its Q+1 interleaved partials
//   CAPTURE the finished tile is copied into buffer C
//   WRITE   buffer C is burst-written to memory
//
// The partial sums stay in the PEs across all n_pt inner tiles, so the output
// tile is written only once. FEED and REDUCE together take exactly the cycles
// of the paper's compute model, ceil(R/Tr)*ceil(C/Tc)*(ceil(P/Tp)*(Tp+Tc+Tr-2)
// + (Q+1)^2); they are counted in cyc_compute, all busy cycles in cyc_total.
// Loads, drain and write-back are not overlapped with computation; the paper
// counts memory time separately from compute time and describes no overlap.
// The tile order, the memory layout inside a tile, the start/done handshake and
// the counters are this design's own choices.
module gemm_controller
  import barista_pkg::*;
#(
  parameter int unsigned TR      = TR_DEF,
  parameter int unsigned TC      = TC_DEF,
  parameter int unsigned TP      = TP_DEF,
  parameter int unsigned Q       = Q_DEF,
  parameter int unsigned ADD_LAT = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // kernel arguments and handshake
  input  logic                  start,
  input  addr_t                 a_base,
  input  addr_t                 b_base,
  input  addr_t                 c_base,
  input  logic [CNT_W-1:0]      n_rt,       // ceil(R/Tr)
  input  logic [CNT_W-1:0]      n_ct,       // ceil(C/Tc)
  input  logic [CNT_W-1:0]      n_pt,       // ceil(P/Tp)
  output logic                  busy,
  output logic                  done,
  output ctrl_state_e           state,
  // burst reader
  output logic                  rd_start,
  output addr_t                 rd_base,
  output len_t                  rd_len,
  input  logic                  rd_done,
  output logic                  ld_to_a,    // reader data goes to buffer A (else B)
  output logic                  a_ld_clear,
  output logic                  b_ld_clear,
  // buffer read-out towards the mesh
  output logic                  fd_valid,
  output logic [$clog2(TP)-1:0] fd_k,
  // mesh
  output logic                  reduce_start,
  input  logic                  arr_c_valid,
  input  logic                  arr_idle,
  // buffer C and burst writer
  output logic                  c_capture,
  output logic                  wr_start,
  output addr_t                 wr_base,
  output len_t                  wr_len,
  input  logic                  wr_done,
  // cycle counters, cleared at start
  output logic [31:0]           cyc_total,
  output logic [31:0]           cyc_compute,
  output logic [31:0]           tiles_done
);
  localparam int unsigned A_WORDS  = TR * TP;
  localparam int unsigned B_WORDS  = TP * TC;
  localparam int unsigned C_WORDS  = TR * TC;
  localparam int unsigned FEED_CYC = TP + TR + TC - 2;
  localparam int unsigned RED_CYC  = (Q + 1) * (ADD_LAT + 1);
  localparam int unsigned FW       = $clog2(FEED_CYC + 1);
  localparam int unsigned RDW      = $clog2(RED_CYC + 1);

  ctrl_state_e      st;
  logic             issued;
  logic [FW-1:0]    fcnt;
  logic [RDW-1:0]   rcnt;
  logic [CNT_W-1:0] rt, ct, pt, n_rt_q, n_ct_q, n_pt_q;
  addr_t            a_ptr, a_row_base, b_ptr, b_base_q, c_ptr;

  assign state = st;
  assign busy  = (st != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= ST_IDLE;
      issued      <= 1'b0;
      fcnt        <= '0;
      rcnt        <= '0;
      rt          <= '0;
      ct          <= '0;
      pt          <= '0;
      n_rt_q      <= '0;
      n_ct_q      <= '0;
      n_pt_q      <= '0;
      a_ptr       <= '0;
      a_row_base  <= '0;
      b_ptr       <= '0;
      b_base_q    <= '0;
      c_ptr       <= '0;
      done        <= 1'b0;
      cyc_total   <= '0;
      cyc_compute <= '0;
      tiles_done  <= '0;
    end else begin
      done <= 1'b0;
      if (st != ST_IDLE) cyc_total <= cyc_total + 1;
      if (st == ST_FEED || st == ST_REDUCE) cyc_compute <= cyc_compute + 1;

      unique case (st)
        ST_IDLE: if (start) begin
          n_rt_q      <= n_rt;
          n_ct_q      <= n_ct;
          n_pt_q      <= n_pt;
          a_ptr       <= a_base;
          a_row_base  <= a_base;
          b_ptr       <= b_base;
          b_base_q    <= b_base;
          c_ptr       <= c_base;
          rt          <= '0;
          ct          <= '0;
          pt          <= '0;
          issued      <= 1'b0;
          cyc_total   <= '0;
          cyc_compute <= '0;
          tiles_done  <= '0;
          st          <= ST_LOAD_A;
        end

        ST_LOAD_A: begin
          if (!issued) issued <= 1'b1;
          if (rd_done) begin
            a_ptr  <= a_ptr + addr_t'(A_WORDS);
            issued <= 1'b0;
            st     <= ST_LOAD_B;
          end
        end

        ST_LOAD_B: begin
          if (!issued) issued <= 1'b1;
          if (rd_done) begin
            b_ptr  <= b_ptr + addr_t'(B_WORDS);
            issued <= 1'b0;
            fcnt   <= '0;
            st     <= ST_FEED;
          end
        end

        ST_FEED: begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == FW'(FEED_CYC - 1)) begin
            if (pt + 1'b1 < n_pt_q) begin
              pt <= pt + 1'b1;
              st <= ST_LOAD_A;
            end else begin
              st <= ST_DRAIN;
            end
          end
        end

        ST_DRAIN: if (arr_idle) begin
          rcnt <= '0;
          st   <= ST_REDUCE;
        end

        ST_REDUCE: begin
          rcnt <= rcnt + 1'b1;
          if (rcnt == RDW'(RED_CYC - 1)) st <= ST_CAPTURE;
        end

        ST_CAPTURE: if (arr_c_valid) begin
          issued <= 1'b0;
          st     <= ST_WRITE;
        end

        ST_WRITE: begin
          if (!issued) issued <= 1'b1;
          if (wr_done) begin
            issued     <= 1'b0;
            c_ptr      <= c_ptr + addr_t'(C_WORDS);
            tiles_done <= tiles_done + 1;
            pt         <= '0;
            if (ct + 1'b1 < n_ct_q) begin
              ct    <= ct + 1'b1;
              a_ptr <= a_row_base;              // same A row of tiles again
              st    <= ST_LOAD_A;
            end else if (rt + 1'b1 < n_rt_q) begin
              ct         <= '0;
              rt         <= rt + 1'b1;
              a_row_base <= a_ptr;              // next A row of tiles
              b_ptr      <= b_base_q;
              st         <= ST_LOAD_A;
            end else begin
              st <= ST_DONE;
            end
          end
        end

        ST_DONE: begin
          done <= 1'b1;
          st   <= ST_IDLE;
        end

        default: st <= ST_IDLE;
      endcase
    end
  end

  assign rd_start     = (st == ST_LOAD_A || st == ST_LOAD_B) && !issued;
  assign rd_base      = (st == ST_LOAD_A) ? a_ptr : b_ptr;
  assign rd_len       = (st == ST_LOAD_A) ? len_t'(A_WORDS) : len_t'(B_WORDS);
  assign ld_to_a      = (st == ST_LOAD_A);
  assign a_ld_clear   = (st == ST_LOAD_A) && !issued;
  assign b_ld_clear   = (st == ST_LOAD_B) && !issued;
  assign fd_valid     = (st == ST_FEED) && (fcnt < FW'(TP));
  assign fd_k         = fcnt[$clog2(TP)-1:0];
  assign reduce_start = (st == ST_REDUCE) && (rcnt == '0);
  assign c_capture    = (st == ST_CAPTURE) && arr_c_valid;
  assign wr_start     = (st == ST_WRITE) && !issued;
  assign wr_base      = c_ptr;
  assign wr_len       = len_t'(C_WORDS);

  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && st == ST_IDLE) |-> (n_rt != '0 && n_ct != '0 && n_pt != '0))
    else $error("gemm_controller: tile counts must be non-zero");
endmodule

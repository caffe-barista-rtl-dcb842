// pe_array: the Tr x Tc systolic mesh of processing elements.
//
// Row i receives its A stream at the left edge (a_row[i]) and every PE passes
// it one PE to the right per cycle; column j receives its B stream at the top
// (b_col[j]) and every PE passes it one PE down per cycle. When the streams
// are fed skewed (row i and column j delayed by i and j cycles, which the A
// and B buffers do), element k of A row i and element k of B column j meet in
// PE(i,j) in the same cycle, so PE(i,j) accumulates C[i][j] = sum_k A[i][k]B[k][j].
//
// reduce_start is broadcast to every PE; all PEs finish their reduction in the
// same cycle, so the mesh reports PE(0,0)'s c_valid for the whole tile and
// presents all Tr x Tc results in parallel on c_out. `idle` is the AND of all
// PEs' idle flags. Mesh shape and dataflow follow the paper (Fig. 2); the
// broadcast reduction control and the idle flag are this design's own.
module pe_array
  import barista_pkg::*;
#(
  parameter int unsigned TR      = TR_DEF,
  parameter int unsigned TC      = TC_DEF,
  parameter int unsigned Q       = Q_DEF,
  parameter int unsigned ADD_LAT = Q_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t a_row       [TR],
  input  logic  a_row_valid [TR],
  input  word_t b_col       [TC],
  input  logic  b_col_valid [TC],
  input  logic  reduce_start,
  output word_t c_out       [TR][TC],
  output logic  c_valid,
  output logic  idle
);
  // a_h[i][j] enters PE(i,j) from the left; b_v[i][j] enters PE(i,j) from above.
  word_t a_h  [TR][TC+1];
  logic  av_h [TR][TC+1];
  word_t b_v  [TR+1][TC];
  logic  bv_v [TR+1][TC];
  logic  cv   [TR][TC];
  logic  idl  [TR][TC];

  for (genvar i = 0; i < TR; i++) begin : g_left
    assign a_h[i][0]  = a_row[i];
    assign av_h[i][0] = a_row_valid[i];
  end
  for (genvar j = 0; j < TC; j++) begin : g_top
    assign b_v[0][j]  = b_col[j];
    assign bv_v[0][j] = b_col_valid[j];
  end

  for (genvar i = 0; i < TR; i++) begin : g_row
    for (genvar j = 0; j < TC; j++) begin : g_col
      pe #(.Q(Q), .ADD_LAT(ADD_LAT)) u_pe (
        .clk, .rst_n,
        .a_in(a_h[i][j]),     .a_in_valid(av_h[i][j]),
        .b_in(b_v[i][j]),     .b_in_valid(bv_v[i][j]),
        .a_out(a_h[i][j+1]),  .a_out_valid(av_h[i][j+1]),
        .b_out(b_v[i+1][j]),  .b_out_valid(bv_v[i+1][j]),
        .reduce_start,
        .c_out(c_out[i][j]),  .c_valid(cv[i][j]),
        .idle(idl[i][j])
      );
    end
  end

  always_comb begin
    idle = 1'b1;
    for (int i = 0; i < TR; i++)
      for (int j = 0; j < TC; j++)
        idle = idle & idl[i][j];
  end

  assign c_valid = cv[0][0];
endmodule

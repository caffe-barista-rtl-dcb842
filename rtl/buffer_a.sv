// buffer_a: on-chip buffer for one Tr x Tp tile of matrix A, feeding the left
// edge of the mesh.
//
// Load side: after ld_clear, words written with ld_valid fill the tile in the
// tiled layout the host prepares, row-major (A[0][0], A[0][1], ...,
// A[0][Tp-1], A[1][0], ...); a row counter and a column counter place them, so
// no division is needed. Row i is its own bank (Tr banks of Tp words).
//
// Read side: with rd_valid and column index rd_k, all Tr banks are read at
// once (registered, one cycle). Row i's word then passes through i skew
// registers, so mesh row i sees element k at cycle k + 1 + i: the staggered
// wavefront a systolic array needs. Storage size Tr*Tp words follows the
// paper's resource model; the layout, the banking and the skew placement are
// this design's own choices.
module buffer_a
  import barista_pkg::*;
#(
  parameter int unsigned TR = TR_DEF,
  parameter int unsigned TP = TP_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ld_clear,
  input  logic                  ld_valid,
  input  word_t                 ld_data,
  input  logic                  rd_valid,
  input  logic [$clog2(TP)-1:0] rd_k,
  output word_t                 a_row       [TR],
  output logic                  a_row_valid [TR]
);
  localparam int unsigned KW = (TP > 1) ? $clog2(TP) : 1;
  localparam int unsigned RW = (TR > 1) ? $clog2(TR) : 1;

  word_t mem [TR][TP];
  logic [RW-1:0] wr_r;
  logic [KW-1:0] wr_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_r <= '0;
      wr_k <= '0;
    end else if (ld_clear) begin
      wr_r <= '0;
      wr_k <= '0;
    end else if (ld_valid) begin
      if (wr_k == KW'(TP - 1)) begin
        wr_k <= '0;
        wr_r <= wr_r + 1'b1;
      end else begin
        wr_k <= wr_k + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid && !ld_clear) mem[wr_r][wr_k] <= ld_data;
  end

  // registered read of one column, then per-row skew
  word_t rd_q  [TR];
  logic  rdv_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdv_q <= 1'b0;
    else        rdv_q <= rd_valid;
  end
  always_ff @(posedge clk) begin
    if (rd_valid)
      for (int i = 0; i < TR; i++) rd_q[i] <= mem[i][rd_k];
  end

  for (genvar i = 0; i < TR; i++) begin : g_skew
    if (i == 0) begin : g_direct
      assign a_row[i]       = rd_q[i];
      assign a_row_valid[i] = rdv_q;
    end else begin : g_delay
      word_t        d_q [i];
      logic [i-1:0] v_q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) v_q <= '0;
        else        v_q <= i'({v_q, rdv_q});
      end
      always_ff @(posedge clk) begin
        d_q[0] <= rd_q[i];
        for (int s = 1; s < i; s++) d_q[s] <= d_q[s-1];
      end
      assign a_row[i]       = d_q[i-1];
      assign a_row_valid[i] = v_q[i-1];
    end
  end
endmodule

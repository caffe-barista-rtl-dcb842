// buffer_b: on-chip buffer for one Tp x Tc tile of matrix B, feeding the top
// edge of the mesh.
//
// Load side: after ld_clear, words written with ld_valid fill the tile in the
// host's tiled layout, row-major (B[0][0], B[0][1], ..., B[0][Tc-1], B[1][0],
// ...). Column j is its own bank (Tc banks of Tp words); a row counter k and a
// column counter j place each word.
//
// Read side: with rd_valid and row index rd_k, all Tc banks are read at once
// (registered, one cycle) and column j's word passes through j skew registers,
// so mesh column j sees element k at cycle k + 1 + j. Storage size Tp*Tc words
// follows the paper's resource model; the layout, the banking and the skew
// placement are this design's own choices.
module buffer_b
  import barista_pkg::*;
#(
  parameter int unsigned TC = TC_DEF,
  parameter int unsigned TP = TP_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ld_clear,
  input  logic                  ld_valid,
  input  word_t                 ld_data,
  input  logic                  rd_valid,
  input  logic [$clog2(TP)-1:0] rd_k,
  output word_t                 b_col       [TC],
  output logic                  b_col_valid [TC]
);
  localparam int unsigned KW = (TP > 1) ? $clog2(TP) : 1;
  localparam int unsigned CW = (TC > 1) ? $clog2(TC) : 1;

  word_t mem [TC][TP];
  logic [KW-1:0] wr_k;
  logic [CW-1:0] wr_j;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_k <= '0;
      wr_j <= '0;
    end else if (ld_clear) begin
      wr_k <= '0;
      wr_j <= '0;
    end else if (ld_valid) begin
      if (wr_j == CW'(TC - 1)) begin
        wr_j <= '0;
        wr_k <= wr_k + 1'b1;
      end else begin
        wr_j <= wr_j + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid && !ld_clear) mem[wr_j][wr_k] <= ld_data;
  end

  word_t rd_q  [TC];
  logic  rdv_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdv_q <= 1'b0;
    else        rdv_q <= rd_valid;
  end
  always_ff @(posedge clk) begin
    if (rd_valid)
      for (int j = 0; j < TC; j++) rd_q[j] <= mem[j][rd_k];
  end

  for (genvar j = 0; j < TC; j++) begin : g_skew
    if (j == 0) begin : g_direct
      assign b_col[j]       = rd_q[j];
      assign b_col_valid[j] = rdv_q;
    end else begin : g_delay
      word_t        d_q [j];
      logic [j-1:0] v_q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) v_q <= '0;
        else        v_q <= j'({v_q, rdv_q});
      end
      always_ff @(posedge clk) begin
        d_q[0] <= rd_q[j];
        for (int s = 1; s < j; s++) d_q[s] <= d_q[s-1];
      end
      assign b_col[j]       = d_q[j-1];
      assign b_col_valid[j] = v_q[j-1];
    end
  end
endmodule

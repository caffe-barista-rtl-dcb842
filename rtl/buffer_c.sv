// buffer_c: the Tr x Tc output buffer between the PE mesh and off-chip memory.
//
// On `capture` it takes the finished tile from all PEs in one cycle, so the
// mesh is free for the next tile. It then hands the words out in row-major
// order (C[0][0], C[0][1], ..., C[Tr-1][Tc-1]) as a shift register: out_data
// is the current head, and `pop` moves the next word up. `count` says how many
// words are still to be sent. A shift register avoids a Tr*Tc-to-1
// multiplexer; the paper shows Buffer C of size Tr x Tc and its place in the
// dataflow (Fig. 2), the shift-out organisation is this design's own.
module buffer_c
  import barista_pkg::*;
#(
  parameter int unsigned TR = TR_DEF,
  parameter int unsigned TC = TC_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     capture,
  input  word_t                    c_in [TR][TC],
  input  logic                     pop,
  output word_t                    out_data,
  output logic [$clog2(TR*TC+1)-1:0] count
);
  localparam int unsigned N  = TR * TC;
  localparam int unsigned NW = $clog2(N + 1);

  word_t q [N];

  always_ff @(posedge clk) begin
    if (capture) begin
      for (int i = 0; i < TR; i++)
        for (int j = 0; j < TC; j++)
          q[i*TC + j] <= c_in[i][j];
    end else if (pop) begin
      for (int n = 0; n < N - 1; n++) q[n] <= q[n+1];
      q[N-1] <= FP32_ZERO;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      count <= '0;
    else if (capture)                count <= NW'(N);
    else if (pop && count != '0)     count <= count - 1'b1;
  end

  assign out_data = q[0];

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != '0)
    else $error("buffer_c: pop from an empty buffer");
endmodule

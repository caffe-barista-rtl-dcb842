// burst_writer: writes one finished output tile to off-chip memory as a
// single burst.
//
// A `start` pulse with a word address and a length issues one write request
// (aw_valid/aw_ready), then sends `len` data beats (w_valid/w_ready, w_last on
// the final one) taken from the source (Buffer C): src_data is the word to
// send, src_pop advances the source when a beat is accepted. It then waits for
// the write response (b_valid/b_ready) so that the result is in memory before
// `done` pulses. The paper shows the tile going from Buffer C back to
// off-chip memory; the channel protocol (AXI-like, word-addressed) is this
// design's own choice. w_data is src_data itself, with no register: Buffer C
// holds the word steady until src_pop, which the stall assertion below checks.
module burst_writer
  import barista_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t base,
  input  len_t  len,
  output logic  busy,
  output logic  done,
  input  word_t src_data,
  output logic  src_pop,
  // off-chip memory write channels
  output logic  aw_valid,
  input  logic  aw_ready,
  output addr_t aw_addr,
  output len_t  aw_len,
  output logic  w_valid,
  input  logic  w_ready,
  output word_t w_data,
  output logic  w_last,
  input  logic  b_valid,
  output logic  b_ready
);
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wstate_e;
  wstate_e st;
  len_t    cnt, len_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= W_IDLE;
      cnt     <= '0;
      len_q   <= '0;
      aw_addr <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        W_IDLE: if (start) begin
          aw_addr <= base;
          len_q   <= len;
          cnt     <= '0;
          st      <= W_ADDR;
        end
        W_ADDR: if (aw_ready) st <= W_DATA;
        W_DATA: if (w_ready) begin
          cnt <= cnt + 1'b1;
          if (w_last) st <= W_RESP;
        end
        W_RESP: if (b_valid) begin
          st   <= W_IDLE;
          done <= 1'b1;
        end
        default: st <= W_IDLE;
      endcase
    end
  end

  assign aw_valid = (st == W_ADDR);
  assign aw_len   = len_q;
  assign w_valid  = (st == W_DATA);
  assign w_data   = src_data;
  assign w_last   = (st == W_DATA) && (cnt == len_q - 1'b1);
  assign src_pop  = w_valid && w_ready;
  assign b_ready  = (st == W_RESP);
  assign busy     = (st != W_IDLE);

  // AXI-style rule: once raised, a valid stays up with stable payload until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (w_valid && !w_ready) |=> (w_valid && $stable(w_data)))
    else $error("burst_writer: write data changed while stalled");
endmodule

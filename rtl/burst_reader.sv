// burst_reader: reads one tile from off-chip memory as a single burst.
//
// A `start` pulse with a word address and a length (in words) issues one read
// request on the address channel (ar_valid/ar_ready, held until accepted),
// then accepts the data beats (r_valid/r_ready) and forwards each as
// out_valid/out_data to the buffer being loaded, in order. `done` pulses in
// the cycle after the last beat. The memory may stall either channel for any
// number of cycles. The paper states that input tiles are burst-read from
// off-chip memory into buffers A and B; the valid/ready channel protocol,
// modelled on AXI but word-addressed with a length in beats, is this design's
// own choice. out_data is r_data itself, with no register: the reader adds no
// latency to the data path, and the buffer's load port registers the word.
module burst_reader
  import barista_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t base,
  input  len_t  len,
  output logic  busy,
  output logic  done,
  output logic  out_valid,
  output word_t out_data,
  // off-chip memory read channels
  output logic  ar_valid,
  input  logic  ar_ready,
  output addr_t ar_addr,
  output len_t  ar_len,
  input  logic  r_valid,
  output logic  r_ready,
  input  word_t r_data,
  input  logic  r_last
);
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA} rstate_e;
  rstate_e st;
  len_t    cnt, len_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= R_IDLE;
      cnt     <= '0;
      len_q   <= '0;
      ar_addr <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        R_IDLE: if (start) begin
          ar_addr <= base;
          len_q   <= len;
          cnt     <= '0;
          st      <= R_ADDR;
        end
        R_ADDR: if (ar_ready) st <= R_DATA;
        R_DATA: if (r_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == len_q - 1'b1) begin
            st   <= R_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

  assign ar_valid  = (st == R_ADDR);
  assign ar_len    = len_q;
  assign r_ready   = (st == R_DATA);
  assign out_valid = r_valid && r_ready;
  assign out_data  = r_data;
  assign busy      = (st != R_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n)
                   (r_valid && r_ready) |-> (r_last == (cnt == len_q - 1'b1)))
    else $error("burst_reader: r_last does not mark the final beat");
  assert property (@(posedge clk) disable iff (!rst_n) start && (st == R_IDLE) |-> len != '0)
    else $error("burst_reader: zero-length burst");
endmodule

// offchip_mem_model: behavioural model of the board's off-chip memory (DDR4
// behind its controller) as seen by the GEMM kernel. Not synthesizable logic
// of the design; used only by testbenches.
//
// Word-addressed array of DEPTH 32-bit words with one read channel pair
// (ar/r) and one write channel pair (aw/w/b), one burst at a time on each.
// When STALLS is set it stalls at random: address ready held low, gaps in the
// read data, write data ready held low and a delayed write response. It counts
// the stall cycles so a testbench can confirm that back-pressure happened.
// Testbenches fill and inspect `mem` directly (host-side transfers).
module offchip_mem_model #(
  parameter int unsigned DEPTH  = 65536,
  parameter bit          STALLS = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
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
  input  logic        b_ready
);
  logic [31:0] mem [DEPTH];

  int rd_stall_cycles = 0, wr_stall_cycles = 0, addr_wait_cycles = 0;
  int rd_bursts = 0, wr_bursts = 0;
  int rd_words = 0, wr_words = 0;        // beats transferred

  // read side
  logic        rd_act;
  logic [31:0] rd_ptr;
  logic [15:0] rd_left;
  // write side
  logic        wr_act, wr_resp;
  logic [31:0] wr_ptr;
  logic [15:0] wr_left;
  int          resp_wait;

  function automatic bit coin(input int pct);
    return STALLS && ($urandom_range(99, 0) < pct);
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_ready <= 0; r_valid <= 0; r_last <= 0; r_data <= 0;
      aw_ready <= 0; w_ready <= 0; b_valid <= 0;
      rd_act <= 0; wr_act <= 0; wr_resp <= 0;
      rd_ptr <= 0; rd_left <= 0; wr_ptr <= 0; wr_left <= 0; resp_wait <= 0;
    end else begin
      // ---- read address ----
      if (ar_valid && ar_ready) begin
        rd_act   <= 1; rd_ptr <= ar_addr; rd_left <= ar_len; rd_bursts <= rd_bursts + 1;
        ar_ready <= 0;
      end else begin
        ar_ready <= !rd_act && ar_valid && !coin(30);
        if (ar_valid && !ar_ready) addr_wait_cycles <= addr_wait_cycles + 1;
      end
      // ---- read data ----
      if (r_valid && r_ready) begin
        rd_words <= rd_words + 1;
        r_valid <= 0;
        if (r_last) rd_act <= 0;
      end
      if (rd_act && rd_left != 0 && (!r_valid || r_ready) && !(r_valid && r_ready && r_last)) begin
        if (!coin(20)) begin
          r_valid <= 1;
          r_data  <= mem[rd_ptr];
          r_last  <= (rd_left == 1);
          rd_ptr  <= rd_ptr + 1;
          rd_left <= rd_left - 1;
        end else begin
          rd_stall_cycles <= rd_stall_cycles + 1;
        end
      end
      // ---- write address ----
      if (aw_valid && aw_ready) begin
        wr_act <= 1; wr_ptr <= aw_addr; wr_left <= aw_len; wr_bursts <= wr_bursts + 1;
        aw_ready <= 0;
      end else begin
        aw_ready <= !wr_act && !wr_resp && aw_valid && !coin(30);
        if (aw_valid && !aw_ready) addr_wait_cycles <= addr_wait_cycles + 1;
      end
      // ---- write data ----
      if (w_valid && w_ready) begin
        wr_words <= wr_words + 1;
        mem[wr_ptr] <= w_data;
        wr_ptr  <= wr_ptr + 1;
        wr_left <= wr_left - 1;
        if (w_last) begin
          wr_act <= 0; wr_resp <= 1; resp_wait <= int'($urandom_range(STALLS ? 6 : 0, 0));
          if (wr_left != 1) $error("offchip_mem_model: w_last before the burst length");
        end
      end
      if (w_valid && !w_ready) wr_stall_cycles <= wr_stall_cycles + 1;
      w_ready <= wr_act && !(w_valid && w_ready && w_last) && !coin(25);
      // ---- write response ----
      if (b_valid && b_ready) begin
        b_valid <= 0; wr_resp <= 0;
      end else if (wr_resp && !b_valid) begin
        if (resp_wait == 0) b_valid <= 1;
        else resp_wait <= resp_wait - 1;
      end
    end
  end
endmodule

// pe: processing element of the systolic GEMM mesh; computes one element of
// the Tr x Tc output tile.
//
// Each cycle that an A word and a B word arrive together the PE multiplies them
// (fp32_mul, Q cycles) and adds the product into one of Q+1 partial sums kept
// in its local cache ("precision-aware interleaving"). Successive products go
// to successive cache slots in round-robin order; because the accumulation loop
// (adder latency plus the cache write) is exactly Q+1 cycles long, a slot's
// previous sum is always back in the cache when the slot comes round again, so
// the PE accepts one operand pair per cycle with no stalls. The A word is
// passed on to the right neighbour and the B word to the neighbour below, one
// register each.
//
// When the controller pulses reduce_start (only when the PE is idle), the PE
// sums the Q+1 partials one after the other through the same adder: each step
// waits for the previous sum, so the reduction takes (Q+1) * (ADD_LAT+1) =
// (Q+1)^2 cycles, the term the paper's cycle model uses. Every slot is cleared
// to zero as it is read, leaving the cache ready for the next output tile.
// c_out is valid, with a one-cycle c_valid pulse, exactly (Q+1)^2 cycles after
// reduce_start. The reduction order is ((((0 + p0) + p1) + p2) ... + pQ).
//
// From the paper: one MAC unit per PE, the (Q+1)-element cache, the
// interleaving, A passed right and B passed down, word-wide paths (Fig. 2).
// This design's own choices: the adder latency ADD_LAT = Q, the sequential
// reduction through the shared adder, valid bits travelling with A and B, and
// `idle`, which tells the controller that no operation is in flight.
module pe
  import barista_pkg::*;
#(
  parameter int unsigned Q       = Q_DEF,  // multiplier latency
  parameter int unsigned ADD_LAT = Q_DEF   // adder latency (assumed equal to Q)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t a_in,
  input  logic  a_in_valid,
  input  word_t b_in,
  input  logic  b_in_valid,
  output word_t a_out,
  output logic  a_out_valid,
  output word_t b_out,
  output logic  b_out_valid,
  input  logic  reduce_start,
  output word_t c_out,
  output logic  c_valid,
  output logic  idle
);
  localparam int unsigned SLOTS  = Q + 1;               // cache depth
  localparam int unsigned SLOT_W = $clog2(SLOTS);
  localparam int unsigned TAG_W  = SLOT_W + 1;          // {is_reduction, slot}
  localparam int unsigned FLY_W  = $clog2(Q + ADD_LAT + 4);

  initial assert (ADD_LAT + 1 <= SLOTS)
    else $fatal(1, "pe: accumulation loop longer than the number of cache slots");

  // ---- systolic forwarding -------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out_valid <= 1'b0;
      b_out_valid <= 1'b0;
      a_out       <= '0;
      b_out       <= '0;
    end else begin
      a_out_valid <= a_in_valid;
      b_out_valid <= b_in_valid;
      a_out       <= a_in;
      b_out       <= b_in;
    end
  end

  // ---- multiply -------------------------------------------------------------
  logic  mul_valid;
  word_t mul_p;
  logic  mac_in;
  assign mac_in = a_in_valid && b_in_valid;

  fp32_mul #(.LAT(Q)) u_mul (
    .clk, .rst_n, .in_valid(mac_in), .a(a_in), .b(b_in),
    .out_valid(mul_valid), .p(mul_p)
  );

  // ---- cache and accumulate -------------------------------------------------
  word_t             cache [SLOTS];
  logic [SLOT_W-1:0] acc_slot;       // slot for the next product
  word_t             acc;            // running sum of the reduction
  logic              red_active;
  logic              red_next;       // issue the next reduction step
  logic [SLOT_W-1:0] red_idx;

  logic              red_issue;
  logic [SLOT_W-1:0] red_slot;
  logic              add_in_valid, add_out_valid;
  logic [TAG_W-1:0]  add_in_tag, add_out_tag;
  word_t             add_a, add_b, add_s;

  assign red_issue = reduce_start || red_next;
  assign red_slot  = reduce_start ? '0 : red_idx;

  always_comb begin
    add_in_valid = 1'b0;
    add_in_tag   = '0;
    add_a        = mul_p;
    add_b        = cache[acc_slot];
    if (red_issue) begin
      add_in_valid = 1'b1;
      add_in_tag   = {1'b1, red_slot};
      add_a        = reduce_start ? FP32_ZERO : acc;
      add_b        = cache[red_slot];
    end else if (mul_valid) begin
      add_in_valid = 1'b1;
      add_in_tag   = {1'b0, acc_slot};
    end
  end

  fp32_add #(.LAT(ADD_LAT), .TAG_W(TAG_W)) u_add (
    .clk, .rst_n, .in_valid(add_in_valid), .in_tag(add_in_tag),
    .a(add_a), .b(add_b), .out_valid(add_out_valid), .out_tag(add_out_tag),
    .s(add_s)
  );

  logic              out_is_red;
  logic [SLOT_W-1:0] out_slot;
  assign out_is_red = add_out_tag[TAG_W-1];
  assign out_slot   = add_out_tag[SLOT_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLOTS; i++) cache[i] <= FP32_ZERO;
      acc_slot   <= '0;
      acc        <= FP32_ZERO;
      red_active <= 1'b0;
      red_next   <= 1'b0;
      red_idx    <= '0;
      c_out      <= FP32_ZERO;
      c_valid    <= 1'b0;
    end else begin
      c_valid  <= 1'b0;
      red_next <= 1'b0;
      // product enters the accumulation loop
      if (mul_valid && !red_issue)
        acc_slot <= (acc_slot == SLOT_W'(SLOTS - 1)) ? '0 : acc_slot + 1'b1;
      // reduction step issued: the slot is consumed and cleared
      if (red_issue) begin
        cache[red_slot] <= FP32_ZERO;
        red_active      <= 1'b1;
        red_idx         <= red_slot + 1'b1;
        acc_slot        <= '0;
      end
      // adder result returns
      if (add_out_valid) begin
        if (!out_is_red) begin
          cache[out_slot] <= add_s;
        end else begin
          acc <= add_s;
          if (out_slot == SLOT_W'(SLOTS - 1)) begin
            c_out      <= add_s;
            c_valid    <= 1'b1;
            red_active <= 1'b0;
          end else begin
            red_next <= 1'b1;
          end
        end
      end
    end
  end

  // ---- in-flight tracking -----------------------------------------------------
  logic [FLY_W-1:0] inflight;        // products between multiplier input and cache write
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + FLY_W'(mac_in) - FLY_W'(add_out_valid && !out_is_red);
  end

  assign idle = (inflight == '0) && !mac_in && !red_active && !reduce_start;

  // The reduction must never share the adder with a product.
  assert property (@(posedge clk) disable iff (!rst_n) !(red_issue && mul_valid))
    else $error("pe: reduction overlaps accumulation");
  assert property (@(posedge clk) disable iff (!rst_n) a_in_valid == b_in_valid)
    else $error("pe: A and B operands out of step");
endmodule

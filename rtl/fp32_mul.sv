// fp32_mul: pipelined IEEE-754 single-precision multiplier, the multiply half
// of a PE's multiply-accumulate unit.
//
// The product of the two 24-bit significands is normalised and rounded to
// nearest-even in one combinational stage; LAT pipeline registers follow it,
// so a result appears exactly LAT cycles after its operands (throughput one
// per cycle). The registers are placed after the logic so that synthesis can
// retime them into the multiplier, as a DSP-based FP32 multiplier would be
// built. The latency of LAT = Q = 10 cycles is the figure the paper gives for
// an FP32 multiply on the target DSPs; the arithmetic itself (FP32) follows the
// paper, while the number handling is this design's own choice: subnormal
// inputs and results are flushed to zero, overflow gives infinity, any NaN or
// inf*0 gives the quiet NaN 0x7fc00000.
//
// Interface: in_valid/a/b in, out_valid/p out; no back-pressure.
module fp32_mul
  import barista_pkg::*;
#(
  parameter int unsigned LAT = Q_DEF   // pipeline latency in cycles (>= 1)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t a,
  input  word_t b,
  output logic  out_valid,
  output word_t p
);
  initial assert (LAT >= 1) else $fatal(1, "fp32_mul: LAT must be >= 1");

  fp32_t fa, fb;
  word_t res;

  always_comb begin
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, sgn;
    logic [47:0] prod;
    logic [23:0] man;
    logic        guard, sticky;
    logic signed [10:0] e;

    fa = fp32_t'(a);
    fb = fp32_t'(b);
    a_zero = (fa.exp == 8'd0);              // zero or subnormal (flushed)
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hff) && (fa.man == '0);
    b_inf  = (fb.exp == 8'hff) && (fb.man == '0);
    a_nan  = (fa.exp == 8'hff) && (fa.man != '0);
    b_nan  = (fb.exp == 8'hff) && (fb.man != '0);
    sgn    = fa.sign ^ fb.sign;

    prod   = {1'b1, fa.man} * {1'b1, fb.man};
    e      = $signed({3'b000, fa.exp}) + $signed({3'b000, fb.exp}) - 11'sd127;
    if (prod[47]) begin
      man    = {1'b0, prod[46:24]};
      guard  = prod[23];
      sticky = |prod[22:0];
      e      = e + 11'sd1;
    end else begin
      man    = {1'b0, prod[45:23]};
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    if (guard && (sticky || man[0])) man = man + 24'd1;
    if (man[23]) begin                       // rounding carried out
      man = '0;
      e   = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      res = FP32_QNAN;
    else if (a_inf || b_inf)
      res = {sgn, 8'hff, 23'd0};
    else if (a_zero || b_zero)
      res = {sgn, 31'd0};
    else if (e >= 11'sd255)
      res = {sgn, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      res = {sgn, 31'd0};
    else
      res = {sgn, e[7:0], man[22:0]};
  end

  // Output pipeline: LAT stages of data and valid.
  logic  [LAT-1:0] vld_q;
  word_t           dat_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= LAT'({vld_q, in_valid});
  end

  always_ff @(posedge clk) begin
    dat_q[0] <= res;
    for (int i = 1; i < LAT; i++) dat_q[i] <= dat_q[i-1];
  end

  assign out_valid = vld_q[LAT-1];
  assign p         = dat_q[LAT-1];
endmodule

// fp32_add: pipelined IEEE-754 single-precision adder, the accumulate half of
// a PE's multiply-accumulate unit.
//
// One combinational stage aligns the smaller operand (keeping guard, round and
// sticky bits), adds or subtracts the significands, normalises and rounds to
// nearest-even; LAT pipeline registers follow it, so a sum appears exactly LAT
// cycles after its operands, one operation per cycle. A TAG_W-bit side-band tag
// travels with each operation; the PE uses it to know which cache slot, or the
// final reduction, a sum belongs to.
//
// The paper gives only the multiplier latency (Q). Giving the adder the same
// latency, LAT = 10, is this design's own assumption; with one more cycle to
// write the PE cache it makes the accumulation loop Q+1 cycles long, which is
// why Q+1 interleaved partial sums keep the PE busy every cycle. Number
// handling as in fp32_mul: subnormals flush to zero, x + (-x) = +0, NaN or
// inf-inf give 0x7fc00000.
//
// Interface: in_valid/in_tag/a/b in, out_valid/out_tag/s out; no back-pressure.
module fp32_add
  import barista_pkg::*;
#(
  parameter int unsigned LAT   = Q_DEF, // pipeline latency in cycles (>= 1)
  parameter int unsigned TAG_W = 1      // side-band tag width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  word_t            a,
  input  word_t            b,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output word_t            s
);
  initial assert (LAT >= 1) else $fatal(1, "fp32_add: LAT must be >= 1");

  word_t res;

  always_comb begin
    fp32_t       fa, fb, big, sml;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [7:0]  d;
    logic [26:0] mb, ms, shifted;   // {hidden, 23 fraction, guard, round, sticky}
    logic [27:0] sum;
    logic        stk;
    logic [4:0]  lz;
    logic        found;
    logic signed [10:0] e;
    logic [23:0] man;
    logic        rnd_up;

    res    = FP32_ZERO;
    lz     = 5'd0;
    found  = 1'b0;
    man    = '0;
    rnd_up = 1'b0;
    fa = fp32_t'(a);
    fb = fp32_t'(b);
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hff) && (fa.man == '0);
    b_inf  = (fb.exp == 8'hff) && (fb.man == '0);
    a_nan  = (fa.exp == 8'hff) && (fa.man != '0);
    b_nan  = (fb.exp == 8'hff) && (fb.man != '0);

    // Order by magnitude so the significand difference is never negative.
    if ({fa.exp, fa.man} >= {fb.exp, fb.man}) begin big = fa; sml = fb; end
    else                                      begin big = fb; sml = fa; end

    stk = 1'b0;
    d   = big.exp - sml.exp;
    mb = {1'b1, big.man, 3'b000};
    ms = {1'b1, sml.man, 3'b000};
    if (d > 8'd26) begin
      shifted = 27'd1;                       // only the sticky bit survives
    end else begin
      shifted = ms >> d;
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && ms[i]) stk = 1'b1;
      shifted[0] = shifted[0] | stk;
    end

    e = $signed({3'b000, big.exp});
    if (big.sign == sml.sign) sum = {1'b0, mb} + {1'b0, shifted};
    else                      sum = {1'b0, mb} - {1'b0, shifted};

    if (sum[27]) begin                       // carry out: shift right one
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end else begin                           // cancellation: shift left
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) found = 1'b1;
        else if (!found)      lz = lz + 5'd1;
      end
      sum = sum << lz;
      e   = e - $signed({6'd0, lz});
    end

    man    = sum[26:3];
    rnd_up = sum[2] && (sum[1] || sum[0] || man[0]);
    if (rnd_up) begin
      if (man == 24'hff_ffff) begin
        man = 24'h80_0000;
        e   = e + 11'sd1;
      end else begin
        man = man + 24'd1;
      end
    end

    if (a_nan || b_nan || (a_inf && b_inf && (fa.sign != fb.sign)))
      res = FP32_QNAN;
    else if (a_inf)
      res = a;
    else if (b_inf)
      res = b;
    else if (a_zero && b_zero)
      res = {fa.sign & fb.sign, 31'd0};
    else if (a_zero)
      res = b;
    else if (b_zero)
      res = a;
    else if (sum[26:0] == '0)
      res = FP32_ZERO;                       // exact cancellation gives +0
    else if (e >= 11'sd255)
      res = {big.sign, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      res = {big.sign, 31'd0};
    else
      res = {big.sign, e[7:0], man[22:0]};
  end

  logic  [LAT-1:0]   vld_q;
  word_t             dat_q [LAT];
  logic  [TAG_W-1:0] tag_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= LAT'({vld_q, in_valid});
  end

  always_ff @(posedge clk) begin
    dat_q[0] <= res;
    tag_q[0] <= in_tag;
    for (int i = 1; i < LAT; i++) begin
      dat_q[i] <= dat_q[i-1];
      tag_q[i] <= tag_q[i-1];
    end
  end

  assign out_valid = vld_q[LAT-1];
  assign out_tag   = tag_q[LAT-1];
  assign s         = dat_q[LAT-1];
endmodule

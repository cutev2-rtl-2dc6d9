// cute_pe: one processing element of the PE array, a mixed-precision
// dot-product-and-accumulate unit.
//
// Each valid input computes out = c + sum_i a_i * b_i over one KPE_BITS-wide
// slice of A and of B.  The slice holds KPE_BITS/8 INT8 or FP8 (E4M3)
// elements, KPE_BITS/16 FP16 or BF16 elements, or KPE_BITS/32 TF32 elements.
// INT8 accumulates into int32 (exact, wrapping modulo 2^32); the floating
// formats accumulate into fp32.
//
// As in the paper, the products are aligned to a common (maximum) exponent,
// truncated and summed, and the sum is normalised once.  The paper gives a
// six-stage pipeline and names the steps (decode, exponent add, mantissa
// multiply, exponent max, alignment, add, normalise); the grouping of those
// steps into the six stages below is this design's choice:
//   1 DECODE   split elements into sign, exponent and mantissa
//   2 MUL      exponent add and mantissa multiply for every lane
//   3 EMAX     maximum exponent over the products and the accumulator,
//              and each term's alignment shift
//   4 ALIGN    shift each term right to the common exponent, keeping
//              FRAC guard bits below the largest LSB, truncating the rest
//   5 ADD      signed sum of all terms
//   6 NORM     leading-one detect and conversion to fp32 (round toward zero)
// Latency is six cycles from in_valid to out_valid, one result per cycle,
// and the pipeline never stalls.  Subnormal inputs are honoured; subnormal
// results are flushed to zero, overflow gives infinity, and NaN/Inf inputs
// are treated as ordinary large numbers: the paper says nothing about
// special values, so these are this design's choices.
module cute_pe
  import cute_pkg::*;
#(
  parameter int unsigned KPE_BITS = 512
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  dtype_e              in_dtype,
  input  logic [KPE_BITS-1:0] in_a,
  input  logic [KPE_BITS-1:0] in_b,
  input  logic [31:0]         in_c,
  output logic                out_valid,
  output logic [31:0]         out_d
);

  localparam int unsigned LANES = KPE_BITS / 8;
  localparam int unsigned MW    = 11;          // decoded mantissa, hidden bit included
  localparam int unsigned PW    = 2 * MW;      // product mantissa
  localparam int unsigned AW    = 24;          // fp32 accumulator mantissa
  localparam int unsigned FRAC  = 24;          // guard bits kept below the max LSB
  localparam int unsigned LW    = AW + FRAC;   // aligned magnitude width
  localparam int unsigned SW    = LW + $clog2(LANES + 1) + 1;  // signed sum width
  localparam int          EMIN  = -512;

  typedef struct packed {
    logic                s;
    logic signed [9:0]   e;   // exponent of the mantissa's LSB
    logic [MW-1:0]       m;
  } dterm_t;

  // Decode one element (right-aligned in raw) of the given type.
  function automatic dterm_t decode(input dtype_e dt, input logic [31:0] raw);
    dterm_t t;
    logic [7:0] ef;
    t = '0;
    unique case (dt)
      DT_INT8: begin
        t.s = raw[7];
        t.m = MW'(raw[7] ? 8'(~raw[7:0] + 8'd1) : raw[7:0]);
        t.e = '0;
      end
      DT_FP8: begin
        ef  = {4'd0, raw[6:3]};
        t.s = raw[7];
        t.m = MW'({ef != 0, raw[2:0]});
        t.e = 10'(signed'({2'b00, (ef == 0) ? 8'd1 : ef})) - 10'sd10;
      end
      DT_FP16: begin
        ef  = {3'd0, raw[14:10]};
        t.s = raw[15];
        t.m = MW'({ef != 0, raw[9:0]});
        t.e = 10'(signed'({2'b00, (ef == 0) ? 8'd1 : ef})) - 10'sd25;
      end
      DT_BF16: begin
        ef  = raw[14:7];
        t.s = raw[15];
        t.m = MW'({ef != 0, raw[6:0]});
        t.e = 10'(signed'({2'b00, (ef == 0) ? 8'd1 : ef})) - 10'sd134;
      end
      default: begin  // TF32
        ef  = raw[30:23];
        t.s = raw[31];
        t.m = MW'({ef != 0, raw[22:13]});
        t.e = 10'(signed'({2'b00, (ef == 0) ? 8'd1 : ef})) - 10'sd137;
      end
    endcase
    return t;
  endfunction

  // Raw element of lane i for the given type (lanes beyond the type's
  // element count read as zero).
  function automatic logic [31:0] lane_raw(input dtype_e dt, input logic [KPE_BITS-1:0] v,
                                           input int unsigned i);
    unique case (dt)
      DT_INT8, DT_FP8:  return {24'd0, v[i*8 +: 8]};
      DT_FP16, DT_BF16: return (i < LANES / 2) ? {16'd0, v[(i % (LANES / 2))*16 +: 16]} : 32'd0;
      default:          return (i < LANES / 4) ? v[(i % (LANES / 4))*32 +: 32] : 32'd0;
    endcase
  endfunction

  // ---------------------------------------------------------------- stage 1
  logic          s1_v;
  dtype_e        s1_dt;
  dterm_t        s1_a [LANES];
  dterm_t        s1_b [LANES];
  logic [31:0]   s1_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_dt <= in_dtype;
      s1_c  <= in_c;
      for (int unsigned i = 0; i < LANES; i++) begin
        s1_a[i] <= decode(in_dtype, lane_raw(in_dtype, in_a, i));
        s1_b[i] <= decode(in_dtype, lane_raw(in_dtype, in_b, i));
      end
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic               s2_v;
  dtype_e             s2_dt;
  logic               s2_ps [LANES];
  logic signed [10:0] s2_pe [LANES];
  logic [PW-1:0]      s2_pm [LANES];
  logic [31:0]        s2_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= s1_v;
  end

  always_ff @(posedge clk) begin
    if (s1_v) begin
      s2_dt <= s1_dt;
      s2_c  <= s1_c;
      for (int unsigned i = 0; i < LANES; i++) begin
        s2_ps[i] <= s1_a[i].s ^ s1_b[i].s;
        s2_pe[i] <= 11'(s1_a[i].e) + 11'(s1_b[i].e);
        s2_pm[i] <= PW'(s1_a[i].m) * PW'(s1_b[i].m);
      end
    end
  end

  // ---------------------------------------------------------------- stage 3
  // Accumulator term (fp32 view) and the maximum exponent.
  logic               acc_s;
  logic signed [10:0] acc_e;
  logic [AW-1:0]      acc_m;
  logic signed [10:0] emax;

  always_comb begin
    acc_s = s2_c[31];
    acc_m = {s2_c[30:23] != 8'd0, s2_c[22:0]};
    acc_e = 11'(signed'({3'b000, (s2_c[30:23] == 8'd0) ? 8'd1 : s2_c[30:23]})) - 11'sd150;
    emax  = 11'(EMIN);
    if (acc_m != '0) emax = acc_e;
    for (int unsigned i = 0; i < LANES; i++)
      if (s2_pm[i] != '0 && s2_pe[i] > emax) emax = s2_pe[i];
  end

  logic               s3_v;
  dtype_e             s3_dt;
  logic               s3_ps [LANES];
  logic [PW-1:0]      s3_pm [LANES];
  logic [10:0]        s3_sh [LANES];
  logic [31:0]        s3_c;
  logic [AW-1:0]      s3_am;
  logic               s3_as;
  logic [10:0]        s3_ash;
  logic signed [10:0] s3_emax;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s3_v <= 1'b0;
    else        s3_v <= s2_v;
  end

  always_ff @(posedge clk) begin
    if (s2_v) begin
      s3_dt   <= s2_dt;
      s3_c    <= s2_c;
      s3_am   <= acc_m;
      s3_as   <= acc_s;
      s3_ash  <= 11'(emax - acc_e);
      s3_emax <= emax;
      for (int unsigned i = 0; i < LANES; i++) begin
        s3_ps[i] <= s2_ps[i];
        s3_pm[i] <= s2_pm[i];
        s3_sh[i] <= 11'(emax - s2_pe[i]);
      end
    end
  end

  // ---------------------------------------------------------------- stage 4
  function automatic logic signed [LW:0] align(input logic [AW-1:0] m, input logic [10:0] sh,
                                               input logic s);
    logic [LW-1:0] v;
    v = (sh >= 11'(LW)) ? '0 : ({m, {FRAC{1'b0}}} >> sh);
    return s ? -$signed({1'b0, v}) : $signed({1'b0, v});
  endfunction

  logic               s4_v;
  logic               s4_int;
  logic signed [LW:0] s4_t [LANES + 1];
  logic signed [10:0] s4_emax;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s4_v <= 1'b0;
    else        s4_v <= s3_v;
  end

  always_ff @(posedge clk) begin
    if (s3_v) begin
      s4_int  <= (s3_dt == DT_INT8);
      s4_emax <= s3_emax;
      for (int unsigned i = 0; i < LANES; i++) begin
        if (s3_dt == DT_INT8)
          s4_t[i] <= s3_ps[i] ? -$signed((LW+1)'(s3_pm[i])) : $signed((LW+1)'(s3_pm[i]));
        else
          s4_t[i] <= align(AW'(s3_pm[i]), s3_sh[i], s3_ps[i]);
      end
      if (s3_dt == DT_INT8) s4_t[LANES] <= (LW+1)'($signed(s3_c));
      else                  s4_t[LANES] <= align(s3_am, s3_ash, s3_as);
    end
  end

  // ---------------------------------------------------------------- stage 5
  logic signed [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i <= LANES; i++) sum += SW'(s4_t[i]);
  end

  logic                 s5_v;
  logic                 s5_int;
  logic signed [SW-1:0] s5_sum;
  logic signed [10:0]   s5_emax;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s5_v <= 1'b0;
    else        s5_v <= s4_v;
  end

  always_ff @(posedge clk) begin
    if (s4_v) begin
      s5_int  <= s4_int;
      s5_sum  <= sum;
      s5_emax <= s4_emax;
    end
  end

  // ---------------------------------------------------------------- stage 6
  // value = s5_sum * 2^(s5_emax - FRAC)
  logic [31:0]        fp;
  logic [SW-1:0]      mag;
  logic [SW-1:0]      nrm;
  int                 msb;
  logic signed [12:0] bexp;

  always_comb begin
    mag = s5_sum[SW-1] ? SW'(-s5_sum) : SW'(s5_sum);
    msb = 0;
    for (int i = 0; i < int'(SW); i++) if (mag[i]) msb = i;
    nrm  = (msb >= 23) ? (mag >> (msb - 23)) : (mag << (23 - msb));
    bexp = 13'(msb) + 13'(s5_emax) - 13'(FRAC) + 13'sd127;
    if (mag == '0)          fp = 32'd0;
    else if (bexp >= 13'sd255) fp = {s5_sum[SW-1], 8'hFF, 23'd0};
    else if (bexp <= 13'sd0)   fp = {s5_sum[SW-1], 31'd0};
    else                    fp = {s5_sum[SW-1], bexp[7:0], nrm[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s5_v;
  end

  always_ff @(posedge clk) begin
    if (s5_v) out_d <= s5_int ? s5_sum[31:0] : fp;
  end

endmodule

// tb_cute_pe: self-checking testbench of the mixed-precision PE.
//
// Drives random INT8, FP8 (E4M3), FP16, BF16 and TF32 dot products back to
// back and checks every result against a reference computed here with
// integers (INT8, exact) or reals (floating formats).  A floating result may
// differ from the exact sum only by the truncation the PE is allowed:
// at most 2^-16 of the sum of magnitudes of all terms.  It also checks the
// six-cycle latency of every result and one result per cycle.
module tb_cute_pe;
  import cute_pkg::*;

  localparam int unsigned KPE_BITS = 512;
  localparam int unsigned LANES = KPE_BITS / 8;
  localparam int unsigned LAT = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  dtype_e in_dtype;
  logic [KPE_BITS-1:0] in_a, in_b;
  logic [31:0] in_c;
  logic out_valid;
  logic [31:0] out_d;

  int checks = 0, failures = 0;
  longint cycle = 0;

  cute_pe #(.KPE_BITS(KPE_BITS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    bit     is_int;
    int     exp_i;
    real    exp_r;
    real    tol;
    longint t_in;
  } exp_t;
  exp_t q[$];

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // generic IEEE-like decode to real
  function automatic real to_real(input logic [31:0] v, input int eb, input int mb);
    int bias = (1 << (eb - 1)) - 1;
    int ef = int'((v >> mb) & ((1 << eb) - 1));
    int mf = int'(v & ((1 << mb) - 1));
    bit s = v[eb + mb];
    real r;
    if (ef == 0) r = real'(mf) * pow2(1 - bias - mb);
    else         r = real'(mf + (1 << mb)) * pow2(ef - bias - mb);
    return s ? -r : r;
  endfunction

  function automatic real fp32_real(input logic [31:0] v);
    return to_real(v, 8, 23);
  endfunction

  function automatic real elem_real(input dtype_e dt, input logic [31:0] raw);
    unique case (dt)
      DT_FP8:  return to_real(raw[7:0], 4, 3);
      DT_FP16: return to_real(raw[15:0], 5, 10);
      DT_BF16: return to_real(raw[15:0], 8, 7);
      default: return to_real({13'd0, raw[31:13]}, 8, 10);
    endcase
  endfunction

  // random element with a bounded exponent field
  function automatic logic [31:0] rnd_elem(input dtype_e dt);
    logic [31:0] r = $urandom;
    unique case (dt)
      DT_INT8: return {24'd0, r[7:0]};
      DT_FP8:  return {24'd0, r[7], 4'($urandom_range(4, 10)), r[2:0]};
      DT_FP16: return {16'd0, r[15], 5'($urandom_range(10, 20)), r[9:0]};
      DT_BF16: return {16'd0, r[15], 8'($urandom_range(120, 134)), r[6:0]};
      default: return {r[31], 8'($urandom_range(120, 134)), r[22:13], 13'd0};
    endcase
  endfunction

  task automatic drive(input dtype_e dt, input bit zero_some);
    exp_t e;
    int n, w;
    logic [31:0] ra, rb;
    real sa = 0.0, pa;
    real sabs = 0.0;
    int si = 0;
    n = (dt == DT_INT8 || dt == DT_FP8) ? LANES : (dt == DT_TF32) ? LANES / 4 : LANES / 2;
    w = KPE_BITS / n;
    in_a = '0; in_b = '0;
    for (int i = 0; i < n; i++) begin
      ra = rnd_elem(dt); rb = rnd_elem(dt);
      if (zero_some && ($urandom_range(0, 3) == 0)) ra = 32'd0;
      for (int j = 0; j < w; j++) begin
        in_a[i*w + j] = ra[j];
        in_b[i*w + j] = rb[j];
      end
      if (dt == DT_INT8) si += int'($signed(ra[7:0])) * int'($signed(rb[7:0]));
      else begin
        pa = elem_real(dt, ra) * elem_real(dt, rb);
        sa += pa;
        sabs += (pa < 0.0) ? -pa : pa;
      end
    end
    if (dt == DT_INT8) begin
      in_c = $urandom;
      e.is_int = 1; e.exp_i = si + int'(in_c); e.exp_r = 0.0; e.tol = 0.0;
    end else begin
      in_c = {$urandom_range(0, 1) == 1, 8'($urandom_range(120, 134)), 23'($urandom)};
      if (zero_some) in_c = 32'd0;
      sa += fp32_real(in_c);
      sabs += (fp32_real(in_c) < 0.0) ? -fp32_real(in_c) : fp32_real(in_c);
      e.is_int = 0; e.exp_i = 0; e.exp_r = sa; e.tol = sabs * pow2(-16);
    end
    e.t_in = cycle;
    in_dtype = dt;
    in_valid = 1'b1;
    q.push_back(e);
  endtask

  // checker
  always @(posedge clk) begin
    if (out_valid) begin
      exp_t e;
      real d;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        e = q.pop_front();
        if (cycle - e.t_in != LAT) begin
          failures++;
          $display("FAIL: latency %0d", cycle - e.t_in);
        end
        if (e.is_int) begin
          if (out_d !== e.exp_i) begin
            failures++;
            $display("FAIL int: got %0d exp %0d", $signed(out_d), e.exp_i);
          end
        end else begin
          d = fp32_real(out_d) - e.exp_r;
          if (d < 0.0) d = -d;
          if (d > e.tol) begin
            failures++;
            $display("FAIL fp: got %e exp %e tol %e", fp32_real(out_d), e.exp_r, e.tol);
          end
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dtype_e dts [5] = '{DT_INT8, DT_FP8, DT_FP16, DT_BF16, DT_TF32};
    in_valid = 0; in_dtype = DT_INT8; in_a = '0; in_b = '0; in_c = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // back-to-back random vectors of every type, then a few with gaps
    for (int t = 0; t < 5; t++)
      for (int i = 0; i < 40; i++) begin
        @(negedge clk);
        drive(dts[t], (i % 5) == 4);
      end
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      drive(dts[$urandom_range(0, 4)], 1'b0);
      @(negedge clk);
      in_valid = 1'b0;
    end
    @(negedge clk);
    in_valid = 1'b0;
    // exact small case: all-zero operands keep the accumulator
    @(negedge clk);
    in_dtype = DT_FP16; in_a = '0; in_b = '0; in_c = 32'h3fc00000; in_valid = 1'b1;
    begin exp_t e; e.is_int = 0; e.exp_i = 0; e.exp_r = 1.5; e.tol = 0.0; e.t_in = cycle; q.push_back(e); end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 4) @(posedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cute_pe_array: self-checking testbench of the PE array.
//
// Issues random INT8 blocks back to back (different operands on every row
// and column) and checks every PE output against c + a_i . b_j computed
// here, the latency of six cycles, and then a few BF16 blocks of small
// integers whose sums are exact in fp32.
module tb_cute_pe_array;
  import cute_pkg::*;

  localparam int unsigned MPE = 4, NPE = 4, KPE_BITS = 512, LAT = 6;
  localparam int unsigned NB = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  dtype_e in_dtype;
  logic [KPE_BITS-1:0] in_a [MPE];
  logic [KPE_BITS-1:0] in_b [NPE];
  logic [31:0] in_c [MPE][NPE];
  logic out_valid;
  logic [31:0] out_d [MPE][NPE];

  int checks = 0, failures = 0;
  longint cycle = 0;

  cute_pe_array #(.MPE(MPE), .NPE(NPE), .KPE_BITS(KPE_BITS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { logic [31:0] d [MPE][NPE]; longint t; } blk_t;
  blk_t q[$];

  // bf16 encoding of a small integer (|v| < 128)
  function automatic logic [15:0] bf16_of(input int v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    logic [15:0] r;
    if (a == 0) return 16'd0;
    while ((a >> e) > 1) e++;
    r[15] = (v < 0);
    r[14:7] = 8'(127 + e);
    r[6:0] = 7'((a << 7 >> e) & 8'h7f);
    return r;
  endfunction

  function automatic logic [31:0] fp32_of(input int v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    logic [31:0] r;
    if (a == 0) return 32'd0;
    while ((a >> e) > 1) e++;
    r[31] = (v < 0);
    r[30:23] = 8'(127 + e);
    r[22:0] = 23'((longint'(a) << 23 >> e) & 32'h7fffff);
    return r;
  endfunction

  task automatic issue(input bit fp);
    blk_t b;
    int av [MPE][64];
    int bv [NPE][64];
    int n = fp ? 32 : 64;
    for (int i = 0; i < MPE; i++)
      for (int k = 0; k < n; k++) begin
        av[i][k] = fp ? $urandom_range(0, 14) - 7 : $urandom_range(0, 255) - 128;
        if (fp) in_a[i][k*16 +: 16] = bf16_of(av[i][k]); else in_a[i][k*8 +: 8] = 8'(av[i][k]);
      end
    for (int j = 0; j < NPE; j++)
      for (int k = 0; k < n; k++) begin
        bv[j][k] = fp ? $urandom_range(0, 14) - 7 : $urandom_range(0, 255) - 128;
        if (fp) in_b[j][k*16 +: 16] = bf16_of(bv[j][k]); else in_b[j][k*8 +: 8] = 8'(bv[j][k]);
      end
    for (int i = 0; i < MPE; i++)
      for (int j = 0; j < NPE; j++) begin
        int s = fp ? $urandom_range(0, 200) - 100 : int'($urandom_range(0, 1000000)) - 500000;
        in_c[i][j] = fp ? fp32_of(s) : 32'(s);
        for (int k = 0; k < n; k++) s += av[i][k] * bv[j][k];
        b.d[i][j] = fp ? fp32_of(s) : 32'(s);
      end
    b.t = cycle;
    in_dtype = fp ? DT_BF16 : DT_INT8;
    in_valid = 1'b1;
    q.push_back(b);
  endtask

  always @(posedge clk) begin
    if (out_valid) begin
      blk_t b;
      if (q.size() == 0) begin
        failures++; checks++;
        $display("FAIL: unexpected output");
      end else begin
        b = q.pop_front();
        checks++;
        if (cycle - b.t != LAT) begin
          failures++;
          $display("FAIL: latency %0d", cycle - b.t);
        end
        for (int i = 0; i < MPE; i++)
          for (int j = 0; j < NPE; j++) begin
            checks++;
            if (out_d[i][j] !== b.d[i][j]) begin
              failures++;
              $display("FAIL: pe(%0d,%0d) got %h exp %h", i, j, out_d[i][j], b.d[i][j]);
            end
          end
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_dtype = DT_INT8;
    for (int i = 0; i < MPE; i++) in_a[i] = '0;
    for (int j = 0; j < NPE; j++) in_b[j] = '0;
    for (int i = 0; i < MPE; i++) for (int j = 0; j < NPE; j++) in_c[i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NB; t++) begin
      @(negedge clk);
      issue(t >= NB - 16);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d blocks missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

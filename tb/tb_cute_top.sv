// tb_cute_top: end-to-end testbench of the matrix unit at its default
// (paper case-study) parameters.
//
// A small behavioural memory stands in for the platform's cache / DRAM: it
// holds 64-byte beats, answers reads in order after a fixed latency, and
// accepts a read request or a write only on some cycles so that the unit
// sees back-pressure.  The testbench plays the host CPU: it writes the
// interface registers, issues tasks with ISSUE (asyncMatMul) and waits for
// them with CHECK (checkMatmul), then compares every element of C in memory
// with a reference product computed here, and checks that memory outside C
// was not touched.  Tasks cover all five data types, the three bias types,
// transposed output, partial tiles in M, N and K, several tasks queued at
// once, and a compute-bound task whose PE-array issue rate is checked
// (one MPE x NPE block per cycle).  This file runs the unit with a
// 256-bit PE reduce width; tb_cute_top_full runs the same test with every
// parameter at its default.  Counted mechanisms, each of which must
// occur: RAW hazard stall, load/compute overlap on the two banks, memory
// back-pressure, full task queue, waiting CHECK, bias zero/row/full,
// transpose, every data type.
module tb_cute_top;
  import cute_pkg::*;

  localparam int unsigned MEM_LAT = 24;
  // PE reduce width of the unit under test: 256 bits (a configuration of
  // the paper's scaling study) gives two K slices per 64-byte scratchpad
  // row, which makes the read-after-write hazard on C reachable.
  localparam int unsigned KPE = 256;
  localparam int unsigned KSUB = 512 / KPE;
  localparam bit NEED_HAZARD = 1'b1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic                 cmd_valid, cmd_ready;
  logic [6:0]           cmd_funct;
  logic [63:0]          cmd_rs1, cmd_rs2;
  logic                 resp_valid, resp_ready;
  logic [63:0]          resp_data;
  logic                 mem_rreq_valid, mem_rreq_ready;
  logic [ADDR_W-1:0]    mem_rreq_addr;
  logic                 mem_rresp_valid;
  logic [BUS_W-1:0]     mem_rresp_data;
  logic                 mem_wreq_valid, mem_wreq_ready;
  logic [ADDR_W-1:0]    mem_wreq_addr;
  logic [BUS_W-1:0]     mem_wreq_data;
  logic [BUS_BYTES-1:0] mem_wreq_strb;
  logic                 busy;

  cute_top #(.KPE_BITS(KPE)) dut (.*);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ memory
  logic [BUS_W-1:0] mem [longint];
  typedef struct { longint t; logic [BUS_W-1:0] d; } rsp_t;
  rsp_t rq[$];
  int   rd_gap = 0;    // accept a read every rd_gap+1 cycles on average
  logic throttle;

  function automatic logic [BUS_W-1:0] beat(input longint a);
    return mem.exists(a >> 6) ? mem[a >> 6] : '0;
  endfunction

  function automatic void wr8(input longint a, input logic [7:0] v);
    logic [BUS_W-1:0] b = beat(a);
    b[(a % 64) * 8 +: 8] = v;
    mem[a >> 6] = b;
  endfunction

  function automatic logic [7:0] rd8(input longint a);
    logic [BUS_W-1:0] b = beat(a);
    return b[(a % 64) * 8 +: 8];
  endfunction

  function automatic void wr32(input longint a, input logic [31:0] v);
    for (int i = 0; i < 4; i++) wr8(a + i, v[i*8 +: 8]);
  endfunction

  function automatic logic [31:0] rd32(input longint a);
    return {rd8(a + 3), rd8(a + 2), rd8(a + 1), rd8(a)};
  endfunction

  // All sampling happens half a cycle after the rising edge, when the
  // unit's outputs are settled; the unit acts on the next rising edge.
  int n_rd_bp = 0, n_wr_bp = 0;
  always @(negedge clk) begin
    mem_rreq_ready = (rd_gap == 0) ? 1'b1 : ($urandom_range(0, rd_gap) == 0);
    mem_wreq_ready = throttle ? ($urandom_range(0, 2) == 0) : 1'b1;
    mem_rresp_valid = 1'b0;
    if (rq.size() != 0 && rq[0].t <= cycle) begin
      rsp_t r;
      r = rq.pop_front();
      mem_rresp_valid = 1'b1;
      mem_rresp_data  = r.d;
    end
    #1;
    if (mem_rreq_valid && !mem_rreq_ready) n_rd_bp++;
    if (mem_wreq_valid && !mem_wreq_ready) n_wr_bp++;
    if (mem_rreq_valid && mem_rreq_ready) begin
      rsp_t r;
      r.t = cycle + MEM_LAT;
      r.d = beat(mem_rreq_addr);
      rq.push_back(r);
    end
    if (mem_wreq_valid && mem_wreq_ready) begin
      logic [BUS_W-1:0] b;
      b = beat(mem_wreq_addr);
      for (int i = 0; i < BUS_BYTES; i++) if (mem_wreq_strb[i]) b[i*8 +: 8] = mem_wreq_data[i*8 +: 8];
      mem[mem_wreq_addr >> 6] = b;
    end
  end

  // ------------------------------------------------------------ mechanism counters
  int n_hazard = 0, n_overlap = 0, n_qfull = 0, n_chkwait = 0, n_pe_issue = 0;
  int n_bias [3] = '{0, 0, 0};
  int n_dtype [5] = '{0, 0, 0, 0, 0};
  int n_transpose = 0;
  int run = 0, max_run = 0;
  always @(negedge clk) if (rst_n) begin
    #1;
    if (dut.hazard && dut.u_dc_c.busy) n_hazard++;
    if ((dut.a_we || dut.b_we) && dut.a_op_valid) n_overlap++;
    if (cmd_valid && !cmd_ready && cmd_funct == 7'd6) n_qfull++;
    if (dut.u_cmd.chk_wait) n_chkwait++;
    if (dut.a_op_valid) begin
      n_pe_issue++;
      run++;
      if (run > max_run) max_run = run;
    end else run = 0;
  end

  // ------------------------------------------------------------ host side
  task automatic send(input logic [6:0] f, input logic [63:0] a, input logic [63:0] b);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_funct = f; cmd_rs1 = a; cmd_rs2 = b;
    #2;
    while (!cmd_ready) begin
      @(negedge clk);
      #2;
    end
    @(posedge clk);
    #1;
    cmd_valid = 1'b0;
  endtask

  task automatic get_resp(output logic [63:0] d);
    @(negedge clk);
    #2;
    while (!resp_valid) begin
      @(negedge clk);
      #2;
    end
    d = resp_data;
    resp_ready = 1'b1;
    @(posedge clk);
    #1;
    resp_ready = 1'b0;
  endtask

  // element encodings of a small integer (|v| <= 15)
  function automatic logic [31:0] enc(input dtype_e dt, input int v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    logic s = (v < 0);
    if (dt == DT_INT8) return 32'(v) & 32'hff;
    if (a == 0) return 0;
    while ((a >> e) > 1) e++;
    unique case (dt)
      DT_FP8:  return {24'd0, s, 4'(7 + e), 3'((a << 3 >> e) & 7)};
      DT_FP16: return {16'd0, s, 5'(15 + e), 10'((a << 10 >> e) & 10'h3ff)};
      DT_BF16: return {16'd0, s, 8'(127 + e), 7'((a << 7 >> e) & 7'h7f)};
      default: return {s, 8'(127 + e), 10'((a << 10 >> e) & 10'h3ff), 13'd0};
    endcase
  endfunction

  function automatic logic [31:0] fp32_of(input int v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    if (a == 0) return 32'd0;
    while ((a >> e) > 1) e++;
    return {v < 0, 8'(127 + e), 23'((longint'(a) << 23 >> e) & 32'h7fffff)};
  endfunction

  typedef struct {
    int m, n, k;
    longint ba, bb, bbias, bc;
    int sa, sb, sbias, sc;
    dtype_e dt;
    bias_e bt;
    bit tr;
  } gemm_t;

  int av [];
  int bv [];
  int biasv [];

  // fill A, B, bias and a sentinel C region; remember the values
  task automatic prepare(input gemm_t g, input int seed_range);
    int es = int'(elem_bytes(g.dt));
    int rowsC = g.tr ? g.n : g.m;
    av = new[g.m * g.k];
    bv = new[g.n * g.k];
    biasv = new[g.m * g.n];
    for (int i = 0; i < g.m; i++)
      for (int k = 0; k < g.k; k++) begin
        logic [31:0] e;
        av[i*g.k + k] = (g.dt == DT_INT8) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 2*seed_range) - seed_range;
        e = enc(g.dt, av[i*g.k + k]);
        for (int b = 0; b < es; b++) wr8(g.ba + i*g.sa + k*es + b, e[b*8 +: 8]);
      end
    for (int j = 0; j < g.n; j++)
      for (int k = 0; k < g.k; k++) begin
        logic [31:0] e;
        bv[j*g.k + k] = (g.dt == DT_INT8) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 2*seed_range) - seed_range;
        e = enc(g.dt, bv[j*g.k + k]);
        for (int b = 0; b < es; b++) wr8(g.bb + j*g.sb + k*es + b, e[b*8 +: 8]);
      end
    for (int i = 0; i < g.m; i++)
      for (int j = 0; j < g.n; j++) begin
        int v = $urandom_range(0, 200) - 100;
        if (g.bt == BIAS_ROW && i == 0) wr32(g.bbias + j*4, (g.dt == DT_INT8) ? 32'(v) : fp32_of(v));
        if (g.bt == BIAS_FULL) wr32(g.bbias + i*g.sbias + j*4, (g.dt == DT_INT8) ? 32'(v) : fp32_of(v));
        biasv[i*g.n + j] = (g.bt == BIAS_ZERO) ? 0 : (g.bt == BIAS_ROW) ? ((i == 0) ? v : biasv[j]) : v;
      end
    for (int r = 0; r < rowsC; r++)
      for (int w = 0; w < g.sc / 4; w++) wr32(g.bc + r*g.sc + w*4, 32'hDEADBEEF);
  endtask

  task automatic issue(input gemm_t g);
    send(7'd0, {32'(g.n), 32'(g.m)}, 64'(g.k));
    send(7'd1, 64'(g.ba), 64'(g.sa));
    send(7'd2, 64'(g.bb), 64'(g.sb));
    send(7'd3, 64'(g.bbias), 64'(g.sbias));
    send(7'd4, 64'(g.bc), 64'(g.sc));
    send(7'd5, {55'd0, g.tr, 2'd0, 2'(g.bt), 1'b0, 3'(g.dt)}, 64'd0);
    send(7'd6, 64'd0, 64'd0);
    n_bias[int'(g.bt)]++;
    n_dtype[int'(g.dt)]++;
    if (g.tr) n_transpose++;
  endtask

  // compare C in memory with the reference (values saved per task)
  task automatic verify(input gemm_t g, input int a_s [], input int b_s [], input int bias_s []);
    int bad = 0;
    int rowsC = g.tr ? g.n : g.m;
    int colsC = g.tr ? g.m : g.n;
    for (int i = 0; i < g.m; i++)
      for (int j = 0; j < g.n; j++) begin
        int s = bias_s[i*g.n + j];
        logic [31:0] expv, got;
        for (int k = 0; k < g.k; k++) s += a_s[i*g.k + k] * b_s[j*g.k + k];
        expv = (g.dt == DT_INT8) ? 32'(s) : fp32_of(s);
        got = g.tr ? rd32(g.bc + j*g.sc + i*4) : rd32(g.bc + i*g.sc + j*4);
        checks++;
        if (got !== expv) begin
          failures++;
          if (bad++ < 5) $display("FAIL: C(%0d,%0d) got %h exp %h", i, j, got, expv);
        end
      end
    // words past the valid columns of every row stay untouched
    for (int r = 0; r < rowsC; r++)
      for (int w = colsC; w < g.sc / 4; w++) begin
        checks++;
        if (rd32(g.bc + r*g.sc + w*4) !== 32'hDEADBEEF) begin
          failures++;
          if (bad++ < 5) $display("FAIL: write outside C at row %0d word %0d", r, w);
        end
      end
  endtask

  task automatic check_task(input logic [31:0] expect_id);
    logic [63:0] d;
    send(7'd7, 0, 0);
    get_resp(d);
    checks++;
    if (d[63] || d[31:0] != expect_id) begin
      failures++;
      $display("FAIL: CHECK returned %h, expected task %0d", d, expect_id);
    end
  endtask

  function automatic gemm_t mk(input int m, input int n, input int k, input dtype_e dt,
                               input bias_e bt, input bit tr, input longint region);
    gemm_t g;
    int es = int'(elem_bytes(dt));
    g.m = m; g.n = n; g.k = k; g.dt = dt; g.bt = bt; g.tr = tr;
    g.sa = ((k * es + 63) / 64) * 64 + 64;
    g.sb = ((k * es + 63) / 64) * 64;
    g.sbias = ((n * 4 + 63) / 64) * 64;
    g.sc = (((tr ? m : n) * 4 + 63) / 64) * 64 + 64;
    g.ba = region;
    g.bb = region + 64'h100000;
    g.bbias = region + 64'h200000;
    g.bc = region + 64'h300000;
    return g;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  gemm_t g [8];
  int    sa [8][];
  int    sb [8][];
  int    sbias [8][];

  initial begin
    longint t0, t1;
    int pe0;
    logic [63:0] d;
    cmd_valid = 0; cmd_funct = 0; cmd_rs1 = 0; cmd_rs2 = 0; resp_ready = 0;
    mem_rresp_valid = 0; mem_rresp_data = '0; mem_rreq_ready = 0; mem_wreq_ready = 0;
    throttle = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    // 1. compute-bound 64x64x256 INT8 tile with a fast memory: rate check
    g[0] = mk(64, 64, 256, DT_INT8, BIAS_ZERO, 0, 64'h0100_0000);
    prepare(g[0], 7); sa[0] = av; sb[0] = bv; sbias[0] = biasv;
    pe0 = n_pe_issue;
    t0 = cycle;
    issue(g[0]);
    check_task(0);
    t1 = cycle;
    verify(g[0], sa[0], sb[0], sbias[0]);
    checks++;
    if (n_pe_issue - pe0 != 4 * KSUB * 16 * 16) begin
      failures++;
      $display("FAIL: %0d PE-array issues, expected %0d", n_pe_issue - pe0, 4*KSUB*16*16);
    end
    checks++;
    if (max_run < 256) begin
      failures++;
      $display("FAIL: longest run of back-to-back PE issues %0d < 256", max_run);
    end
    $display("task 0: 64x64x256 int8 in %0d cycles, PE utilisation %0d%%", t1 - t0,
             100 * (n_pe_issue - pe0) / int'(t1 - t0));

    // 2. slow memory with back-pressure; partial tiles; several tasks queued
    rd_gap = 2; throttle = 1;
    g[1] = mk(72, 80, 200, DT_INT8, BIAS_FULL, 0, 64'h0200_0000);
    g[2] = mk(64, 64, 64,  DT_FP16, BIAS_ROW,  1, 64'h0300_0000);
    g[3] = mk(8,  8,  128, DT_BF16, BIAS_ZERO, 0, 64'h0400_0000);
    g[4] = mk(5,  7,  40,  DT_TF32, BIAS_FULL, 1, 64'h0500_0000);
    g[5] = mk(20, 12, 100, DT_FP8,  BIAS_ROW,  0, 64'h0600_0000);
    g[6] = mk(4,  4,  512, DT_INT8, BIAS_ZERO, 0, 64'h0700_0000);
    for (int i = 1; i <= 6; i++) begin
      prepare(g[i], 7); sa[i] = av; sb[i] = bv; sbias[i] = biasv;
    end
    for (int i = 1; i <= 6; i++) issue(g[i]);   // the queue fills up
    send(7'd8, 0, 0);
    get_resp(d);
    $display("status after issue: %h", d);
    for (int i = 1; i <= 6; i++) check_task(32'(i));
    for (int i = 1; i <= 6; i++) verify(g[i], sa[i], sb[i], sbias[i]);
    // nothing left: CHECK answers at once with bit 63
    send(7'd7, 0, 0);
    get_resp(d);
    checks++;
    if (!d[63]) begin failures++; $display("FAIL: empty CHECK"); end
    send(7'd8, 0, 0);
    get_resp(d);
    checks++;
    if (d[15:0] != 16'd7 || d[23:16] != 0 || d[31:24] != 0) begin
      failures++; $display("FAIL: final status %h", d);
    end

    // mechanisms
    $display("hazard stalls %0d, load/compute overlap %0d, read back-pressure %0d, write back-pressure %0d, queue full %0d, CHECK wait %0d",
             n_hazard, n_overlap, n_rd_bp, n_wr_bp, n_qfull, n_chkwait);
    checks += 6;
    if (NEED_HAZARD && n_hazard == 0)  begin failures++; $display("FAIL: no hazard stall"); end
    if (n_overlap == 0) begin failures++; $display("FAIL: no load/compute overlap"); end
    if (n_rd_bp == 0 || n_wr_bp == 0) begin failures++; $display("FAIL: no memory back-pressure"); end
    if (n_qfull == 0)   begin failures++; $display("FAIL: task queue never full"); end
    if (n_chkwait == 0) begin failures++; $display("FAIL: CHECK never waited"); end
    if (n_transpose == 0) begin failures++; $display("FAIL: no transpose"); end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (n_bias[i] == 0) begin failures++; $display("FAIL: bias type %0d unused", i); end
    end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (n_dtype[i] == 0) begin failures++; $display("FAIL: data type %0d unused", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

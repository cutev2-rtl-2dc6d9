// tb_cute_data_ctrl: self-checking testbench of the three Data Controllers.
//
// The A, B and C controllers run in lockstep as in the matrix unit, with a
// 256-bit slice (two K slices per 64-byte row).  The testbench holds the
// scratchpad arrays and a stand-in for the PE array: a six-cycle pipeline
// returning c + 1 for every PE.  It checks that every operand handed to the
// PE array is the right slice of the right rows, that the C operand is zero
// on the first slice of a zero-bias step, that after a micro-instruction
// every block has been incremented exactly once per K slice (which fails if
// a read-after-write hazard is missed), that rd_done and tile_done pulse
// once per micro-instruction, and that small tiles do raise the hazard.
module tb_cute_data_ctrl;
  import cute_pkg::*;

  localparam int unsigned MPE = 4, NPE = 4, KPE = 256, RB = 64, MSCP = 64, NSCP = 64;
  localparam int unsigned KSUB = RB * 8 / KPE, LAT = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic    uop_valid, a_ready, b_ready, c_ready, hazard;
  dc_uop_t uop;

  logic           a_rd_en, b_rd_en, a_rd_bank, b_rd_bank;
  logic [3:0]     a_rd_blk, b_rd_blk;
  logic [RB*8-1:0] a_rd_data [MPE];
  logic [RB*8-1:0] b_rd_data [NPE];
  logic           a_op_valid, b_op_valid;
  dtype_e         a_dt, b_dt;
  logic [KPE-1:0] a_op [MPE];
  logic [KPE-1:0] b_op [NPE];
  logic           a_done, a_done_bank, b_done, b_done_bank;

  logic           c_rd_en, wr_en, tile_done, idle;
  logic [3:0]     rd_mb, rd_nb, wr_mb, wr_nb;
  logic [31:0]    c_rd_data [MPE][NPE];
  logic [31:0]    c_op [MPE][NPE];
  logic           res_valid;
  logic [31:0]    res [MPE][NPE];
  logic [31:0]    wr_data [MPE][NPE];

  logic go;
  assign go = uop_valid && a_ready && b_ready && c_ready;

  cute_data_ctrl_ab #(.ROLE_B(1'b0), .PE_DIM(MPE), .KPE_BITS(KPE), .ROW_BYTES(RB), .ROWS(MSCP)) u_a (
    .clk, .rst_n, .uop_valid(go), .uop_ready(a_ready), .uop, .stall(hazard),
    .rd_en(a_rd_en), .rd_bank(a_rd_bank), .rd_blk(a_rd_blk), .rd_data(a_rd_data),
    .op_valid(a_op_valid), .op_dtype(a_dt), .op(a_op), .rd_done(a_done), .rd_done_bank(a_done_bank));
  cute_data_ctrl_ab #(.ROLE_B(1'b1), .PE_DIM(NPE), .KPE_BITS(KPE), .ROW_BYTES(RB), .ROWS(NSCP)) u_b (
    .clk, .rst_n, .uop_valid(go), .uop_ready(b_ready), .uop, .stall(hazard),
    .rd_en(b_rd_en), .rd_bank(b_rd_bank), .rd_blk(b_rd_blk), .rd_data(b_rd_data),
    .op_valid(b_op_valid), .op_dtype(b_dt), .op(b_op), .rd_done(b_done), .rd_done_bank(b_done_bank));
  cute_data_ctrl_c #(.MPE(MPE), .NPE(NPE), .MSCP(MSCP), .NSCP(NSCP), .KSUB(KSUB), .PE_LAT(LAT)) u_c (
    .clk, .rst_n, .uop_valid(go), .uop_ready(c_ready), .uop, .hazard,
    .rd_en(c_rd_en), .rd_mb, .rd_nb, .rd_data(c_rd_data), .op(c_op),
    .res_valid, .res, .wr_en, .wr_mb, .wr_nb, .wr_data, .tile_done, .idle);

  // scratchpads and PE stand-in
  logic [RB*8-1:0] sa [2][MSCP];
  logic [RB*8-1:0] sb [2][NSCP];
  logic [31:0]     sc [MSCP][NSCP];
  logic [31:0]     pipe [LAT][MPE][NPE];
  logic            pv [LAT];

  always_ff @(posedge clk) begin
    if (a_rd_en) for (int r = 0; r < MPE; r++) a_rd_data[r] <= sa[a_rd_bank][a_rd_blk*MPE + r];
    if (b_rd_en) for (int r = 0; r < NPE; r++) b_rd_data[r] <= sb[b_rd_bank][b_rd_blk*NPE + r];
    if (c_rd_en) for (int i = 0; i < MPE; i++) for (int j = 0; j < NPE; j++)
      c_rd_data[i][j] <= sc[rd_mb*MPE + i][rd_nb*NPE + j];
    if (wr_en) for (int i = 0; i < MPE; i++) for (int j = 0; j < NPE; j++)
      sc[wr_mb*MPE + i][wr_nb*NPE + j] <= wr_data[i][j];
    pv[0] <= a_op_valid && rst_n;
    for (int i = 0; i < MPE; i++) for (int j = 0; j < NPE; j++) pipe[0][i][j] <= c_op[i][j] + 1;
    for (int d = 1; d < LAT; d++) begin
      pv[d] <= pv[d-1];
      pipe[d] <= pipe[d-1];
    end
  end
  assign res_valid = pv[LAT-1];
  assign res = pipe[LAT-1];

  // expected operand sequence
  typedef struct { int ks, m, n; bit bank, zero; } step_t;
  step_t exp_q[$];
  int n_hazard = 0, n_rd_done = 0, n_tile_done = 0;

  always @(negedge clk) if (rst_n) begin
    if (hazard) n_hazard++;
    if (a_done) n_rd_done++;
    if (tile_done) n_tile_done++;
    if (a_op_valid) begin
      step_t s;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: extra operand"); end
      else begin
        s = exp_q.pop_front();
        for (int r = 0; r < MPE; r++)
          if (a_op[r] !== sa[s.bank][s.m*MPE + r][s.ks*KPE +: KPE]) begin
            failures++; $display("FAIL: A operand ks %0d m %0d row %0d", s.ks, s.m, r);
          end
        for (int r = 0; r < NPE; r++)
          if (b_op[r] !== sb[s.bank][s.n*NPE + r][s.ks*KPE +: KPE]) begin
            failures++; $display("FAIL: B operand ks %0d n %0d row %0d", s.ks, s.n, r);
          end
        if (s.zero && c_op[0][0] !== 32'd0) begin failures++; $display("FAIL: C operand not zero"); end
        if (!b_op_valid || a_dt != DT_FP16) begin failures++; $display("FAIL: B valid or data type"); end
      end
    end
  end

  task automatic run(input bit bank, input int mb, input int nb, input bit zero, input bit last);
    logic [31:0] prev [MSCP][NSCP];
    int rd0 = n_rd_done, td0 = n_tile_done;
    prev = sc;
    for (int ks = 0; ks < KSUB; ks++)
      for (int m = 0; m < mb; m++)
        for (int n = 0; n < nb; n++) exp_q.push_back('{ks: ks, m: m, n: n, bank: bank, zero: zero && ks == 0});
    @(negedge clk);
    uop = '{bank: bank, mb: 16'(mb), nb: 16'(nb), zero_c: zero, last_k: last, dtype: DT_FP16};
    uop_valid = 1'b1;
    @(posedge clk);
    while (!(a_ready && b_ready && c_ready)) @(posedge clk);
    @(negedge clk);
    uop_valid = 1'b0;
    @(posedge clk);
    while (!idle) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < MSCP; i++)
      for (int j = 0; j < NSCP; j++) begin
        logic [31:0] e;
        if (i < mb*MPE && j < nb*NPE) e = (zero ? 32'd0 : prev[i][j]) + KSUB;
        else e = prev[i][j];
        checks++;
        if (sc[i][j] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL: C(%0d,%0d) = %0d, expected %0d", i, j, sc[i][j], e);
        end
      end
    checks += 2;
    if (n_rd_done - rd0 != 1) begin failures++; $display("FAIL: rd_done count %0d", n_rd_done - rd0); end
    if (n_tile_done - td0 != (last ? 1 : 0)) begin failures++; $display("FAIL: tile_done count"); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uop_valid = 0; uop = '0;
    for (int b = 0; b < 2; b++) begin
      for (int r = 0; r < MSCP; r++) for (int w = 0; w < RB / 4; w++) sa[b][r][w*32 +: 32] = $urandom;
      for (int r = 0; r < NSCP; r++) for (int w = 0; w < RB / 4; w++) sb[b][r][w*32 +: 32] = $urandom;
    end
    for (int i = 0; i < MSCP; i++) for (int j = 0; j < NSCP; j++) sc[i][j] = $urandom_range(0, 1000);
    for (int d = 0; d < LAT; d++) pv[d] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1'b0, 16, 16, 1'b1, 1'b0);   // full tile, zero bias
    run(1'b1, 16, 16, 1'b0, 1'b1);   // full tile, accumulate, last
    run(1'b0, 1, 2, 1'b0, 1'b0);     // small tiles: hazard
    run(1'b1, 2, 1, 1'b1, 1'b1);
    run(1'b0, 3, 5, 1'b0, 1'b1);
    checks++;
    if (n_hazard == 0) begin failures++; $display("FAIL: no hazard stall"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: missing operands"); end
    $display("hazard stall cycles: %0d", n_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cute_task_ctrl: self-checking testbench of the task controller.
//
// Simple models stand in for the Memory Loader (takes a micro-instruction
// when ready, reports it done some cycles later) and the Data Controllers
// (take a micro-instruction, report rd_done after mb*nb cycles and
// tile_done seven cycles after the last step).  The testbench builds the
// expected loader and compute micro-instruction lists for each task on its
// own (output-stationary tiles, K steps alternating between two banks,
// edge tiles) and compares them one by one, and it checks the hand-over
// rules: no load into a bank still being read, no compute before both
// operands of its step are loaded, no first K step before the tile's bias
// is in or the previous store has read the tile, no store before the tile
// is complete, and one task_done after the last store.
module tb_cute_task_ctrl;
  import cute_pkg::*;

  localparam int unsigned MPE = 4, NPE = 4, MSCP = 64, NSCP = 64, KB = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     task_valid, task_ready, task_done;
  task_t    tsk;
  logic     ld_valid, ld_ready, ld_done, ld_done_bank, st_read_done, st_done;
  ld_uop_t  ld_uop;
  ld_mode_e ld_done_mode;
  logic     dc_valid, dc_ready, rd_done, rd_done_bank, tile_done, busy;
  dc_uop_t  dc_uop;

  cute_task_ctrl #(.MPE(MPE), .NPE(NPE), .MSCP(MSCP), .NSCP(NSCP), .KSCP_BYTES(KB)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  ld_uop_t exp_ld[$];
  dc_uop_t exp_dc[$];
  bit      exp_first[$];

  // ---- loader model: one micro-instruction at a time, done after 'len' cycles
  int      l_cnt = 0;
  ld_uop_t l_cur;
  bit      l_busy = 0;
  // ---- compute model
  int      c_cnt = 0, c_tail = 0;
  dc_uop_t c_cur;
  bit      c_busy = 0;
  // ---- rule tracking
  bit loaded_a [2], loaded_b [2], reading [2];
  bit c_tile_busy = 0, tile_complete = 0, bias_in = 0;
  int n_task_done = 0;

  always @(negedge clk) if (rst_n) begin
    ld_done = 0; st_read_done = 0; st_done = 0; rd_done = 0; tile_done = 0;
    // loader model
    if (l_busy) begin
      l_cnt--;
      if (l_cnt == 2 && l_cur.mode == ST_C) begin
        st_read_done = 1;
        tile_complete = 0;
        c_tile_busy = 0;
      end
      if (l_cnt == 0) begin
        l_busy = 0;
        if (l_cur.mode == ST_C) st_done = 1;
        else begin
          ld_done = 1; ld_done_mode = l_cur.mode; ld_done_bank = l_cur.bank;
          if (l_cur.mode == LD_A) loaded_a[l_cur.bank] = 1;
          if (l_cur.mode == LD_B) loaded_b[l_cur.bank] = 1;
          if (l_cur.mode == LD_BIAS) bias_in = 1;
        end
      end
    end
    // compute model
    if (c_busy) begin
      c_cnt--;
      if (c_cnt == 0) begin
        rd_done = 1; rd_done_bank = c_cur.bank;
        reading[c_cur.bank] = 0; loaded_a[c_cur.bank] = 0; loaded_b[c_cur.bank] = 0;
        c_busy = 0;
        if (c_cur.last_k) c_tail = 7;
      end
    end
    if (c_tail > 0) begin
      c_tail--;
      if (c_tail == 0) begin tile_done = 1; tile_complete = 1; end
    end
    ld_ready = !l_busy && ($urandom_range(0, 3) != 0);
    dc_ready = !c_busy && c_tail == 0;
    #1;
    if (task_done) n_task_done++;
    if (ld_valid && ld_ready) begin
      ld_uop_t e;
      l_cur = ld_uop; l_busy = 1;
      l_cnt = (ld_uop.mode == ST_C) ? 12 : 4 + int'(ld_uop.rows) / 4;
      chk(exp_ld.size() != 0, "unexpected loader micro-instruction");
      if (exp_ld.size() != 0) begin
        e = exp_ld.pop_front();
        chk(ld_uop == e, $sformatf("loader uop mode %0d base %h rows %0d (exp mode %0d base %h rows %0d)",
                                   ld_uop.mode, ld_uop.base, ld_uop.rows, e.mode, e.base, e.rows));
      end
      if (ld_uop.mode == LD_A) chk(!reading[ld_uop.bank] && !loaded_a[ld_uop.bank], "A load into a busy bank");
      if (ld_uop.mode == ST_C) chk(tile_complete, "store before the tile is complete");
      if (ld_uop.mode == LD_BIAS) chk(!c_tile_busy, "bias load over a live tile");
    end
    if (dc_valid && dc_ready) begin
      dc_uop_t e;
      bit first;
      c_cur = dc_uop; c_busy = 1;
      c_cnt = int'(dc_uop.mb) * int'(dc_uop.nb);
      reading[dc_uop.bank] = 1;
      chk(loaded_a[dc_uop.bank] && loaded_b[dc_uop.bank], "compute before its operands are loaded");
      chk(exp_dc.size() != 0, "unexpected compute micro-instruction");
      if (exp_dc.size() != 0) begin
        e = exp_dc.pop_front();
        first = exp_first.pop_front();
        chk(dc_uop == e, $sformatf("dc uop bank %0d mb %0d nb %0d zero %0d last %0d", dc_uop.bank, dc_uop.mb,
                                   dc_uop.nb, dc_uop.zero_c, dc_uop.last_k));
        if (first) begin
          if (!e.zero_c) chk(bias_in, "first K step before its bias");
          chk(!c_tile_busy, "first K step before the previous store read the tile");
          c_tile_busy = 1;
          bias_in = 0;
        end
      end
    end
  end

  int bank_l = 0;
  task automatic expect_task(input task_t t);
    int es = int'(elem_bytes(t.dtype));
    int mt = (t.m + MSCP - 1) / MSCP, nt = (t.n + NSCP - 1) / NSCP, kt = (t.k * es + KB - 1) / KB;
    for (int i = 0; i < mt; i++)
      for (int j = 0; j < nt; j++) begin
        int mr = (t.m - i*MSCP < MSCP) ? t.m - i*MSCP : MSCP;
        int nc = (t.n - j*NSCP < NSCP) ? t.n - j*NSCP : NSCP;
        ld_uop_t u;
        if (t.bias_type != BIAS_ZERO) begin
          u = '0; u.mode = LD_BIAS; u.bank = bank_l[0];
          u.base = t.base_bias + j*NSCP*4 + ((t.bias_type == BIAS_ROW) ? 0 : i*MSCP*t.stride_bias);
          u.stride = (t.bias_type == BIAS_ROW) ? 0 : t.stride_bias;
          u.rows = 16'(mr); u.words = 16'(nc);
          exp_ld.push_back(u);
        end
        for (int k = 0; k < kt; k++) begin
          int kb = (t.k*es - k*KB < KB) ? t.k*es - k*KB : KB;
          dc_uop_t d;
          u = '0; u.mode = LD_A; u.bank = bank_l[0];
          u.base = t.base_a + i*MSCP*t.stride_a + k*KB; u.stride = t.stride_a; u.rows = 16'(mr); u.row_bytes = 16'(kb);
          exp_ld.push_back(u);
          u = '0; u.mode = LD_B; u.bank = bank_l[0];
          u.base = t.base_b + j*NSCP*t.stride_b + k*KB; u.stride = t.stride_b; u.rows = 16'(nc); u.row_bytes = 16'(kb);
          exp_ld.push_back(u);
          d.bank = bank_l[0]; d.mb = 16'((mr + MPE - 1) / MPE); d.nb = 16'((nc + NPE - 1) / NPE);
          d.zero_c = (k == 0) && (t.bias_type == BIAS_ZERO); d.last_k = (k == kt - 1); d.dtype = t.dtype;
          exp_dc.push_back(d);
          exp_first.push_back(k == 0);
          bank_l++;
        end
        u = '0; u.mode = ST_C; u.bank = bank_l[0]; u.transpose = t.transpose; u.stride = t.stride_c;
        if (t.transpose) begin
          u.base = t.base_c + j*NSCP*t.stride_c + i*MSCP*4; u.rows = 16'(nc); u.words = 16'(mr);
        end else begin
          u.base = t.base_c + i*MSCP*t.stride_c + j*NSCP*4; u.rows = 16'(mr); u.words = 16'(nc);
        end
        exp_ld.push_back(u);
      end
  endtask

  task automatic run_task(input task_t t);
    int d0 = n_task_done;
    expect_task(t);
    @(negedge clk);
    tsk = t; task_valid = 1;
    #2;
    while (!task_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1;
    task_valid = 0;
    while (n_task_done == d0) @(posedge clk);
    repeat (5) @(posedge clk);
    chk(n_task_done == d0 + 1, "one task_done per task");
    chk(exp_ld.size() == 0 && exp_dc.size() == 0, "all micro-instructions issued");
    chk(!busy, "idle after the task");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    task_t t;
    task_valid = 0; tsk = '0; ld_ready = 0; dc_ready = 0;
    ld_done = 0; st_read_done = 0; st_done = 0; rd_done = 0; tile_done = 0;
    ld_done_mode = LD_A; ld_done_bank = 0; rd_done_bank = 0;
    loaded_a = '{0, 0}; loaded_b = '{0, 0}; reading = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = '0;
    t.m = 130; t.n = 70; t.k = 150; t.dtype = DT_INT8; t.bias_type = BIAS_FULL;
    t.base_a = 64'h10000; t.base_b = 64'h20000; t.base_bias = 64'h30000; t.base_c = 64'h40000;
    t.stride_a = 192; t.stride_b = 192; t.stride_bias = 320; t.stride_c = 320;
    run_task(t);
    t.m = 64; t.n = 100; t.k = 100; t.dtype = DT_FP16; t.bias_type = BIAS_ZERO; t.transpose = 1;
    run_task(t);
    t.m = 10; t.n = 10; t.k = 8; t.dtype = DT_TF32; t.bias_type = BIAS_ROW; t.transpose = 0;
    run_task(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

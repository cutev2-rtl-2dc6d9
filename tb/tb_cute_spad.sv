// tb_cute_spad: self-checking testbench of the A/B scratchpad and the C
// accumulator scratchpad.
//
// A/B: writes random rows into both banks, reads every row block back and
// checks the RD_ROWS rows returned one cycle after the read, and that
// writing one bank leaves the other intact.
// C: writes blocks through the compute port, reads them back through the
// compute port and through the store port (row and column order), writes
// row segments through the loader port and reads them back as blocks.
// All expected values come from a shadow array kept here.
module tb_cute_spad;
  localparam int unsigned ROWS = 64, RB = 64, RD = 4;
  localparam int unsigned MSCP = 64, NSCP = 64, MPE = 4, NPE = 4, SEG = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- A/B scratchpad
  logic wr_en, rd_en;
  logic wr_bank, rd_bank;
  logic [5:0] wr_row;
  logic [3:0] rd_blk;
  logic [RB*8-1:0] wr_data;
  logic [RB*8-1:0] rd_data [RD];
  logic [RB*8-1:0] shadow [2][ROWS];

  cute_spad_ab #(.ROWS(ROWS), .ROW_BYTES(RB), .RD_ROWS(RD), .BANKS(2)) u_ab (
    .clk, .wr_en, .wr_bank, .wr_row, .wr_data, .rd_en, .rd_bank, .rd_blk, .rd_data);

  // ---- C scratchpad
  logic cr_en, cw_en, lw_en, sr_en, sr_tr;
  logic [3:0] cr_mb, cr_nb, cw_mb, cw_nb;
  logic [5:0] lw_row, sr_row;
  logic [1:0] lw_seg, sr_seg;
  logic [31:0] cr_data [MPE][NPE];
  logic [31:0] cw_data [MPE][NPE];
  logic [31:0] lw_data [SEG];
  logic [31:0] sr_data [SEG];
  logic [31:0] cs [MSCP][NSCP];

  cute_spad_c #(.MSCP(MSCP), .NSCP(NSCP), .MPE(MPE), .NPE(NPE), .SEG(SEG)) u_c (.*);

  function automatic logic [RB*8-1:0] rnd_row();
    logic [RB*8-1:0] r;
    for (int i = 0; i < RB / 4; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_row = 0; rd_blk = 0; wr_data = '0;
    cr_en = 0; cw_en = 0; lw_en = 0; sr_en = 0; sr_tr = 0;
    cr_mb = 0; cr_nb = 0; cw_mb = 0; cw_nb = 0; lw_row = 0; sr_row = 0; lw_seg = 0; sr_seg = 0;
    for (int i = 0; i < MPE; i++) for (int j = 0; j < NPE; j++) cw_data[i][j] = 0;
    for (int j = 0; j < SEG; j++) lw_data[j] = 0;

    // A/B: fill both banks
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_row = 6'(r); wr_data = rnd_row();
        shadow[b][r] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
    // read every block; overwrite bank 0 row 5 meanwhile and read it again
    for (int b = 0; b < 2; b++)
      for (int x = 0; x < ROWS / RD; x++) begin
        @(negedge clk);
        rd_en = 1; rd_bank = b[0]; rd_blk = 4'(x);
        @(negedge clk);
        rd_en = 0;
        for (int r = 0; r < RD; r++)
          chk(rd_data[r] === shadow[b][x*RD + r], $sformatf("ab bank %0d row %0d", b, x*RD + r));
      end
    @(negedge clk);
    wr_en = 1; wr_bank = 1; wr_row = 6'd5; wr_data = rnd_row(); shadow[1][5] = wr_data;
    @(negedge clk);
    wr_en = 0; rd_en = 1; rd_bank = 0; rd_blk = 4'd1;
    @(negedge clk);
    rd_en = 0;
    chk(rd_data[1] === shadow[0][5], "other bank untouched");
    rd_en = 1; rd_bank = 1; rd_blk = 4'd1;
    @(negedge clk);
    rd_en = 0;
    chk(rd_data[1] === shadow[1][5], "rewritten row");

    // C: fill through the compute port
    for (int mb = 0; mb < MSCP / MPE; mb++)
      for (int nb = 0; nb < NSCP / NPE; nb++) begin
        @(negedge clk);
        cw_en = 1; cw_mb = 4'(mb); cw_nb = 4'(nb);
        for (int i = 0; i < MPE; i++)
          for (int j = 0; j < NPE; j++) begin
            cw_data[i][j] = $urandom;
            cs[mb*MPE + i][nb*NPE + j] = cw_data[i][j];
          end
      end
    @(negedge clk);
    cw_en = 0;
    // loader port: overwrite a few row segments
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      lw_en = 1; lw_row = 6'($urandom_range(0, MSCP - 1)); lw_seg = 2'($urandom_range(0, 3));
      for (int j = 0; j < SEG; j++) begin
        lw_data[j] = $urandom;
        cs[lw_row][lw_seg*SEG + j] = lw_data[j];
      end
    end
    @(negedge clk);
    lw_en = 0;
    // compute-port reads
    for (int t = 0; t < 64; t++) begin
      int mb, nb;
      mb = $urandom_range(0, 15);
      nb = $urandom_range(0, 15);
      @(negedge clk);
      cr_en = 1; cr_mb = 4'(mb); cr_nb = 4'(nb);
      @(negedge clk);
      cr_en = 0;
      for (int i = 0; i < MPE; i++)
        for (int j = 0; j < NPE; j++)
          chk(cr_data[i][j] === cs[mb*MPE + i][nb*NPE + j], $sformatf("c block %0d,%0d", mb, nb));
    end
    // store-port reads, rows and columns
    for (int t = 0; t < 64; t++) begin
      int r, sg;
      bit tr;
      r = $urandom_range(0, 63);
      sg = $urandom_range(0, 3);
      tr = t[0];
      @(negedge clk);
      sr_en = 1; sr_tr = tr; sr_row = 6'(r); sr_seg = 2'(sg);
      @(negedge clk);
      sr_en = 0;
      for (int j = 0; j < SEG; j++)
        chk(sr_data[j] === (tr ? cs[sg*SEG + j][r] : cs[r][sg*SEG + j]),
            $sformatf("c store read tr=%0d row %0d seg %0d", tr, r, sg));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

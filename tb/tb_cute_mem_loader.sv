// tb_cute_mem_loader: self-checking testbench of the Memory Loader
// (Request Generator and Data Reorder).
//
// A behavioural memory answers reads in order after a fixed latency and
// applies random back-pressure to reads and writes.  The testbench sends
// loader micro-instructions back to back: A and B loads with partial rows
// (K padding must read as zero), a full bias load, a row-repeat bias load
// (stride 0), and stores of the C scratchpad in row and in transposed order.
// It checks every scratchpad write against memory, every stored word
// against the C array kept here, that bytes outside the strobe are left
// alone, and that ld_done, st_read_done and st_done pulse once per
// micro-instruction.
module tb_cute_mem_loader;
  import cute_pkg::*;

  localparam int unsigned LAT = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  int checks = 0, failures = 0;

  logic                 uop_valid, uop_ready;
  ld_uop_t              uop;
  logic                 rreq_valid, rreq_ready, rresp_valid;
  logic [ADDR_W-1:0]    rreq_addr, wreq_addr;
  logic [BUS_W-1:0]     rresp_data, wreq_data, ab_data;
  logic                 wreq_valid, wreq_ready;
  logic [BUS_BYTES-1:0] wreq_strb;
  logic                 a_we, b_we, ab_bank, c_we, cs_en, cs_tr;
  logic [15:0]          ab_row, c_row, c_seg, cs_row, cs_seg;
  logic [31:0]          c_data [WORDS_PER_BEAT];
  logic [31:0]          cs_data [WORDS_PER_BEAT];
  logic                 ld_done, ld_done_bank, st_read_done, st_done;
  ld_mode_e             ld_done_mode;

  cute_mem_loader #(.OUTS(32)) dut (.*);

  // memory
  logic [BUS_W-1:0] mem [longint];
  typedef struct { longint t; logic [BUS_W-1:0] d; } rsp_t;
  rsp_t rq[$];
  function automatic logic [BUS_W-1:0] beat(input longint a);
    return mem.exists(a >> 6) ? mem[a >> 6] : '0;
  endfunction
  function automatic logic [31:0] rd32(input longint a);
    logic [BUS_W-1:0] b = beat(a);
    return b[(a % 64) * 8 +: 32];
  endfunction

  // scratchpads
  logic [BUS_W-1:0] sa [2][64];
  logic [BUS_W-1:0] sb [2][64];
  logic [31:0]      sc [64][64];
  int n_ld_done [4] = '{0, 0, 0, 0};
  int n_st_rd = 0, n_st = 0, n_bp = 0;
  logic [BUS_W-1:0] snap [20][4];

  always @(posedge clk) begin
    if (cs_en)
      for (int j = 0; j < WORDS_PER_BEAT; j++)
        cs_data[j] <= cs_tr ? sc[cs_seg*16 + j][cs_row] : sc[cs_row][cs_seg*16 + j];
  end

  always @(negedge clk) begin
    rreq_ready = ($urandom_range(0, 2) != 0);
    wreq_ready = ($urandom_range(0, 2) != 0);
    rresp_valid = 1'b0;
    if (rq.size() != 0 && rq[0].t <= cycle) begin
      rsp_t r;
      r = rq.pop_front();
      rresp_valid = 1'b1;
      rresp_data = r.d;
    end
    #1;
    if (rst_n) begin
      if (rreq_valid && !rreq_ready) n_bp++;
      if (rreq_valid && rreq_ready) begin
        rsp_t r;
        r.t = cycle + LAT;
        r.d = beat(rreq_addr);
        rq.push_back(r);
      end
      if (wreq_valid && wreq_ready) begin
        logic [BUS_W-1:0] b;
        b = beat(wreq_addr);
        for (int i = 0; i < BUS_BYTES; i++) if (wreq_strb[i]) b[i*8 +: 8] = wreq_data[i*8 +: 8];
        mem[wreq_addr >> 6] = b;
      end
      if (a_we) sa[ab_bank][ab_row] = ab_data;
      if (b_we) sb[ab_bank][ab_row] = ab_data;
      if (c_we) for (int j = 0; j < WORDS_PER_BEAT; j++) sc[c_row][c_seg*16 + j] = c_data[j];
      if (ld_done) n_ld_done[int'(ld_done_mode)]++;
      if (st_read_done) n_st_rd++;
      if (st_done) n_st++;
    end
  end

  task automatic send(input ld_uop_t u);
    @(negedge clk);
    uop = u; uop_valid = 1'b1;
    #2;
    while (!uop_ready) begin
      @(negedge clk);
      #2;
    end
    @(posedge clk);
    #1;
    uop_valid = 1'b0;
  endtask

  function automatic ld_uop_t mk(input ld_mode_e md, input bit bank, input longint base, input int stride,
                                 input int rows, input int rb, input int words, input bit tr);
    ld_uop_t u;
    u = '0;
    u.mode = md; u.bank = bank; u.base = ADDR_W'(base); u.stride = 32'(stride);
    u.rows = 16'(rows); u.row_bytes = 16'(rb); u.words = 16'(words); u.transpose = tr;
    return u;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
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
    uop_valid = 0; uop = '0; rresp_valid = 0; rresp_data = '0; rreq_ready = 0; wreq_ready = 0;
    for (longint a = 0; a < 64'h40000; a += 64) begin
      logic [BUS_W-1:0] b;
      for (int w = 0; w < 16; w++) b[w*32 +: 32] = $urandom;
      mem[a >> 6] = b;
    end
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) sc[i][j] = $urandom;
    for (int b = 0; b < 2; b++) for (int r = 0; r < 64; r++) begin sa[b][r] = '1; sb[b][r] = '1; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // loads, back to back
    send(mk(LD_A, 1'b1, 64'h1000, 192, 50, 40, 0, 0));
    send(mk(LD_B, 1'b0, 64'h9000, 128, 64, 64, 0, 0));
    repeat (200) @(posedge clk);
    for (int r = 0; r < 50; r++)
      for (int i = 0; i < 64; i++)
        chk(sa[1][r][i*8 +: 8] === ((i < 40) ? beat(64'h1000 + r*192)[i*8 +: 8] : 8'd0), $sformatf("A row %0d byte %0d", r, i));
    for (int r = 50; r < 64; r++) chk(sa[1][r] === '1, "A rows past the tile untouched");
    for (int r = 0; r < 64; r++) chk(sb[0][r] === beat(64'h9000 + r*128), $sformatf("B row %0d", r));
    chk(n_ld_done[0] == 1 && n_ld_done[1] == 1, "one ld_done each for A and B");

    // full bias then row-repeat bias
    send(mk(LD_BIAS, 1'b0, 64'h20000, 256, 10, 0, 37, 0));
    repeat (150) @(posedge clk);
    for (int r = 0; r < 10; r++)
      for (int j = 0; j < 48; j++)
        chk(sc[r][j] === ((j < 37) ? rd32(64'h20000 + r*256 + j*4) : 32'd0), $sformatf("bias (%0d,%0d)", r, j));
    send(mk(LD_BIAS, 1'b0, 64'h30000, 0, 64, 0, 64, 0));
    repeat (400) @(posedge clk);
    for (int r = 0; r < 64; r++)
      for (int j = 0; j < 64; j++)
        chk(sc[r][j] === rd32(64'h30000 + j*4), $sformatf("row-repeat bias (%0d,%0d)", r, j));
    chk(n_ld_done[2] == 2, "one ld_done per bias load");

    // stores: row order and transposed
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) sc[i][j] = $urandom;
    for (int r = 0; r < 20; r++) for (int sg = 0; sg < 4; sg++) snap[r][sg] = beat(64'h38000 + r*256 + sg*64);
    send(mk(ST_C, 1'b0, 64'h38000, 256, 20, 0, 40, 0));
    send(mk(ST_C, 1'b0, 64'h3C000, 128, 24, 0, 18, 1));
    repeat (400) @(posedge clk);
    for (int r = 0; r < 20; r++)
      for (int j = 0; j < 64; j++)
        if (j < 40) chk(rd32(64'h38000 + r*256 + j*4) === sc[r][j], $sformatf("store (%0d,%0d)", r, j));
        else chk(rd32(64'h38000 + r*256 + j*4) === snap[r][j/16][(j%16)*32 +: 32], $sformatf("outside strobe (%0d,%0d)", r, j));
    for (int r = 0; r < 24; r++)
      for (int j = 0; j < 18; j++)
        chk(rd32(64'h3C000 + r*128 + j*4) === sc[j][r], $sformatf("transposed store (%0d,%0d)", r, j));
    chk(n_st_rd == 2 && n_st == 2, "st_read_done and st_done once per store");
    chk(n_bp > 0, "memory back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

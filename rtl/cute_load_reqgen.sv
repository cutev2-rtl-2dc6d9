// cute_load_reqgen: Request Generator of the Memory Loader.
//
// Turns one loader micro-instruction (mode, base address, stride, size)
// into memory requests, one 64-byte beat at a time:
//   LD_A, LD_B   'rows' reads at base + r*stride, one beat per row
//                (the row's 64 bytes are one K step, Kscp);
//   LD_BIAS      'rows' rows of ceil(words/16) beats each at
//                base + r*stride + s*64 (a stride of 0 repeats one row,
//                which is how the row-repeat bias type is loaded);
//   ST_C         reads the C scratchpad row by row (column by column when
//                transposed) and writes each 16-word segment to memory at
//                base + r*stride + s*64 with a byte strobe for the valid
//                words.
// For every read it pushes a descriptor (where the beat goes, how many of
// its bytes are valid, whether it ends the micro-instruction) to the Data
// Reorder, and it issues a read only while the Data Reorder has room for the
// descriptor, so the memory side never needs to be stalled.  Stores go
// through a two-entry buffer so a new scratchpad read can be issued every
// cycle while the write channel accepts.  st_read_done pulses when the last
// scratchpad read of a store is issued (the tile may then be overwritten),
// st_done when the last store beat is accepted.
// Timing: at most one request per cycle; a new micro-instruction is taken
// when the previous one has issued all its requests.
module cute_load_reqgen
  import cute_pkg::*;
#(
  localparam int unsigned MW = 2 + 1 + 16 + 16 + 16 + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 uop_valid,
  output logic                 uop_ready,
  input  ld_uop_t              uop,
  // read request channel
  output logic                 rreq_valid,
  input  logic                 rreq_ready,
  output logic [ADDR_W-1:0]    rreq_addr,
  // descriptor to the Data Reorder
  output logic                 meta_push,
  output logic [MW-1:0]        meta,
  input  logic                 meta_space,
  // write request channel
  output logic                 wreq_valid,
  input  logic                 wreq_ready,
  output logic [ADDR_W-1:0]    wreq_addr,
  output logic [BUS_W-1:0]     wreq_data,
  output logic [BUS_BYTES-1:0] wreq_strb,
  // C scratchpad store read port
  output logic                 cs_en,
  output logic                 cs_tr,
  output logic [15:0]          cs_row,
  output logic [15:0]          cs_seg,
  input  logic [31:0]          cs_data [WORDS_PER_BEAT],
  output logic                 st_read_done,
  output logic                 st_done
);

  logic              busy;
  ld_uop_t           cur;
  logic [15:0]       r, s, segs;
  logic [ADDR_W-1:0] row_addr;
  logic              lastbeat;

  assign lastbeat = (r == cur.rows - 16'd1) && (s == segs - 16'd1);

  // ---- loads
  logic is_st;
  assign is_st = (cur.mode == ST_C);
  assign rreq_valid = busy && !is_st && meta_space;
  assign rreq_addr  = row_addr + ADDR_W'({s, 6'd0});
  assign meta_push  = rreq_valid && rreq_ready;
  assign meta = {cur.mode, cur.bank, r, s,
                 (cur.mode == LD_A || cur.mode == LD_B) ? cur.row_bytes : cur.words,
                 lastbeat};

  // ---- stores: scratchpad read, one cycle, then a two-entry write buffer
  typedef struct packed {
    logic [ADDR_W-1:0]    addr;
    logic [BUS_BYTES-1:0] strb;
    logic                 last;
  } wmeta_t;

  logic             rd_q;        // a scratchpad read issued last cycle
  wmeta_t           rd_meta_q;
  logic [1:0]       wcount;      // entries in the write buffer
  logic [BUS_W-1:0] wb_data [2];
  wmeta_t           wb_meta [2];
  logic             wb_head;     // index of the oldest entry
  logic             wpop, wpush;
  logic [2:0]       wfill;       // buffer entries plus read in flight

  assign wfill = 3'(wcount) + 3'(rd_q);
  assign wpop  = wreq_valid && wreq_ready;
  assign cs_en = busy && is_st && (wfill - 3'(wpop) < 3'd2);
  assign cs_tr = cur.transpose;
  assign cs_row = r;
  assign cs_seg = s;
  assign wpush = rd_q;

  logic [BUS_BYTES-1:0] strb_now;
  always_comb begin
    strb_now = '0;
    for (int unsigned j = 0; j < WORDS_PER_BEAT; j++)
      if (32'(s) * WORDS_PER_BEAT + j < 32'(cur.words)) strb_now[j*4 +: 4] = 4'hF;
  end

  assign wreq_valid = (wcount != 2'd0);
  assign wreq_addr  = wb_meta[wb_head].addr;
  assign wreq_data  = wb_data[wb_head];
  assign wreq_strb  = wb_meta[wb_head].strb;
  assign st_done    = wpop && wb_meta[wb_head].last;
  assign st_read_done = cs_en && lastbeat;

  logic [BUS_W-1:0] cs_flat;
  always_comb
    for (int unsigned j = 0; j < WORDS_PER_BEAT; j++) cs_flat[j*32 +: 32] = cs_data[j];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= 1'b0;
      rd_meta_q <= '0;
      wcount    <= '0;
      wb_head   <= 1'b0;
      for (int i = 0; i < 2; i++) begin
        wb_meta[i] <= '0;
        wb_data[i] <= '0;
      end
    end else begin
      rd_q <= cs_en;
      if (cs_en) rd_meta_q <= '{addr: rreq_addr, strb: strb_now, last: lastbeat};
      if (wpush) begin
        wb_data[wb_head ^ wcount[0]] <= cs_flat;
        wb_meta[wb_head ^ wcount[0]] <= rd_meta_q;
      end
      if (wpop) wb_head <= ~wb_head;
      wcount <= wcount + 2'(wpush) - 2'(wpop);
    end
  end

  // ---- beat counters
  logic advance;
  assign advance   = meta_push || cs_en;
  assign uop_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cur      <= '0;
      r        <= '0;
      s        <= '0;
      segs     <= 16'd1;
      row_addr <= '0;
    end else if (uop_valid && uop_ready) begin
      busy     <= (uop.rows != 16'd0);
      cur      <= uop;
      r        <= '0;
      s        <= '0;
      segs     <= (uop.mode == LD_A || uop.mode == LD_B) ? 16'd1 :
                  16'((32'(uop.words) + WORDS_PER_BEAT - 1) / WORDS_PER_BEAT);
      row_addr <= uop.base;
    end else if (advance) begin
      if (s != segs - 16'd1) s <= s + 16'd1;
      else begin
        s        <= '0;
        r        <= r + 16'd1;
        row_addr <= row_addr + ADDR_W'(cur.stride);
      end
      if (lastbeat) busy <= 1'b0;
    end
  end

  a_wbuf_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wfill <= 3'd2);

endmodule

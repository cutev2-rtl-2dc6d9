// cute_data_reorder: Data Reorder of the Memory Loader.
//
// Memory returns read beats in request order.  For each beat this module
// takes the matching descriptor pushed by the Request Generator (a FIFO of
// OUTS entries) and writes the beat to its target:
//   LD_A / LD_B  one scratchpad row of A or B in the given bank; bytes at
//                or past 'row_bytes' (K padding at the end of the matrix)
//                are written as zero so they add nothing to the dot product;
//   LD_BIAS      16 words of row r, segment s, of the C scratchpad; words
//                past the tile's valid columns are written as zero.
// When the descriptor ends a micro-instruction it pulses ld_done with the
// mode and bank, which the task controller uses to mark a bank full or the
// bias loaded.  meta_space tells the Request Generator that a descriptor
// slot is free.  Responses are accepted every cycle (no back-pressure).
// The paper names this block and its function; the descriptor format is
// this design's choice.
module cute_data_reorder
  import cute_pkg::*;
#(
  parameter int unsigned OUTS = 32,
  localparam int unsigned MW  = 2 + 1 + 16 + 16 + 16 + 1,
  localparam int unsigned PW  = $clog2(OUTS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               meta_push,
  input  logic [MW-1:0]      meta,
  output logic               meta_space,
  input  logic               rresp_valid,
  input  logic [BUS_W-1:0]   rresp_data,
  // A / B scratchpad write
  output logic               a_we,
  output logic               b_we,
  output logic               ab_bank,
  output logic [15:0]        ab_row,
  output logic [BUS_W-1:0]   ab_data,
  // C scratchpad loader write
  output logic               c_we,
  output logic [15:0]        c_row,
  output logic [15:0]        c_seg,
  output logic [31:0]        c_data [WORDS_PER_BEAT],
  // micro-instruction finished
  output logic               ld_done,
  output ld_mode_e           ld_done_mode,
  output logic               ld_done_bank
);

  typedef struct packed {
    ld_mode_e    mode;
    logic        bank;
    logic [15:0] row;
    logic [15:0] seg;
    logic [15:0] valid;   // valid bytes (A/B) or valid words in the row (bias)
    logic        last;
  } meta_t;

  meta_t        fifo [OUTS];
  logic [PW:0]  count;
  logic [PW-1:0] wp, rp;
  meta_t        head;

  assign head = fifo[rp];
  assign meta_space = (count < (PW+1)'(OUTS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      wp    <= '0;
      rp    <= '0;
    end else begin
      if (meta_push) begin
        fifo[wp] <= meta_t'(meta);
        wp <= wp + 1'b1;
      end
      if (rresp_valid) rp <= rp + 1'b1;
      count <= count + (PW+1)'(meta_push) - (PW+1)'(rresp_valid);
    end
  end

  // route the beat
  always_comb begin
    a_we    = rresp_valid && head.mode == LD_A;
    b_we    = rresp_valid && head.mode == LD_B;
    c_we    = rresp_valid && head.mode == LD_BIAS;
    ab_bank = head.bank;
    ab_row  = head.row;
    c_row   = head.row;
    c_seg   = head.seg;
    for (int unsigned i = 0; i < BUS_BYTES; i++)
      ab_data[i*8 +: 8] = (i < 32'(head.valid)) ? rresp_data[i*8 +: 8] : 8'd0;
    for (int unsigned j = 0; j < WORDS_PER_BEAT; j++)
      c_data[j] = (32'(head.seg) * WORDS_PER_BEAT + j < 32'(head.valid)) ? rresp_data[j*32 +: 32] : 32'd0;
    ld_done      = rresp_valid && head.last;
    ld_done_mode = head.mode;
    ld_done_bank = head.bank;
  end

  a_no_orphan_beat: assert property (@(posedge clk) disable iff (!rst_n) rresp_valid |-> count != 0)
    else $error("read response without a request");

endmodule

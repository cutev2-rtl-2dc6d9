// cute_data_ctrl_ab: Data Controller for source matrix A (ROLE_B = 0) or
// B (ROLE_B = 1).
//
// Accepts one micro-instruction per resident K step (bank, size in PE
// blocks mb x nb) and walks the loop
//   for ks in 0..KSUB-1, for m in 0..mb-1, for n in 0..nb-1
// issuing one scratchpad read per step: the A controller reads row block m,
// the B controller row block n, so an A block is reused over nb steps.  The
// returned rows are cut to the ks-th KPE_BITS slice and handed to the PE
// array (A broadcast along rows, B along columns) one cycle after the read.
// The three Data Controllers get the same micro-instruction and the same
// stall (the C controller's read-after-write hazard), so they step in
// lockstep.  rd_done pulses with the last read of a micro-instruction; the
// task controller then frees the bank for the Memory Loader.
// The paper names the controller and its micro-instruction fields (size,
// loop); the loop order and the lockstep scheme are this design's choices.
// When a scratchpad row is one reduction slice wide (KSUB = 1, the default
// sizes) the slice select is trivial and 'op' is a plain wire from 'rd_data':
// the data reaches the PE array straight from the scratchpad read register.
module cute_data_ctrl_ab
  import cute_pkg::*;
#(
  parameter bit          ROLE_B    = 1'b0,
  parameter int unsigned PE_DIM    = 4,    // Mpe for A, Npe for B
  parameter int unsigned KPE_BITS  = 512,
  parameter int unsigned ROW_BYTES = 64,   // Kscp
  parameter int unsigned ROWS      = 64,   // Mscp for A, Nscp for B
  localparam int unsigned KSUB = ROW_BYTES * 8 / KPE_BITS,
  localparam int unsigned BLK  = ROWS / PE_DIM,
  localparam int unsigned XW   = (BLK > 1) ? $clog2(BLK) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   uop_valid,
  output logic                   uop_ready,
  input  dc_uop_t                uop,
  input  logic                   stall,
  // scratchpad read port
  output logic                   rd_en,
  output logic                   rd_bank,
  output logic [XW-1:0]          rd_blk,
  input  logic [ROW_BYTES*8-1:0] rd_data [PE_DIM],
  // operands to the PE array
  output logic                   op_valid,
  output dtype_e                 op_dtype,
  output logic [KPE_BITS-1:0]    op [PE_DIM],
  // last read of the micro-instruction issued
  output logic                   rd_done,
  output logic                   rd_done_bank
);

  logic        busy;
  dc_uop_t     cur;
  logic [15:0] ks, mi, ni;
  logic        step, last;

  assign step = busy && !stall;
  assign last = (ks == 16'(KSUB - 1)) && (mi == cur.mb - 16'd1) && (ni == cur.nb - 16'd1);
  assign uop_ready = !busy || (step && last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cur  <= '0;
      ks   <= '0;
      mi   <= '0;
      ni   <= '0;
    end else begin
      if (step) begin
        if (ni != cur.nb - 16'd1) ni <= ni + 16'd1;
        else begin
          ni <= '0;
          if (mi != cur.mb - 16'd1) mi <= mi + 16'd1;
          else begin
            mi <= '0;
            ks <= (ks == 16'(KSUB - 1)) ? 16'd0 : ks + 16'd1;
          end
        end
        if (last) busy <= 1'b0;
      end
      if (uop_valid && uop_ready) begin
        busy <= 1'b1;
        cur  <= uop;
        ks   <= '0;
        mi   <= '0;
        ni   <= '0;
      end
    end
  end

  assign rd_en        = step;
  assign rd_bank      = cur.bank;
  assign rd_blk       = XW'(ROLE_B ? ni : mi);
  assign rd_done      = step && last;
  assign rd_done_bank = cur.bank;

  // operand stage: the scratchpad data arrives one cycle after the read
  logic [15:0] ks_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_valid <= 1'b0;
      op_dtype <= DT_INT8;
      ks_q     <= '0;
    end else begin
      op_valid <= step;
      if (step) begin
        op_dtype <= cur.dtype;
        ks_q     <= ks;
      end
    end
  end

  always_comb
    for (int unsigned r = 0; r < PE_DIM; r++)
      op[r] = rd_data[r][int'(ks_q % 16'(KSUB)) * KPE_BITS +: KPE_BITS];

endmodule

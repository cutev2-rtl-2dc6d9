// cute_data_ctrl_c: Data Controller for the bias / accumulator matrix C.
//
// Takes the same micro-instruction as the A and B controllers and walks the
// same loop, reading the MPE x NPE accumulator block (m, n) from the C
// scratchpad for every step and handing it to the PE array together with
// the A and B operands.  On the first K step of a tile with zero bias
// (zero_c) it supplies zeros instead of reading.  Results return from the
// PE array PE_LAT cycles after the operands and are written back to the
// same block.
// A block must not be read again before its new value is written, so the
// controller keeps the blocks in flight in a PE_LAT+1 deep delay line and
// raises 'hazard' (a read-after-write stall, which also stalls the A and B
// controllers) when the next step's block is among them.  tile_done pulses
// when the final write-back of a micro-instruction marked last_k lands,
// i.e. the output tile is complete in the scratchpad.
// The paper gives the role of this controller; the hazard scheme is this
// design's choice.
// 'wr_data' is a plain wire from 'res': the PE array's results go to the
// scratchpad write port unchanged, and only the block address is delayed.
module cute_data_ctrl_c
  import cute_pkg::*;
#(
  parameter int unsigned MPE      = 4,
  parameter int unsigned NPE      = 4,
  parameter int unsigned MSCP     = 64,
  parameter int unsigned NSCP     = 64,
  parameter int unsigned KSUB     = 1,
  parameter int unsigned PE_LAT   = 6,
  localparam int unsigned MBW = $clog2(MSCP / MPE) > 0 ? $clog2(MSCP / MPE) : 1,
  localparam int unsigned NBW = $clog2(NSCP / NPE) > 0 ? $clog2(NSCP / NPE) : 1,
  localparam int unsigned DL  = PE_LAT + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            uop_valid,
  output logic            uop_ready,
  input  dc_uop_t         uop,
  output logic            hazard,
  // scratchpad compute read
  output logic            rd_en,
  output logic [MBW-1:0]  rd_mb,
  output logic [NBW-1:0]  rd_nb,
  input  logic [31:0]     rd_data [MPE][NPE],
  // accumulator operand to the PE array
  output logic [31:0]     op [MPE][NPE],
  // results from the PE array and scratchpad write-back
  input  logic            res_valid,
  input  logic [31:0]     res [MPE][NPE],
  output logic            wr_en,
  output logic [MBW-1:0]  wr_mb,
  output logic [NBW-1:0]  wr_nb,
  output logic [31:0]     wr_data [MPE][NPE],
  output logic            tile_done,
  output logic            idle
);

  typedef struct packed {
    logic           v;
    logic [MBW-1:0] mb;
    logic [NBW-1:0] nb;
    logic           last;
  } infl_t;

  logic        busy;
  dc_uop_t     cur;
  logic [15:0] ks, mi, ni;
  logic        step, last;
  infl_t       dl [DL];

  always_comb begin
    hazard = 1'b0;
    for (int unsigned d = 0; d < DL; d++)
      if (dl[d].v && dl[d].mb == MBW'(mi) && dl[d].nb == NBW'(ni)) hazard = busy;
  end

  assign step = busy && !hazard;
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

  // Zero bias applies to the first K slice of the first K step only.
  logic zero_now;
  assign zero_now = cur.zero_c && (ks == 16'd0);

  assign rd_en = step && !zero_now;
  assign rd_mb = MBW'(mi);
  assign rd_nb = NBW'(ni);

  logic zero_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) zero_q <= 1'b0;
    else if (step) zero_q <= zero_now;
  end

  always_comb
    for (int unsigned i = 0; i < MPE; i++)
      for (int unsigned j = 0; j < NPE; j++)
        op[i][j] = zero_q ? 32'd0 : rd_data[i][j];

  // in-flight delay line: dl[0] is the step issued last cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned d = 0; d < DL; d++) dl[d] <= '0;
    end else begin
      dl[0] <= '{v: step, mb: MBW'(mi), nb: NBW'(ni), last: step && last && cur.last_k};
      for (int unsigned d = 1; d < DL; d++) dl[d] <= dl[d-1];
    end
  end

  assign wr_en     = dl[DL-1].v;
  assign wr_mb     = dl[DL-1].mb;
  assign wr_nb     = dl[DL-1].nb;
  assign wr_data   = res;
  assign tile_done = dl[DL-1].v && dl[DL-1].last;

  always_comb begin
    idle = !busy;
    for (int unsigned d = 0; d < DL; d++) if (dl[d].v) idle = 1'b0;
  end

  // the PE array's results line up with the delay line
  a_res_in_step: assert property (@(posedge clk) disable iff (!rst_n) res_valid == dl[DL-1].v)
    else $error("PE result out of step with C write-back");

endmodule

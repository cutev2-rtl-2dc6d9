// cute_task_ctrl: splits one matrix task into scratchpad tiles and
// schedules the Memory Loader and the Data Controllers.
//
// The schedule is output-stationary, as the paper's bandwidth model assumes:
// for every MSCP x NSCP output tile (tile rows outer, tile columns inner)
// the tile's accumulators stay in the C scratchpad while the K dimension is
// streamed through in steps of KSCP_BYTES bytes; then the tile is stored.
// Two sequencers run side by side:
//   loader   BIAS (unless the bias type is zero), then A and B of every K
//            step into the A/B bank of that step, then ST of the tile;
//   compute  one Data Controller micro-instruction per K step.
// Banks alternate between K steps, so the loader fills one bank while the
// PE array consumes the other.  The rules that keep them apart:
//   - A/B of a step is loaded only into a bank that the compute side has
//     finished reading (bank claim, cleared by rd_done);
//   - a K step is computed only when both its A and B are in (bank full);
//   - the first K step of a tile waits for its bias, or, with zero bias,
//     for the previous tile's store to have read the C scratchpad (c_free);
//   - the store of a tile waits until its last write-back (tile_done).
// The loader is in order, so a bias load always follows the previous store.
// task_done pulses when the last store beat of the task is accepted; the
// next task is taken after that.  Partial edge tiles are handled: rows and
// columns past M and N are neither loaded nor stored, and bytes past K are
// zeroed by the Data Reorder.
// The paper gives the output-stationary strategy and the micro-instruction
// fields; the sequencing rules are this design's choices.
module cute_task_ctrl
  import cute_pkg::*;
#(
  parameter int unsigned MPE        = 4,
  parameter int unsigned NPE        = 4,
  parameter int unsigned MSCP       = 64,
  parameter int unsigned NSCP       = 64,
  parameter int unsigned KSCP_BYTES = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  // task from the command interface
  input  logic     task_valid,
  output logic     task_ready,
  input  task_t    tsk,
  output logic     task_done,
  // loader micro-instructions
  output logic     ld_valid,
  input  logic     ld_ready,
  output ld_uop_t  ld_uop,
  input  logic     ld_done,
  input  ld_mode_e ld_done_mode,
  input  logic     ld_done_bank,
  input  logic     st_read_done,
  input  logic     st_done,
  // Data Controller micro-instructions
  output logic     dc_valid,
  input  logic     dc_ready,
  output dc_uop_t  dc_uop,
  input  logic     rd_done,
  input  logic     rd_done_bank,
  input  logic     tile_done,
  // status
  output logic     busy
);

  typedef enum logic [2:0] {PH_BIAS, PH_A, PH_B, PH_ST, PH_END} ph_e;

  task_t       t;
  logic        active;
  logic [31:0] mt_n, nt_n, kt_n, kbytes;

  // loader sequencer
  ph_e         l_ph;
  logic [31:0] l_mt, l_nt, l_kt;
  logic        l_bank;
  // compute sequencer
  logic [31:0] c_mt, c_nt, c_kt;
  logic        c_bank, c_end;
  // hand-over flags
  logic [1:0]  claim, a_full, b_full;
  logic        c_free, bias_ready, tile_computed;
  logic [7:0]  st_pend;   // stores issued whose last beat is not yet accepted

  logic zero_bias;
  assign zero_bias = (t.bias_type == BIAS_ZERO);

  function automatic logic [31:0] min32(input logic [31:0] a, input logic [31:0] b);
    return (a < b) ? a : b;
  endfunction

  // tile geometry for the loader's current tile
  logic [31:0] l_mrows, l_ncols, l_kb;
  assign l_mrows = min32(32'(MSCP), t.m - l_mt * MSCP);
  assign l_ncols = min32(32'(NSCP), t.n - l_nt * NSCP);
  assign l_kb    = min32(32'(KSCP_BYTES), kbytes - l_kt * KSCP_BYTES);

  logic [31:0] c_mrows, c_ncols;
  assign c_mrows = min32(32'(MSCP), t.m - c_mt * MSCP);
  assign c_ncols = min32(32'(NSCP), t.n - c_nt * NSCP);

  // ---- loader micro-instruction for the current phase
  always_comb begin
    ld_uop = '0;
    ld_uop.bank = l_bank;
    unique case (l_ph)
      PH_BIAS: begin
        ld_uop.mode   = LD_BIAS;
        ld_uop.base   = t.base_bias + ADDR_W'(l_nt * NSCP * 4) +
                        ((t.bias_type == BIAS_ROW) ? '0 : ADDR_W'(l_mt * MSCP) * ADDR_W'(t.stride_bias));
        ld_uop.stride = (t.bias_type == BIAS_ROW) ? 32'd0 : t.stride_bias;
        ld_uop.rows   = 16'(l_mrows);
        ld_uop.words  = 16'(l_ncols);
      end
      PH_A: begin
        ld_uop.mode      = LD_A;
        ld_uop.base      = t.base_a + ADDR_W'(l_mt * MSCP) * ADDR_W'(t.stride_a) + ADDR_W'(l_kt * KSCP_BYTES);
        ld_uop.stride    = t.stride_a;
        ld_uop.rows      = 16'(l_mrows);
        ld_uop.row_bytes = 16'(l_kb);
      end
      PH_B: begin
        ld_uop.mode      = LD_B;
        ld_uop.base      = t.base_b + ADDR_W'(l_nt * NSCP) * ADDR_W'(t.stride_b) + ADDR_W'(l_kt * KSCP_BYTES);
        ld_uop.stride    = t.stride_b;
        ld_uop.rows      = 16'(l_ncols);
        ld_uop.row_bytes = 16'(l_kb);
      end
      default: begin  // PH_ST
        ld_uop.mode      = ST_C;
        ld_uop.transpose = t.transpose;
        ld_uop.stride    = t.stride_c;
        if (t.transpose) begin
          ld_uop.base  = t.base_c + ADDR_W'(l_nt * NSCP) * ADDR_W'(t.stride_c) + ADDR_W'(l_mt * MSCP * 4);
          ld_uop.rows  = 16'(l_ncols);
          ld_uop.words = 16'(l_mrows);
        end else begin
          ld_uop.base  = t.base_c + ADDR_W'(l_mt * MSCP) * ADDR_W'(t.stride_c) + ADDR_W'(l_nt * NSCP * 4);
          ld_uop.rows  = 16'(l_mrows);
          ld_uop.words = 16'(l_ncols);
        end
      end
    endcase
  end

  always_comb begin
    unique case (l_ph)
      PH_BIAS: ld_valid = active;
      PH_A:    ld_valid = active && !claim[l_bank];
      PH_B:    ld_valid = active;
      PH_ST:   ld_valid = active && tile_computed;
      default: ld_valid = 1'b0;
    endcase
  end

  // ---- compute micro-instruction
  assign dc_uop = '{bank: c_bank,
                    mb: 16'((c_mrows + MPE - 1) / MPE),
                    nb: 16'((c_ncols + NPE - 1) / NPE),
                    zero_c: (c_kt == 0) && zero_bias,
                    last_k: (c_kt == kt_n - 1),
                    dtype: t.dtype};
  assign dc_valid = active && !c_end && a_full[c_bank] && b_full[c_bank] &&
                    ((c_kt != 0) || (c_free && (zero_bias || bias_ready)));

  assign task_ready = !active;
  assign busy = active;

  logic ld_fire, dc_fire, last_tile_l;
  assign ld_fire = ld_valid && ld_ready;
  assign dc_fire = dc_valid && dc_ready;
  assign last_tile_l = (l_mt == mt_n - 1) && (l_nt == nt_n - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; active <= 1'b0;
      mt_n <= '0; nt_n <= '0; kt_n <= '0; kbytes <= '0;
      l_ph <= PH_END; l_mt <= '0; l_nt <= '0; l_kt <= '0; l_bank <= 1'b0;
      c_mt <= '0; c_nt <= '0; c_kt <= '0; c_bank <= 1'b0; c_end <= 1'b1;
      claim <= '0; a_full <= '0; b_full <= '0;
      c_free <= 1'b1; bias_ready <= 1'b0; tile_computed <= 1'b0;
      task_done <= 1'b0;
      st_pend <= '0;
    end else begin
      task_done <= 1'b0;

      if (task_valid && task_ready) begin
        t      <= tsk;
        active <= 1'b1;
        kbytes <= tsk.k * elem_bytes(tsk.dtype);
        mt_n   <= ceil_div(tsk.m, MSCP);
        nt_n   <= ceil_div(tsk.n, NSCP);
        kt_n   <= ceil_div(tsk.k * elem_bytes(tsk.dtype), KSCP_BYTES);
        l_ph   <= (tsk.bias_type == BIAS_ZERO) ? PH_A : PH_BIAS;
        l_mt <= '0; l_nt <= '0; l_kt <= '0;
        c_mt <= '0; c_nt <= '0; c_kt <= '0; c_end <= 1'b0;
      end

      // loader sequencer
      if (ld_fire) begin
        unique case (l_ph)
          PH_BIAS: l_ph <= PH_A;
          PH_A: begin
            l_ph <= PH_B;
            claim[l_bank] <= 1'b1;
          end
          PH_B: begin
            l_bank <= ~l_bank;
            if (l_kt == kt_n - 1) l_ph <= PH_ST;
            else begin
              l_ph <= PH_A;
              l_kt <= l_kt + 1;
            end
          end
          default: begin  // PH_ST
            tile_computed <= 1'b0;
            l_kt <= '0;
            if (last_tile_l) l_ph <= PH_END;
            else begin
              l_ph <= zero_bias ? PH_A : PH_BIAS;
              if (l_nt == nt_n - 1) begin
                l_nt <= '0;
                l_mt <= l_mt + 1;
              end else l_nt <= l_nt + 1;
            end
          end
        endcase
      end

      // compute sequencer
      if (dc_fire) begin
        c_bank <= ~c_bank;
        if (c_kt == 0) begin
          c_free     <= 1'b0;
          bias_ready <= 1'b0;
        end
        if (c_kt == kt_n - 1) begin
          c_kt <= '0;
          if (c_nt == nt_n - 1) begin
            c_nt <= '0;
            if (c_mt == mt_n - 1) c_end <= 1'b1;
            else c_mt <= c_mt + 1;
          end else c_nt <= c_nt + 1;
        end else c_kt <= c_kt + 1;
      end

      // progress from the loader and the Data Controllers
      if (ld_done && ld_done_mode == LD_A) a_full[ld_done_bank] <= 1'b1;
      if (ld_done && ld_done_mode == LD_B) b_full[ld_done_bank] <= 1'b1;
      if (ld_done && ld_done_mode == LD_BIAS) bias_ready <= 1'b1;
      if (rd_done) begin
        a_full[rd_done_bank] <= 1'b0;
        b_full[rd_done_bank] <= 1'b0;
        claim[rd_done_bank]  <= 1'b0;
      end
      if (tile_done) tile_computed <= 1'b1;
      if (st_read_done) c_free <= 1'b1;
      st_pend <= st_pend + 8'(ld_fire && l_ph == PH_ST) - 8'(st_done);
      if (active && l_ph == PH_END && !task_done &&
          (st_pend == 8'd1 && st_done || st_pend == 8'd0)) begin
        active    <= 1'b0;
        task_done <= 1'b1;
      end
    end
  end

  // a task needs at least one element in every dimension
  a_task_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    (task_valid && task_ready) |-> (tsk.m != 0 && tsk.n != 0 && tsk.k != 0));

endmodule

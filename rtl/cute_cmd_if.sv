// cute_cmd_if: command interface between the host CPU and the matrix unit.
//
// A RoCC-like port: each command carries a function code and two 64-bit
// source operands.  Configuration commands write the interface registers
// (matrix sizes, base addresses and strides of A, B, bias and C, data
// type, bias type, transpose).  ISSUE (asyncMatMul) copies the registers
// into a task queue of QDEPTH entries and returns at once; the registers
// keep their values, so the next tile only rewrites what changes.  CHECK
// (checkMatmul) waits for the oldest issued task that has not yet been
// checked to complete, then responds with its sequence number: this is the
// synchronisation of the paper's programming example, where the CPU issues
// tile i and then checks tile i-1.  A CHECK with nothing outstanding
// responds at once with bit 63 set.  STATUS responds at once with
//   [15:0] tasks completed, [23:16] tasks outstanding, [31:24] tasks issued
//   but not yet checked (all modulo 2^8 / 2^16).
// Command encoding (funct):
//   0 CFG_SIZE  rs1[31:0]=M rs1[63:32]=N rs2[31:0]=K
//   1 CFG_A     rs1=base rs2[31:0]=stride   (likewise 2 CFG_B, 3 CFG_BIAS, 4 CFG_C)
//   5 CFG_MODE  rs1[2:0]=data type rs1[5:4]=bias type rs1[8]=transpose
//   6 ISSUE     7 CHECK     8 STATUS
// A command is accepted when cmd_valid && cmd_ready.  ISSUE waits while the
// queue is full; no command is accepted while a CHECK waits or while a
// response is not yet taken (resp_valid && !resp_ready).
// The paper lists the registers and the two primitives; the encoding, the
// queue depth and the Status layout are this design's choices.
module cute_cmd_if
  import cute_pkg::*;
#(
  parameter int unsigned QDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [6:0]  cmd_funct,
  input  logic [63:0] cmd_rs1,
  input  logic [63:0] cmd_rs2,
  output logic        resp_valid,
  input  logic        resp_ready,
  output logic [63:0] resp_data,
  // tasks to the task controller
  output logic        task_valid,
  input  logic        task_ready,
  output task_t       task_o,
  input  logic        task_done
);

  localparam logic [6:0] F_SIZE = 7'd0, F_A = 7'd1, F_B = 7'd2, F_BIAS = 7'd3, F_C = 7'd4,
                         F_MODE = 7'd5, F_ISSUE = 7'd6, F_CHECK = 7'd7, F_STATUS = 7'd8;
  localparam int unsigned QW = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;

  task_t       regs;
  task_t       q [QDEPTH];
  logic [QW:0] qcount;
  logic [QW-1:0] qwp, qrp;

  logic [31:0] issued, completed, checked;
  logic        chk_wait;

  logic qfull;
  assign qfull = (qcount == (QW+1)'(QDEPTH));

  always_comb begin
    cmd_ready = !chk_wait && !(resp_valid && !resp_ready);
    if (cmd_funct == F_ISSUE && qfull) cmd_ready = 1'b0;
  end

  logic fire;
  assign fire = cmd_valid && cmd_ready;

  assign task_valid = (qcount != 0);
  assign task_o     = q[qrp];

  logic tpop, tpush;
  assign tpop  = task_valid && task_ready;
  assign tpush = fire && cmd_funct == F_ISSUE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs       <= '0;
      qcount     <= '0;
      qwp        <= '0;
      qrp        <= '0;
      issued     <= '0;
      completed  <= '0;
      checked    <= '0;
      chk_wait   <= 1'b0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
    end else begin
      if (resp_valid && resp_ready) resp_valid <= 1'b0;
      if (task_done) completed <= completed + 1;
      if (tpop) qrp <= (qrp == QW'(QDEPTH - 1)) ? '0 : qrp + 1'b1;
      qcount <= qcount + (QW+1)'(tpush) - (QW+1)'(tpop);

      if (fire) begin
        unique case (cmd_funct)
          F_SIZE: begin
            regs.m <= cmd_rs1[31:0];
            regs.n <= cmd_rs1[63:32];
            regs.k <= cmd_rs2[31:0];
          end
          F_A:    begin regs.base_a    <= cmd_rs1; regs.stride_a    <= cmd_rs2[31:0]; end
          F_B:    begin regs.base_b    <= cmd_rs1; regs.stride_b    <= cmd_rs2[31:0]; end
          F_BIAS: begin regs.base_bias <= cmd_rs1; regs.stride_bias <= cmd_rs2[31:0]; end
          F_C:    begin regs.base_c    <= cmd_rs1; regs.stride_c    <= cmd_rs2[31:0]; end
          F_MODE: begin
            regs.dtype     <= dtype_e'(cmd_rs1[2:0]);
            regs.bias_type <= bias_e'(cmd_rs1[5:4]);
            regs.transpose <= cmd_rs1[8];
          end
          F_ISSUE: begin
            q[qwp] <= regs;
            qwp    <= (qwp == QW'(QDEPTH - 1)) ? '0 : qwp + 1'b1;
            issued <= issued + 1;
          end
          F_CHECK: begin
            if (checked == issued) begin
              resp_valid <= 1'b1;
              resp_data  <= {1'b1, 63'd0};
            end else chk_wait <= 1'b1;
          end
          F_STATUS: begin
            resp_valid <= 1'b1;
            resp_data  <= {32'd0, 8'(issued - checked), 8'(issued - completed), completed[15:0]};
          end
          default: ;
        endcase
      end

      // a waiting CHECK completes once the task it waits for is done
      if (chk_wait && (completed != checked)) begin
        chk_wait   <= 1'b0;
        checked    <= checked + 1;
        resp_valid <= 1'b1;
        resp_data  <= {32'd0, checked};
      end
    end
  end

endmodule

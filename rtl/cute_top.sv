// cute_top: the matrix unit, decoupled from the host CPU pipeline.
//
// The host sends configuration, asyncMatMul (ISSUE) and checkMatmul (CHECK)
// commands over a RoCC-like command port; the unit then works through each
// task on its own and reaches memory through its own port, not through the
// CPU's load-store unit.  Inside:
//   cute_cmd_if        interface registers, task queue, CHECK/STATUS
//   cute_task_ctrl     output-stationary tiling into micro-instructions
//   cute_mem_loader    Request Generator + Data Reorder, all memory traffic
//   cute_spad_ab (x2)  double-banked A and B scratchpads (MSCP/NSCP rows
//                      of KSCP_BYTES)
//   cute_spad_c        resident MSCP x NSCP accumulator tile
//   cute_data_ctrl_ab (x2), cute_data_ctrl_c   the three Data Controllers
//   cute_pe_array      MPE x NPE mixed-precision dot-product PEs
// Defaults are the paper's case-study configuration: a 4 x 4 PE array with
// a 512-bit reduce width (4 TOPS at 8 bits and 2 GHz) and a 64 x 64 x
// 64-byte scratchpad tile.  The 64-byte memory beat must equal KSCP_BYTES.
// Memory port: 64-byte beats; read requests valid/ready, read responses in
// request order and always accepted; write requests valid/ready with a byte
// strobe, complete when accepted.  The unit keeps at most OUTS reads in
// flight.
module cute_top
  import cute_pkg::*;
#(
  parameter int unsigned MPE        = 4,
  parameter int unsigned NPE        = 4,
  parameter int unsigned KPE_BITS   = 512,
  parameter int unsigned MSCP       = 64,
  parameter int unsigned NSCP       = 64,
  parameter int unsigned KSCP_BYTES = 64,
  parameter int unsigned QDEPTH     = 4,
  parameter int unsigned OUTS       = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command port from the host CPU
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [6:0]           cmd_funct,
  input  logic [63:0]          cmd_rs1,
  input  logic [63:0]          cmd_rs2,
  output logic                 resp_valid,
  input  logic                 resp_ready,
  output logic [63:0]          resp_data,
  // memory port to the platform's cache / TCM / NoC
  output logic                 mem_rreq_valid,
  input  logic                 mem_rreq_ready,
  output logic [ADDR_W-1:0]    mem_rreq_addr,
  input  logic                 mem_rresp_valid,
  input  logic [BUS_W-1:0]     mem_rresp_data,
  output logic                 mem_wreq_valid,
  input  logic                 mem_wreq_ready,
  output logic [ADDR_W-1:0]    mem_wreq_addr,
  output logic [BUS_W-1:0]     mem_wreq_data,
  output logic [BUS_BYTES-1:0] mem_wreq_strb,
  output logic                 busy
);

  localparam int unsigned KSUB = KSCP_BYTES * 8 / KPE_BITS;
  localparam int unsigned PE_LAT = 6;
  localparam int unsigned MBW = $clog2(MSCP / MPE) > 0 ? $clog2(MSCP / MPE) : 1;
  localparam int unsigned NBW = $clog2(NSCP / NPE) > 0 ? $clog2(NSCP / NPE) : 1;
  localparam int unsigned RWC = $clog2((MSCP > NSCP) ? MSCP : NSCP);
  localparam int unsigned SGW = $clog2(((MSCP > NSCP) ? MSCP : NSCP) / WORDS_PER_BEAT) > 0 ?
                                $clog2(((MSCP > NSCP) ? MSCP : NSCP) / WORDS_PER_BEAT) : 1;

  initial begin
    assert (KSCP_BYTES == BUS_BYTES) else $fatal(1, "KSCP_BYTES must equal the 64-byte memory beat");
    assert (KSUB >= 1 && KSUB * KPE_BITS == KSCP_BYTES * 8) else $fatal(1, "KSCP_BYTES*8 must be a multiple of KPE_BITS");
  end

  // ---- command interface and task controller
  logic    task_valid, task_ready, task_done;
  task_t   tsk;

  cute_cmd_if #(.QDEPTH(QDEPTH)) u_cmd (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_funct, .cmd_rs1, .cmd_rs2,
    .resp_valid, .resp_ready, .resp_data,
    .task_valid, .task_ready, .task_o(tsk), .task_done
  );

  logic     ld_valid, ld_ready, ld_done, ld_done_bank, st_read_done, st_done;
  ld_uop_t  ld_uop;
  ld_mode_e ld_done_mode;
  logic     dc_valid, dc_ready, dca_ready, dcb_ready, dcc_ready;
  dc_uop_t  dc_uop;
  logic     rd_done, rd_done_bank, rd_done_b, rd_done_bank_b, tile_done, dcc_idle;

  cute_task_ctrl #(.MPE(MPE), .NPE(NPE), .MSCP(MSCP), .NSCP(NSCP), .KSCP_BYTES(KSCP_BYTES)) u_task (
    .clk, .rst_n,
    .task_valid, .task_ready, .tsk, .task_done,
    .ld_valid, .ld_ready, .ld_uop, .ld_done, .ld_done_mode, .ld_done_bank,
    .st_read_done, .st_done,
    .dc_valid, .dc_ready, .dc_uop, .rd_done, .rd_done_bank, .tile_done,
    .busy
  );

  // ---- Memory Loader
  logic               a_we, b_we, ab_bank, c_we, cs_en, cs_tr;
  logic [15:0]        ab_row, c_row, c_seg, cs_row, cs_seg;
  logic [BUS_W-1:0]   ab_data;
  logic [31:0]        c_ldata [WORDS_PER_BEAT];
  logic [31:0]        cs_data [WORDS_PER_BEAT];

  cute_mem_loader #(.OUTS(OUTS)) u_loader (
    .clk, .rst_n,
    .uop_valid(ld_valid), .uop_ready(ld_ready), .uop(ld_uop),
    .rreq_valid(mem_rreq_valid), .rreq_ready(mem_rreq_ready), .rreq_addr(mem_rreq_addr),
    .rresp_valid(mem_rresp_valid), .rresp_data(mem_rresp_data),
    .wreq_valid(mem_wreq_valid), .wreq_ready(mem_wreq_ready), .wreq_addr(mem_wreq_addr),
    .wreq_data(mem_wreq_data), .wreq_strb(mem_wreq_strb),
    .a_we, .b_we, .ab_bank, .ab_row, .ab_data,
    .c_we, .c_row, .c_seg, .c_data(c_ldata),
    .cs_en, .cs_tr, .cs_row, .cs_seg, .cs_data,
    .ld_done, .ld_done_mode, .ld_done_bank, .st_read_done, .st_done
  );

  // ---- scratchpads
  localparam int unsigned AXW = $clog2(MSCP / MPE) > 0 ? $clog2(MSCP / MPE) : 1;
  localparam int unsigned BXW = $clog2(NSCP / NPE) > 0 ? $clog2(NSCP / NPE) : 1;

  logic                 a_rd_en, b_rd_en, a_rd_bank, b_rd_bank;
  logic [AXW-1:0]       a_rd_blk;
  logic [BXW-1:0]       b_rd_blk;
  logic [BUS_W-1:0]     a_rd_data [MPE];
  logic [BUS_W-1:0]     b_rd_data [NPE];

  cute_spad_ab #(.ROWS(MSCP), .ROW_BYTES(KSCP_BYTES), .RD_ROWS(MPE), .BANKS(2)) u_spad_a (
    .clk, .wr_en(a_we), .wr_bank(ab_bank), .wr_row($clog2(MSCP)'(ab_row)), .wr_data(ab_data),
    .rd_en(a_rd_en), .rd_bank(a_rd_bank), .rd_blk(a_rd_blk), .rd_data(a_rd_data)
  );

  cute_spad_ab #(.ROWS(NSCP), .ROW_BYTES(KSCP_BYTES), .RD_ROWS(NPE), .BANKS(2)) u_spad_b (
    .clk, .wr_en(b_we), .wr_bank(ab_bank), .wr_row($clog2(NSCP)'(ab_row)), .wr_data(ab_data),
    .rd_en(b_rd_en), .rd_bank(b_rd_bank), .rd_blk(b_rd_blk), .rd_data(b_rd_data)
  );

  logic            c_rd_en, c_wr_en;
  logic [MBW-1:0]  c_rd_mb, c_wr_mb;
  logic [NBW-1:0]  c_rd_nb, c_wr_nb;
  logic [31:0]     c_rd_data [MPE][NPE];
  logic [31:0]     c_wr_data [MPE][NPE];

  cute_spad_c #(.MSCP(MSCP), .NSCP(NSCP), .MPE(MPE), .NPE(NPE), .SEG(WORDS_PER_BEAT)) u_spad_c (
    .clk,
    .cr_en(c_rd_en), .cr_mb(c_rd_mb), .cr_nb(c_rd_nb), .cr_data(c_rd_data),
    .cw_en(c_wr_en), .cw_mb(c_wr_mb), .cw_nb(c_wr_nb), .cw_data(c_wr_data),
    .lw_en(c_we), .lw_row(RWC'(c_row)), .lw_seg(SGW'(c_seg)), .lw_data(c_ldata),
    .sr_en(cs_en), .sr_tr(cs_tr), .sr_row(RWC'(cs_row)), .sr_seg(SGW'(cs_seg)), .sr_data(cs_data)
  );

  // ---- Data Controllers (lockstep, stalled by the C controller's hazard)
  logic                hazard;
  logic                a_op_valid, b_op_valid;
  dtype_e              a_op_dtype, b_op_dtype;
  logic [KPE_BITS-1:0] a_op [MPE];
  logic [KPE_BITS-1:0] b_op [NPE];
  logic [31:0]         c_op [MPE][NPE];
  logic                res_valid;
  logic [31:0]         res [MPE][NPE];

  assign dc_ready = dca_ready && dcb_ready && dcc_ready;

  cute_data_ctrl_ab #(.ROLE_B(1'b0), .PE_DIM(MPE), .KPE_BITS(KPE_BITS), .ROW_BYTES(KSCP_BYTES), .ROWS(MSCP)) u_dc_a (
    .clk, .rst_n, .uop_valid(dc_valid && dc_ready), .uop_ready(dca_ready), .uop(dc_uop), .stall(hazard),
    .rd_en(a_rd_en), .rd_bank(a_rd_bank), .rd_blk(a_rd_blk), .rd_data(a_rd_data),
    .op_valid(a_op_valid), .op_dtype(a_op_dtype), .op(a_op),
    .rd_done, .rd_done_bank
  );

  cute_data_ctrl_ab #(.ROLE_B(1'b1), .PE_DIM(NPE), .KPE_BITS(KPE_BITS), .ROW_BYTES(KSCP_BYTES), .ROWS(NSCP)) u_dc_b (
    .clk, .rst_n, .uop_valid(dc_valid && dc_ready), .uop_ready(dcb_ready), .uop(dc_uop), .stall(hazard),
    .rd_en(b_rd_en), .rd_bank(b_rd_bank), .rd_blk(b_rd_blk), .rd_data(b_rd_data),
    .op_valid(b_op_valid), .op_dtype(b_op_dtype), .op(b_op),
    .rd_done(rd_done_b), .rd_done_bank(rd_done_bank_b)
  );

  cute_data_ctrl_c #(.MPE(MPE), .NPE(NPE), .MSCP(MSCP), .NSCP(NSCP), .KSUB(KSUB), .PE_LAT(PE_LAT)) u_dc_c (
    .clk, .rst_n, .uop_valid(dc_valid && dc_ready), .uop_ready(dcc_ready), .uop(dc_uop), .hazard,
    .rd_en(c_rd_en), .rd_mb(c_rd_mb), .rd_nb(c_rd_nb), .rd_data(c_rd_data),
    .op(c_op),
    .res_valid, .res,
    .wr_en(c_wr_en), .wr_mb(c_wr_mb), .wr_nb(c_wr_nb), .wr_data(c_wr_data),
    .tile_done, .idle(dcc_idle)
  );

  // ---- PE array
  cute_pe_array #(.MPE(MPE), .NPE(NPE), .KPE_BITS(KPE_BITS)) u_pe_array (
    .clk, .rst_n,
    .in_valid(a_op_valid), .in_dtype(a_op_dtype), .in_a(a_op), .in_b(b_op), .in_c(c_op),
    .out_valid(res_valid), .out_d(res)
  );

  // The three Data Controllers step together.
  a_dc_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (a_op_valid == b_op_valid) && (rd_done == rd_done_b) && (dca_ready == dcc_ready) && (dcb_ready == dca_ready));

endmodule

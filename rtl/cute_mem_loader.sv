// cute_mem_loader: the Memory Loader, which makes every memory access of
// the matrix unit.
//
// It is the Request Generator (cute_load_reqgen), which turns loader
// micro-instructions into memory read and write requests and scratchpad
// addresses, joined to the Data Reorder (cute_data_reorder), which puts the
// returned beats into the A, B or C scratchpad.  Its memory side is a plain
// request/response port (64-byte beats, in-order read responses, no
// response back-pressure, a write is complete when accepted) so that it can
// be bridged to whatever cache, TCM or NoC port a platform offers; the paper
// leaves that interconnect platform-specific.
module cute_mem_loader
  import cute_pkg::*;
#(
  parameter int unsigned OUTS = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 uop_valid,
  output logic                 uop_ready,
  input  ld_uop_t              uop,
  // memory port
  output logic                 rreq_valid,
  input  logic                 rreq_ready,
  output logic [ADDR_W-1:0]    rreq_addr,
  input  logic                 rresp_valid,
  input  logic [BUS_W-1:0]     rresp_data,
  output logic                 wreq_valid,
  input  logic                 wreq_ready,
  output logic [ADDR_W-1:0]    wreq_addr,
  output logic [BUS_W-1:0]     wreq_data,
  output logic [BUS_BYTES-1:0] wreq_strb,
  // A / B scratchpad writes
  output logic                 a_we,
  output logic                 b_we,
  output logic                 ab_bank,
  output logic [15:0]          ab_row,
  output logic [BUS_W-1:0]     ab_data,
  // C scratchpad: bias write and store read
  output logic                 c_we,
  output logic [15:0]          c_row,
  output logic [15:0]          c_seg,
  output logic [31:0]          c_data [WORDS_PER_BEAT],
  output logic                 cs_en,
  output logic                 cs_tr,
  output logic [15:0]          cs_row,
  output logic [15:0]          cs_seg,
  input  logic [31:0]          cs_data [WORDS_PER_BEAT],
  // progress
  output logic                 ld_done,
  output ld_mode_e             ld_done_mode,
  output logic                 ld_done_bank,
  output logic                 st_read_done,
  output logic                 st_done
);

  localparam int unsigned MW = 2 + 1 + 16 + 16 + 16 + 1;

  logic          meta_push, meta_space;
  logic [MW-1:0] meta;

  cute_load_reqgen u_reqgen (
    .clk, .rst_n,
    .uop_valid, .uop_ready, .uop,
    .rreq_valid, .rreq_ready, .rreq_addr,
    .meta_push, .meta, .meta_space,
    .wreq_valid, .wreq_ready, .wreq_addr, .wreq_data, .wreq_strb,
    .cs_en, .cs_tr, .cs_row, .cs_seg, .cs_data,
    .st_read_done, .st_done
  );

  cute_data_reorder #(.OUTS(OUTS)) u_reorder (
    .clk, .rst_n,
    .meta_push, .meta, .meta_space,
    .rresp_valid, .rresp_data,
    .a_we, .b_we, .ab_bank, .ab_row, .ab_data,
    .c_we, .c_row, .c_seg, .c_data,
    .ld_done, .ld_done_mode, .ld_done_bank
  );

endmodule

// cute_spad_c: accumulator scratchpad holding one resident output tile.
//
// Holds the MSCP x NSCP tile of 32-bit accumulators (int32 or fp32).  The
// result stays here across all K steps of the tile, so only the final
// values are written back to memory, as the paper describes.  It has four
// ports:
//   compute read / compute write: one MPE x NPE block (block row mb, block
//     column nb), used by the C Data Controller to feed the PE array and to
//     write its results back;
//   loader write: SEG consecutive words of one row (one memory beat of
//     bias), from the Memory Loader;
//   store read: SEG consecutive words of one row, or with st_tr set of one
//     column (C(seg*SEG + j, row)), so a transposed result can be written
//     row by row.
// The compute write and the loader write never address the tile at the
// same time (the task controller orders them); an assertion checks it.
// Timing: writes at the clock edge; reads registered, valid one cycle after
// their enable.  The port split is this design's choice.
module cute_spad_c #(
  parameter int unsigned MSCP = 64,
  parameter int unsigned NSCP = 64,
  parameter int unsigned MPE  = 4,
  parameter int unsigned NPE  = 4,
  parameter int unsigned SEG  = 16,
  localparam int unsigned MBW = $clog2(MSCP / MPE) > 0 ? $clog2(MSCP / MPE) : 1,
  localparam int unsigned NBW = $clog2(NSCP / NPE) > 0 ? $clog2(NSCP / NPE) : 1,
  localparam int unsigned RW  = $clog2((MSCP > NSCP) ? MSCP : NSCP),
  localparam int unsigned SGW = $clog2(((MSCP > NSCP) ? MSCP : NSCP) / SEG) > 0 ?
                                $clog2(((MSCP > NSCP) ? MSCP : NSCP) / SEG) : 1
) (
  input  logic            clk,
  // compute read
  input  logic            cr_en,
  input  logic [MBW-1:0]  cr_mb,
  input  logic [NBW-1:0]  cr_nb,
  output logic [31:0]     cr_data [MPE][NPE],
  // compute write
  input  logic            cw_en,
  input  logic [MBW-1:0]  cw_mb,
  input  logic [NBW-1:0]  cw_nb,
  input  logic [31:0]     cw_data [MPE][NPE],
  // loader write
  input  logic            lw_en,
  input  logic [RW-1:0]   lw_row,
  input  logic [SGW-1:0]  lw_seg,
  input  logic [31:0]     lw_data [SEG],
  // store read
  input  logic            sr_en,
  input  logic            sr_tr,
  input  logic [RW-1:0]   sr_row,
  input  logic [SGW-1:0]  sr_seg,
  output logic [31:0]     sr_data [SEG]
);

  logic [31:0] mem [MSCP][NSCP];

  always_ff @(posedge clk) begin
    if (cw_en)
      for (int unsigned i = 0; i < MPE; i++)
        for (int unsigned j = 0; j < NPE; j++)
          mem[int'(cw_mb) * MPE + i][int'(cw_nb) * NPE + j] <= cw_data[i][j];
    if (lw_en)
      for (int unsigned j = 0; j < SEG; j++)
        if (int'(lw_seg) * SEG + j < NSCP && int'(lw_row) < MSCP)
          mem[lw_row % MSCP][(int'(lw_seg) * SEG + j) % NSCP] <= lw_data[j];
  end

  always_ff @(posedge clk) begin
    if (cr_en)
      for (int unsigned i = 0; i < MPE; i++)
        for (int unsigned j = 0; j < NPE; j++)
          cr_data[i][j] <= mem[int'(cr_mb) * MPE + i][int'(cr_nb) * NPE + j];
    if (sr_en)
      for (int unsigned j = 0; j < SEG; j++)
        if (sr_tr) sr_data[j] <= mem[(int'(sr_seg) * SEG + j) % MSCP][sr_row % NSCP];
        else       sr_data[j] <= mem[sr_row % MSCP][(int'(sr_seg) * SEG + j) % NSCP];
  end

  // The compute path and the bias load never share the tile in one cycle.
  always_ff @(posedge clk) begin
    assert (!(cw_en && lw_en)) else $error("compute and loader write the C tile together");
  end

endmodule

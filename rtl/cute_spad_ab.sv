// cute_spad_ab: source-operand scratchpad for A or for B.
//
// Holds BANKS banks of ROWS rows, each row ROW_BYTES bytes of K (64 bytes in
// the paper's case study, i.e. Kscp).  Row r of a bank sits in sub-bank
// r % RD_ROWS, so one read returns the RD_ROWS consecutive rows of one row
// block (the Mpe rows of A, or the Npe rows of B, that feed the PE array in
// one cycle) while the Memory Loader writes one row per cycle.  With two
// banks, the Memory Loader fills one bank while the Data Controller reads
// the other: this is the multi-bank overlap of loading and computing that
// the paper describes; the bank count and the sub-bank split are this
// design's choices.
// Timing: writes take effect at the clock edge; read data is registered and
// valid the cycle after rd_en.
module cute_spad_ab #(
  parameter int unsigned ROWS      = 64,
  parameter int unsigned ROW_BYTES = 64,
  parameter int unsigned RD_ROWS   = 4,
  parameter int unsigned BANKS     = 2,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned BW  = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned BLK = ROWS / RD_ROWS,
  localparam int unsigned XW  = (BLK > 1) ? $clog2(BLK) : 1
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [BW-1:0]          wr_bank,
  input  logic [RW-1:0]          wr_row,
  input  logic [ROW_BYTES*8-1:0] wr_data,
  input  logic                   rd_en,
  input  logic [BW-1:0]          rd_bank,
  input  logic [XW-1:0]          rd_blk,
  output logic [ROW_BYTES*8-1:0] rd_data [RD_ROWS]
);

  // mem[bank][sub-bank][entry]
  logic [ROW_BYTES*8-1:0] mem [BANKS][RD_ROWS][BLK];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_row % RD_ROWS][wr_row / RD_ROWS] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int unsigned r = 0; r < RD_ROWS; r++) rd_data[r] <= mem[rd_bank][r][rd_blk];
  end

endmodule

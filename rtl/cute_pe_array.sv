// cute_pe_array: the MPE x NPE array of dot-product PEs.
//
// Row operand i (one KPE_BITS slice of a row of A) is broadcast to every PE
// of array row i, column operand j (a slice of a row of B, i.e. a column of
// the product) is broadcast to every PE of array column j, so one issue
// computes an MPE x NPE block of C: an outer product whose elements are
// KPE_BITS-wide inner products, as the paper describes.  Each PE also takes
// its own accumulator input c[i][j] (supplied by the C Data Controller) and
// returns d[i][j] = c[i][j] + a_i . b_j after the PE latency (six cycles).
// All PEs share one valid and one data type, so the array issues one block
// per cycle and never stalls.
module cute_pe_array
  import cute_pkg::*;
#(
  parameter int unsigned MPE      = 4,
  parameter int unsigned NPE      = 4,
  parameter int unsigned KPE_BITS = 512
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  dtype_e              in_dtype,
  input  logic [KPE_BITS-1:0] in_a [MPE],
  input  logic [KPE_BITS-1:0] in_b [NPE],
  input  logic [31:0]         in_c [MPE][NPE],
  output logic                out_valid,
  output logic [31:0]         out_d [MPE][NPE]
);

  logic pe_valid [MPE][NPE];

  for (genvar i = 0; i < MPE; i++) begin : g_row
    for (genvar j = 0; j < NPE; j++) begin : g_col
      cute_pe #(.KPE_BITS(KPE_BITS)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .in_valid  (in_valid),
        .in_dtype  (in_dtype),
        .in_a      (in_a[i]),   // broadcast along the row
        .in_b      (in_b[j]),   // broadcast along the column
        .in_c      (in_c[i][j]),
        .out_valid (pe_valid[i][j]),
        .out_d     (out_d[i][j])
      );
    end
  end

  // All PEs run in lockstep; PE (0,0) stands for the array.
  assign out_valid = pe_valid[0][0];

endmodule

// shi_pe_array: the processing-element grid of the Shi-diannao-style
// (output-stationary) sub-accelerator.
//
// OYP x OXP PEs, PE (i, j) owning output pixel (oy0 + i, ox0 + j) of the
// current output block. Each PE holds one 8-bit input value win[i][j] and one
// 32-bit sum acc[i][j]; a single weight is broadcast to all PEs and each PE
// accumulates win * w in place (temporal accumulation, output stationary).
//
// Inputs arrive in two ways:
//   * ld:    up to LANES PEs per cycle are loaded directly (row, col, data);
//   * shift: together with a mac, every PE takes its right neighbour's value
//            and the rightmost column takes newcol[i]. This is the neighbour
//            forwarding that gives Shi-diannao its convolutional reuse: for
//            stride 1, stepping the filter column s -> s+1 only needs one new
//            input column instead of a whole block.
// mac with clr starts a new output (the sum is replaced, not added to).
//
// Timing: all operations take effect at the clock edge; a mac in cycle t uses
// the values loaded up to cycle t-1 (shifted first if shift is set), acc is
// valid in cycle t+1. Forwarding only leftwards, and the 28 x 32 shape of the
// paper's 896 PEs, are this design's choices.
module shi_pe_array
  import hda_pkg::*;
#(
  parameter int unsigned OYP   = 28,
  parameter int unsigned OXP   = 32,
  parameter int unsigned LANES = 12
) (
  input  logic                     clk,
  input  logic                     ld_en   [LANES],
  input  logic [$clog2(OYP)-1:0]   ld_row  [LANES],
  input  logic [$clog2(OXP)-1:0]   ld_col  [LANES],
  input  logic [DW-1:0]            ld_data [LANES],
  input  logic                     shift,
  input  logic [DW-1:0]            newcol  [OYP],
  input  logic                     mac,
  input  logic                     clr,
  input  logic [DW-1:0]            w,
  output logic signed [ACC_W-1:0]  acc     [OYP][OXP]
);

  logic [DW-1:0] win [OYP][OXP];
  logic [DW-1:0] opnd [OYP][OXP];   // PE operand after an optional shift

  always_comb begin
    for (int i = 0; i < OYP; i++)
      for (int j = 0; j < OXP; j++)
        if (!shift)             opnd[i][j] = win[i][j];
        else if (j == OXP - 1)  opnd[i][j] = newcol[i];
        else                    opnd[i][j] = win[i][j+1];
  end

  always_ff @(posedge clk) begin
    if (shift) win <= opnd;
    for (int l = 0; l < LANES; l++)
      if (ld_en[l]) win[ld_row[l]][ld_col[l]] <= ld_data[l];
    if (mac)
      for (int i = 0; i < OYP; i++)
        for (int j = 0; j < OXP; j++)
          acc[i][j] <= (clr ? '0 : acc[i][j]) +
                       ACC_W'($signed(opnd[i][j]) * $signed(w));
  end

endmodule

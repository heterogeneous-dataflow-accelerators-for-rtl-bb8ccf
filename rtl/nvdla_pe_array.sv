// nvdla_pe_array: the processing-element grid of the NVDLA-style
// (weight-stationary) sub-accelerator.
//
// KP x CP PEs: row k handles one output channel, column c one input channel,
// and each PE holds one stationary weight. An input vector act[CP] (one
// activation per input channel, same pixel) is broadcast down the columns;
// every PE multiplies, and each row's CP products are added by a
// combinational adder tree into psum[k]. This is the dataflow's spatial
// accumulation of partial sums across input channels; parallelism is over
// input and output channels, as the paper describes for the NVDLA style.
//
// Weights are double-buffered: up to LANES weights per cycle are written into
// a shadow bank (w_wr, index = k*CP + c) while the active bank computes, and
// w_swap copies the shadow bank into the active bank in one cycle. A swap and
// a compute in the same cycle use the old weights.
//
// Timing: act/in_valid in cycle t -> psum/out_valid registered, cycle t+1.
// The 16 x 8 arrangement of the paper's 128 PEs, the 8-bit operands and the
// 32-bit sums are this design's choices.
module nvdla_pe_array
  import hda_pkg::*;
#(
  parameter int unsigned KP    = 16,
  parameter int unsigned CP    = 8,
  parameter int unsigned LANES = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // shadow-bank weight writes
  input  logic                           w_wr_en  [LANES],
  input  logic [$clog2(KP*CP)-1:0]       w_wr_idx [LANES],
  input  logic [DW-1:0]                  w_wr_data[LANES],
  input  logic                           w_swap,
  // compute
  input  logic                           in_valid,
  input  logic [DW-1:0]                  act      [CP],
  output logic                           out_valid,
  output logic signed [ACC_W-1:0]        psum     [KP]
);

  logic [DW-1:0] w_shadow [KP*CP];
  logic [DW-1:0] w_active [KP*CP];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      if (w_wr_en[l]) w_shadow[w_wr_idx[l]] <= w_wr_data[l];
    if (w_swap) w_active <= w_shadow;
  end

  // One multiplier per PE, one adder tree per output-channel row.
  logic signed [ACC_W-1:0] row_sum [KP];
  always_comb begin
    for (int k = 0; k < KP; k++) begin
      row_sum[k] = '0;
      for (int c = 0; c < CP; c++)
        row_sum[k] += ACC_W'($signed(w_active[k*CP+c]) * $signed(act[c]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) psum <= row_sum;
  end

endmodule

// tb_nvdla_pe_array: self-checking test of the NVDLA-style PE grid.
// Loads random weights into the shadow bank through the lanes, swaps, then
// drives random activation vectors and checks each row's sum against a
// reference dot product one cycle later. Also checks that a shadow-bank load
// without a swap leaves the active weights (double buffering) unchanged.
module tb_nvdla_pe_array;
  import hda_pkg::*;
  localparam int KP = 16, CP = 8, L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_wr_en [L]; logic [$clog2(KP*CP)-1:0] w_wr_idx [L]; logic [DW-1:0] w_wr_data [L];
  logic w_swap = 1'b0, in_valid = 1'b0, out_valid;
  logic [DW-1:0] act [CP];
  logic signed [ACC_W-1:0] psum [KP];
  logic [7:0] wref [KP*CP];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  nvdla_pe_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_weights(bit swap);
    for (int n = 0; n < KP*CP; n += L) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        w_wr_en[l] = 1'b1; w_wr_idx[l] = 7'(n + l); w_wr_data[l] = 8'($urandom);
        if (swap) wref[n + l] = w_wr_data[l];
      end
    end
    @(negedge clk);
    for (int l = 0; l < L; l++) w_wr_en[l] = 1'b0;
    w_swap = swap;
    @(negedge clk); w_swap = 1'b0;
  endtask

  task automatic check_vectors(int nvec);
    int exp;
    for (int v = 0; v < nvec; v++) begin
      @(negedge clk);
      for (int c = 0; c < CP; c++) act[c] = 8'($urandom);
      in_valid = 1'b1;
      @(negedge clk); in_valid = 1'b0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int k = 0; k < KP; k++) begin
        exp = 0;
        for (int c = 0; c < CP; c++) exp += int'($signed(wref[k*CP+c])) * int'($signed(act[c]));
        checks++;
        if (psum[k] !== exp) begin failures++; $display("row %0d: %0d vs %0d", k, psum[k], exp); end
      end
    end
  endtask

  initial begin
    for (int l = 0; l < L; l++) begin w_wr_en[l] = 1'b0; w_wr_idx[l] = '0; w_wr_data[l] = '0; end
    for (int c = 0; c < CP; c++) act[c] = '0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    load_weights(1'b1); check_vectors(20);
    load_weights(1'b0); check_vectors(10);   // shadow only: old weights still active
    load_weights(1'b1); check_vectors(20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

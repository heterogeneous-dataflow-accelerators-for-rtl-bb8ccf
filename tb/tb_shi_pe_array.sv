// tb_shi_pe_array: self-checking test of the Shi-diannao-style PE grid.
// Loads every PE input through the lanes, runs a clearing MAC, several
// shift-and-MAC steps with new columns and plain MACs, and compares every
// PE's sum with a software model of the same window operations.
module tb_shi_pe_array;
  import hda_pkg::*;
  localparam int OYP = 28, OXP = 32, L = 12;
  logic clk = 1'b0;
  logic ld_en [L]; logic [$clog2(OYP)-1:0] ld_row [L]; logic [$clog2(OXP)-1:0] ld_col [L];
  logic [DW-1:0] ld_data [L];
  logic shift = 1'b0, mac = 1'b0, clr = 1'b0;
  logic [DW-1:0] newcol [OYP];
  logic [DW-1:0] w = '0;
  logic signed [ACC_W-1:0] acc [OYP][OXP];
  int win_m [OYP][OXP];
  int acc_m [OYP][OXP];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shi_pe_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic do_mac(bit sh, bit c);
    int nw [OYP][OXP];
    @(negedge clk);
    w = 8'($urandom); shift = sh; clr = c; mac = 1'b1;
    for (int i = 0; i < OYP; i++) newcol[i] = 8'($urandom);
    for (int i = 0; i < OYP; i++)
      for (int j = 0; j < OXP; j++) begin
        nw[i][j] = !sh ? win_m[i][j] : (j == OXP-1) ? int'($signed(newcol[i])) : win_m[i][j+1];
        acc_m[i][j] = (c ? 0 : acc_m[i][j]) + nw[i][j] * int'($signed(w));
      end
    win_m = nw;
    @(negedge clk); mac = 1'b0; shift = 1'b0; clr = 1'b0;
    for (int i = 0; i < OYP; i++)
      for (int j = 0; j < OXP; j++) begin
        checks++;
        if (acc[i][j] !== acc_m[i][j]) begin
          failures++;
          if (failures < 5) $display("PE %0d,%0d: %0d vs %0d", i, j, acc[i][j], acc_m[i][j]);
        end
      end
  endtask

  initial begin
    for (int l = 0; l < L; l++) begin ld_en[l] = 1'b0; ld_row[l] = '0; ld_col[l] = '0; ld_data[l] = '0; end
    for (int i = 0; i < OYP; i++) newcol[i] = '0;
    for (int rep = 0; rep < 2; rep++) begin
      for (int n = 0; n < OYP*OXP; n += L) begin
        @(negedge clk);
        for (int l = 0; l < L; l++) begin
          ld_en[l] = (n + l < OYP*OXP);
          ld_row[l] = 5'((n + l) / OXP); ld_col[l] = 5'((n + l) % OXP);
          ld_data[l] = 8'($urandom);
          if (ld_en[l]) win_m[(n + l) / OXP][(n + l) % OXP] = int'($signed(ld_data[l]));
        end
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) ld_en[l] = 1'b0;
      do_mac(1'b0, 1'b1);
      do_mac(1'b1, 1'b0);
      do_mac(1'b1, 1'b0);
      do_mac(1'b0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_global_buffer: self-checking test of the lane-partitioned global buffer.
// Every lane writes random bytes to distinct random addresses in the same
// cycles; afterwards every lane reads back addresses written by other lanes
// and the data must arrive exactly one cycle after the request.
module tb_global_buffer;
  import hda_pkg::*;
  localparam int NL = 32, GBB = 1 << 16;
  logic clk = 1'b0;
  gb_req_t req [NL];
  logic [DW-1:0] rdata [NL];
  logic [7:0] model [GBB];
  logic       written [GBB];
  int addrs [NL*8];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  global_buffer #(.GB_BYTES(GBB), .NLANES(NL)) dut (.clk, .req, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < GBB; a++) written[a] = 1'b0;
    for (int l = 0; l < NL; l++) req[l] = '0;
    // distinct addresses: a random base per slot spaced by the slot number
    for (int n = 0; n < NL*8; n++) addrs[n] = n * 251 + 7;
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        req[l].en = 1'b1; req[l].we = 1'b1;
        req[l].addr = gb_addr_t'(addrs[b*NL + l]);
        req[l].wdata = 8'($urandom);
        model[addrs[b*NL + l]] = req[l].wdata;
      end
    end
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        req[l].en = 1'b1; req[l].we = 1'b0;
        req[l].addr = gb_addr_t'(addrs[((b + 3) % 8)*NL + (NL - 1 - l)]);
      end
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        req[l].en = 1'b0;
        checks++;
        if (rdata[l] !== model[addrs[((b + 3) % 8)*NL + (NL - 1 - l)]]) begin
          failures++; $display("lane %0d read %h", l, rdata[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

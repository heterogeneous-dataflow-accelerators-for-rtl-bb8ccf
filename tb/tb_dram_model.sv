// tb_dram_model: behavioural model of the external DRAM for the testbenches.
// It accepts a read request when ready (ready drops at random to exercise
// back-pressure) and returns the 16-byte beat LAT cycles later, in order;
// writes are accepted when ready, honouring the byte strobe. poke/peek give
// the testbench direct access. Not part of the design.
module tb_dram_model
  import hda_pkg::*;
#(
  parameter int unsigned BEAT  = 16,
  parameter int unsigned MEMB  = 1 << 20,
  parameter int unsigned LAT   = 6
) (
  input  logic               clk,
  input  logic               rd_valid,
  output logic               rd_ready,
  input  logic [DRAM_AW-1:0] rd_addr,
  output logic               rsp_valid,
  output logic [DW-1:0]      rsp_data [BEAT],
  input  logic               wr_valid,
  output logic               wr_ready,
  input  logic [DRAM_AW-1:0] wr_addr,
  input  logic [DW-1:0]      wr_data [BEAT],
  input  logic [BEAT-1:0]    wr_strb
);
  logic [7:0] mem [MEMB];
  int unsigned pend_addr [$];
  int          pend_due  [$];
  int          now = 0;
  int unsigned n_stall = 0;

  initial begin rd_ready = 1'b1; wr_ready = 1'b1; rsp_valid = 1'b0; end

  always @(posedge clk) begin
    now++;
    if (rd_valid && rd_ready) begin
      pend_addr.push_back(rd_addr);
      pend_due.push_back(now + LAT);
    end
    if (wr_valid && wr_ready)
      for (int b = 0; b < BEAT; b++)
        if (wr_strb[b]) mem[(wr_addr + b) % MEMB] = wr_data[b];
    rsp_valid <= 1'b0;
    if (pend_due.size() > 0 && pend_due[0] <= now) begin
      rsp_valid <= 1'b1;
      for (int b = 0; b < BEAT; b++) rsp_data[b] <= mem[(pend_addr[0] + b) % MEMB];
      void'(pend_addr.pop_front());
      void'(pend_due.pop_front());
    end
    rd_ready <= ($urandom_range(0, 7) != 0);
    wr_ready <= ($urandom_range(0, 3) != 0);
    if (rd_valid && !rd_ready) n_stall++;
  end

  task automatic poke(int unsigned a, logic [7:0] v);
    mem[a] = v;
  endtask

  function automatic logic [7:0] peek(int unsigned a);
    return mem[a];
  endfunction
endmodule

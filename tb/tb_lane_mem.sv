// tb_lane_mem: behavioural byte memory answering global-buffer lane requests
// for the sub-accelerator testbenches (read data one cycle after the
// request, writes at the clock edge). poke/peek give the testbench direct
// access to the contents.
module tb_lane_mem
  import hda_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned MEMB  = 1 << 20
) (
  input  logic          clk,
  input  gb_req_t       req   [LANES],
  output logic [DW-1:0] rdata [LANES]
);
  logic [7:0] mem [MEMB];
  int unsigned n_reads = 0, n_writes = 0;

  always @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (req[l].en && !req[l].we) begin
        rdata[l] <= mem[req[l].addr % MEMB];
        n_reads++;
      end
      if (req[l].en && req[l].we) begin
        mem[req[l].addr % MEMB] = req[l].wdata;
        n_writes++;
      end
    end
  end

  task automatic poke(int unsigned a, logic [7:0] v);
    mem[a] = v;
  endtask

  function automatic logic [7:0] peek(int unsigned a);
    return mem[a];
  endfunction
endmodule

// global_buffer: the global scratchpad shared by the sub-accelerators and the
// DRAM engine, together with the lane-partitioned global NoC in front of it.
//
// The global NoC is hard-partitioned: every client owns a fixed set of byte
// lanes (in the main configuration 4 lanes for the NVDLA-style
// sub-accelerator, 12 for the Shi-diannao-style one, i.e. 4 and 12 GB/s at
// 1 GHz, plus 16 for the DRAM engine). Because no lane is shared, there is no
// arbiter: each lane is a read/write port of the memory. Each lane carries
// {en, we, addr, wdata}; a read returns its byte on rdata one cycle later, a
// write takes effect at the clock edge. The lane count per client and the
// capacity follow the paper's Table 4/5 numbers; the one-byte lane, the
// one-cycle latency and the flat (unbanked) organisation are this design's
// own choices. Writes of two lanes to the same byte in one cycle are illegal
// (asserted); the higher-numbered lane would win.
module global_buffer
  import hda_pkg::*;
#(
  parameter int unsigned GB_BYTES = 4194304,
  parameter int unsigned NLANES   = 32
) (
  input  logic          clk,
  input  gb_req_t       req   [NLANES],
  output logic [DW-1:0] rdata [NLANES]
);

  localparam int unsigned AW = $clog2(GB_BYTES);

  logic [DW-1:0] mem [GB_BYTES];

  always_ff @(posedge clk) begin
    for (int l = 0; l < NLANES; l++) begin
      if (req[l].en && req[l].we)  mem[req[l].addr[AW-1:0]] <= req[l].wdata;
      if (req[l].en && !req[l].we) rdata[l] <= mem[req[l].addr[AW-1:0]];
    end
  end

  // Every request must fall inside the buffer, and no two lanes may write
  // the same byte in the same cycle.
  always_ff @(posedge clk) begin
    for (int a = 0; a < NLANES; a++) begin
      if (req[a].en) assert (32'(req[a].addr) < GB_BYTES)
        else $error("global_buffer: lane %0d address %0h out of range", a, req[a].addr);
      for (int b = a + 1; b < NLANES; b++)
        assert (!(req[a].en && req[a].we && req[b].en && req[b].we &&
                  req[a].addr == req[b].addr))
          else $error("global_buffer: lanes %0d and %0d write %0h together", a, b, req[a].addr);
    end
  end

endmodule

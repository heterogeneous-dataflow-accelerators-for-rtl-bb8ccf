// tb_dram_dma: self-checking test of the DRAM engine.
// Loads blocks of several lengths (including ones that end mid-beat) from a
// behavioural DRAM with random back-pressure into a lane memory, checks every
// byte and that the bytes just past the block were not written; then stores
// a block back to another DRAM region and checks it likewise. A zero-length
// command must complete at once.
module tb_dram_dma;
  import hda_pkg::*;
  localparam int B = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  dma_desc_t desc;
  logic dram_rd_valid, dram_rd_ready, dram_rsp_valid, dram_wr_valid, dram_wr_ready;
  logic [DRAM_AW-1:0] dram_rd_addr, dram_wr_addr;
  logic [DW-1:0] dram_rsp_data [B], dram_wr_data [B];
  logic [B-1:0] dram_wr_strb;
  gb_req_t gb_req [B];
  logic [DW-1:0] gb_rdata [B];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dram_dma dut (.*);
  tb_lane_mem #(.LANES(B)) u_gb (.clk, .req(gb_req), .rdata(gb_rdata));
  tb_dram_model u_dram (.clk, .rd_valid(dram_rd_valid), .rd_ready(dram_rd_ready),
    .rd_addr(dram_rd_addr), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .wr_valid(dram_wr_valid), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data), .wr_strb(dram_wr_strb));

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic xfer(dma_dir_e dir, int dram_a, int gb_a, int len);
    int t = 0;
    @(negedge clk);
    desc.dir = dir; desc.dram_addr = DRAM_AW'(dram_a); desc.gb_addr = gb_addr_t'(gb_a);
    desc.len = (GB_AW+1)'(len); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done && t < 100000) begin @(posedge clk); t++; end
    @(negedge clk);
  endtask

  initial begin
    desc = '0;
    repeat (3) @(posedge clk); rst_n = 1'b1;
    for (int i = 0; i < 4096; i++) u_dram.poke(i, 8'($urandom));
    begin
      int lens [4] = '{16, 37, 200, 1000};
      int gbs  [4] = '{'h100, 'h1000, 'h2003, 'h3000};
      for (int t = 0; t < 4; t++) begin
        u_gb.poke(gbs[t] + lens[t], 8'ha5);
        xfer(DMA_LOAD, 64 * t + 5, gbs[t], lens[t]);
        for (int i = 0; i < lens[t]; i++) begin
          checks++;
          if (u_gb.peek(gbs[t] + i) !== u_dram.peek(64 * t + 5 + i)) begin
            failures++; if (failures < 5) $display("load %0d byte %0d", t, i);
          end
        end
        checks++;
        if (u_gb.peek(gbs[t] + lens[t]) !== 8'ha5) begin failures++; $display("load overrun"); end
      end
    end
    // store 1000 bytes from buffer 0x3000 to DRAM 0x8000
    u_dram.poke('h8000 + 1000, 8'h3c);
    xfer(DMA_STORE, 'h8000, 'h3000, 1000);
    for (int i = 0; i < 1000; i++) begin
      checks++;
      if (u_dram.peek('h8000 + i) !== u_gb.peek('h3000 + i)) begin
        failures++; if (failures < 5) $display("store byte %0d", i);
      end
    end
    checks++;
    if (u_dram.peek('h8000 + 1000) !== 8'h3c) begin failures++; $display("store overrun"); end
    xfer(DMA_LOAD, 0, 0, 0);
    checks++;
    if (busy) begin failures++; $display("zero-length transfer hung"); end
    $display("DRAM read stalls seen: %0d", u_dram.n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_maelstrom_top: end-to-end test of Maelstrom at its full default size
// (no parameter overrides: 16x8 + 28x32 PEs, 4 + 12 + 16 lanes, 4 MiB buffer).
//
// Two small networks share the chip, as in a multi-DNN workload:
//   model A: A1 CONV 3x3 pad 1 (3 -> 8 channels, 40x36)   on the Shi-diannao unit
//            A2 depth-wise 3x3 stride 2 pad 1 on A1's output on the Shi unit
//            A3 point-wise 8 -> 16 on A2's output          on the NVDLA unit
//   model B: B1 point-wise 32 -> 16 on 6x6                  on the NVDLA unit
//            B2 fully connected 576 -> 20 on B1's output    on the NVDLA unit
// Inputs and weights start in a behavioural DRAM (random back-pressure);
// the DRAM engine loads them (later weights while earlier layers compute),
// and stores the three final outputs back. The testbench checks every final
// and intermediate output byte against a direct convolution, guard bytes
// after every output, each layer's cycle count against its lane budget, and
// that every mechanism below actually happened (a failure if not):
//   layer overlap on both units, dependence stalls, DRAM loads and stores,
//   loads overlapping computation (prefetch), depth-wise, stride 2,
//   Shi convolutional-reuse shifts, multi-block / multi-tile layers,
//   cross-unit dependence (A2 on Shi feeding A3 on NVDLA).
module tb_maelstrom_top;
  import hda_pkg::*;
  import tb_hda_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, cmd_wr_en = 1'b0, go = 1'b0, all_done;
  unit_e cmd_wr_unit;
  cmd_t  cmd_wr;
  logic dram_rd_valid, dram_rd_ready, dram_rsp_valid, dram_wr_valid, dram_wr_ready;
  logic [DRAM_AW-1:0] dram_rd_addr, dram_wr_addr;
  logic [DW-1:0] dram_rsp_data [16], dram_wr_data [16];
  logic [15:0] dram_wr_strb;
  logic [31:0] stat_busy [NUNITS], stat_dep_wait [NUNITS], stat_cmds [NUNITS];
  logic [31:0] stat_overlap;
  int checks = 0, failures = 0;
  int cycle = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  maelstrom_top dut (.*);

  tb_dram_model u_dram (.clk, .rd_valid(dram_rd_valid), .rd_ready(dram_rd_ready),
    .rd_addr(dram_rd_addr), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .wr_valid(dram_wr_valid), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data), .wr_strb(dram_wr_strb));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------------------
  // Mechanism monitors
  // ---------------------------------------------------------------------
  int n_prefetch = 0, n_shift = 0, n_loads = 0, n_stores = 0;
  int n_shi_blocks = 0;
  always @(posedge clk) if (rst_n) begin
    if (dram_rsp_valid && (dut.unit_busy[UNIT_NV] || dut.unit_busy[UNIT_SHI])) n_prefetch++;
    if (dut.u_shi.state == dut.u_shi.S_MAC && dut.u_shi.shift_mode) n_shift++;
    if (dut.unit_start[UNIT_DMA])
      if (dut.unit_cmd[UNIT_DMA].dma.dir == DMA_LOAD) n_loads++; else n_stores++;
    if (dut.u_shi.state == dut.u_shi.S_WRITE && dut.u_shi.n == 0) n_shi_blocks++;
  end

  // Per-layer cycle count: busy cycles of each command on each unit.
  int busy_cnt [NUNITS];
  int busy_log [NUNITS][$];
  always @(posedge clk) if (rst_n) begin
    for (int u = 1; u < NUNITS; u++) begin
      if (dut.unit_start[u]) busy_cnt[u] = 0;
      if (dut.unit_busy[u]) busy_cnt[u]++;
      if (dut.unit_done[u]) begin busy_log[u].push_back(busy_cnt[u]); busy_cnt[u] = 0; end
    end
  end

  // ---------------------------------------------------------------------
  // Workload
  // ---------------------------------------------------------------------
  // global-buffer and DRAM placement
  localparam int GA1I = 'h10000, GA1W = 'h12000, GA2W = 'h12400, GB1I = 'h13000;
  localparam int GB1W = 'h14000, GB2W = 'h15000, GA3W = 'h18000;
  localparam int GA1O = 'h20000, GA2O = 'h24000, GB1O = 'h26000, GA3O = 'h28000, GB2O = 'h2a000;
  localparam int DA1I = 'h0000,  DA1W = 'h2000,  DA2W = 'h2400,  DB1I = 'h3000;
  localparam int DB1W = 'h4000,  DB2W = 'h5000,  DA3W = 'h8000;
  localparam int DA2O = 'h10000, DA3O = 'h12000, DB2O = 'h14000;

  layer_desc_t a1, a2, a3, b1, b2;

  task automatic push(unit_e u, int id, int d0, int d1, layer_desc_t l, dma_desc_t m);
    cmd_t c;
    c = '0;
    c.id = ID_W'(id);
    c.dep0_v = (d0 >= 0); c.dep0 = ID_W'((d0 >= 0) ? d0 : 0);
    c.dep1_v = (d1 >= 0); c.dep1 = ID_W'((d1 >= 0) ? d1 : 0);
    c.layer = l; c.dma = m;
    @(negedge clk);
    cmd_wr_en = 1'b1; cmd_wr_unit = u; cmd_wr = c;
    @(negedge clk);
    cmd_wr_en = 1'b0;
  endtask

  function automatic dma_desc_t mk_dma(dma_dir_e dir, int dram_a, int gb_a, int len);
    dma_desc_t m;
    m = '0;
    m.dir = dir; m.dram_addr = DRAM_AW'(dram_a); m.gb_addr = gb_addr_t'(gb_a);
    m.len = (GB_AW+1)'(len);
    return m;
  endfunction

  // Random int8 data into DRAM and the reference image at the buffer address.
  task automatic fill(int dram_a, int gb_a, int len, int lo, int hi);
    logic [7:0] v;
    for (int i = 0; i < len; i++) begin
      v = 8'($urandom_range(0, hi - lo)) + 8'(lo);
      u_dram.poke(dram_a + i, v);
      refmem[gb_a + i] = v;
    end
  endtask

  // Reference outputs of a layer into refmem (so a following layer can use them).
  task automatic ref_layer(layer_desc_t d);
    logic [7:0] o [$];
    for (int k = 0; k < int'(d.k); k++)
      for (int y = 0; y < int'(d.oy); y++)
        for (int x = 0; x < int'(d.ox); x++)
          o.push_back(ref_out(d, k, y, x));
    for (int i = 0; i < o.size(); i++) refmem[int'(d.out_base) + i] = o[i];
  endtask

  task automatic check_gb(string name, layer_desc_t d);
    int bad = 0;
    for (int i = 0; i < out_bytes(d); i++) begin
      checks++;
      if (dut.u_gb.mem[int'(d.out_base) + i] !== refmem[int'(d.out_base) + i]) begin
        failures++; bad++;
        if (bad < 4) $display("%s: buffer byte %0d got %0d exp %0d", name, i,
          $signed(dut.u_gb.mem[int'(d.out_base) + i]), $signed(refmem[int'(d.out_base) + i]));
      end
    end
    checks++;
    if (dut.u_gb.mem[int'(d.out_base) + out_bytes(d)] !== 8'h5a) begin
      failures++; $display("%s: buffer guard byte overwritten", name);
    end
    $display("%s: %0d output bytes in the buffer, %0d bad", name, out_bytes(d), bad);
  endtask

  task automatic check_dram(string name, layer_desc_t d, int dram_a);
    int bad = 0;
    for (int i = 0; i < out_bytes(d); i++) begin
      checks++;
      if (u_dram.peek(dram_a + i) !== refmem[int'(d.out_base) + i]) begin
        failures++; bad++;
        if (bad < 4) $display("%s: DRAM byte %0d got %0d exp %0d", name, i,
          $signed(u_dram.peek(dram_a + i)), $signed(refmem[int'(d.out_base) + i]));
      end
    end
    checks++;
    if (u_dram.peek(dram_a + out_bytes(d)) !== 8'hc3) begin
      failures++; $display("%s: DRAM guard byte overwritten", name);
    end
    $display("%s: %0d output bytes stored to DRAM, %0d bad", name, out_bytes(d), bad);
  endtask

  task automatic expect_true(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("mechanism not observed: %s", what); end
  endtask

  task automatic check_cycles(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++; $display("%s: %0d busy cycles, lane budget gives %0d", name, got, exp);
    end else $display("%s: %0d cycles (matches lane budget)", name, got);
  endtask

  initial begin
    layer_desc_t none;
    dma_desc_t   nod;
    int t_go, t_end;
    none = '0; nod = '0;
    cmd_wr = '0; cmd_wr_unit = UNIT_DMA;
    busy_cnt = '{0, 0, 0};

    a1 = mk_layer(OP_CONV,   8,   3, 40, 36, 3, 3, 1, 1, 4, GA1I, GA1W, GA1O);
    a2 = mk_layer(OP_DWCONV, 8,   8, 40, 36, 3, 3, 2, 1, 3, GA1O, GA2W, GA2O);
    a3 = mk_layer(OP_CONV,  16,   8, 20, 18, 1, 1, 1, 0, 3, GA2O, GA3W, GA3O);
    b1 = mk_layer(OP_CONV,  16,  32,  6,  6, 1, 1, 1, 0, 4, GB1I, GB1W, GB1O);
    b2 = mk_layer(OP_CONV,  20, 576,  1,  1, 1, 1, 1, 0, 6, GB1O, GB2W, GB2O);

    fill(DA1I, GA1I, in_bytes(a1), -20, 20);
    fill(DA1W, GA1W, w_bytes(a1),  -8,  7);
    fill(DA2W, GA2W, w_bytes(a2),  -8,  7);
    fill(DA3W, GA3W, w_bytes(a3),  -8,  7);
    fill(DB1I, GB1I, in_bytes(b1), -20, 20);
    fill(DB1W, GB1W, w_bytes(b1),  -8,  7);
    fill(DB2W, GB2W, w_bytes(b2),  -4,  4);
    ref_layer(a1); ref_layer(a2); ref_layer(a3); ref_layer(b1); ref_layer(b2);
    u_dram.poke(DA2O + out_bytes(a2), 8'hc3);
    u_dram.poke(DA3O + out_bytes(a3), 8'hc3);
    u_dram.poke(DB2O + out_bytes(b2), 8'hc3);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // guard bytes after every output region of the buffer
    @(negedge clk);
    dut.u_gb.mem[GA1O + out_bytes(a1)] = 8'h5a;
    dut.u_gb.mem[GA2O + out_bytes(a2)] = 8'h5a;
    dut.u_gb.mem[GA3O + out_bytes(a3)] = 8'h5a;
    dut.u_gb.mem[GB1O + out_bytes(b1)] = 8'h5a;
    dut.u_gb.mem[GB2O + out_bytes(b2)] = 8'h5a;

    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    // DRAM engine queue: inputs and weights (ids 1-7), then the stores.
    push(UNIT_DMA, 1, -1, -1, none, mk_dma(DMA_LOAD, DA1I, GA1I, in_bytes(a1)));
    push(UNIT_DMA, 2, -1, -1, none, mk_dma(DMA_LOAD, DA1W, GA1W, w_bytes(a1)));
    push(UNIT_DMA, 3, -1, -1, none, mk_dma(DMA_LOAD, DB1I, GB1I, in_bytes(b1)));
    push(UNIT_DMA, 4, -1, -1, none, mk_dma(DMA_LOAD, DB1W, GB1W, w_bytes(b1)));
    push(UNIT_DMA, 5, -1, -1, none, mk_dma(DMA_LOAD, DA2W, GA2W, w_bytes(a2)));
    push(UNIT_DMA, 6, -1, -1, none, mk_dma(DMA_LOAD, DB2W, GB2W, w_bytes(b2)));
    push(UNIT_DMA, 7, -1, -1, none, mk_dma(DMA_LOAD, DA3W, GA3W, w_bytes(a3)));
    push(UNIT_DMA, 20, 11, -1, none, mk_dma(DMA_STORE, DA2O, GA2O, out_bytes(a2)));
    push(UNIT_DMA, 22, 13, -1, none, mk_dma(DMA_STORE, DB2O, GB2O, out_bytes(b2)));
    push(UNIT_DMA, 21, 14, -1, none, mk_dma(DMA_STORE, DA3O, GA3O, out_bytes(a3)));
    // Shi-diannao queue: model A's shallow / depth-wise layers
    push(UNIT_SHI, 10, 1, 2, a1, nod);
    push(UNIT_SHI, 11, 10, 5, a2, nod);
    // NVDLA queue: model B, then A3 (waits for A2 on the other unit)
    push(UNIT_NV, 12, 3, 4, b1, nod);
    push(UNIT_NV, 13, 12, 6, b2, nod);
    push(UNIT_NV, 14, 11, 7, a3, nod);

    @(negedge clk); go = 1'b1; t_go = cycle; @(negedge clk); go = 1'b0;
    while (!all_done) @(posedge clk);
    t_end = cycle;
    repeat (2) @(negedge clk);
    $display("schedule finished in %0d cycles", t_end - t_go);

    check_gb("A1 conv3x3 (Shi)", a1);
    check_gb("A2 depth-wise s2 (Shi)", a2);
    check_gb("A3 point-wise (NVDLA)", a3);
    check_gb("B1 point-wise (NVDLA)", b1);
    check_gb("B2 fully-connected (NVDLA)", b2);
    check_dram("A2 stored", a2, DA2O);
    check_dram("A3 stored", a3, DA3O);
    check_dram("B2 stored", b2, DB2O);

    checks++;
    if (busy_log[UNIT_SHI].size() != 2 || busy_log[UNIT_NV].size() != 3) begin
      failures++; $display("wrong number of completed layers");
    end else begin
      check_cycles("A1 on Shi", busy_log[UNIT_SHI][0], shi_cycles(a1, 28, 32, 12) - 1);
      check_cycles("A2 on Shi", busy_log[UNIT_SHI][1], shi_cycles(a2, 28, 32, 12) - 1);
      check_cycles("B1 on NVDLA", busy_log[UNIT_NV][0], nv_cycles(b1, 16, 8, 4) - 1);
      check_cycles("B2 on NVDLA", busy_log[UNIT_NV][1], nv_cycles(b2, 16, 8, 4) - 1);
      check_cycles("A3 on NVDLA", busy_log[UNIT_NV][2], nv_cycles(a3, 16, 8, 4) - 1);
    end

    checks++;
    if (stat_cmds[UNIT_DMA] != 10 || stat_cmds[UNIT_NV] != 3 || stat_cmds[UNIT_SHI] != 2) begin
      failures++; $display("command counters %0d %0d %0d", stat_cmds[0], stat_cmds[1], stat_cmds[2]);
    end

    $display("mechanisms: overlap=%0d dep_wait(dma,nv,shi)=%0d,%0d,%0d loads=%0d stores=%0d",
             stat_overlap, stat_dep_wait[0], stat_dep_wait[1], stat_dep_wait[2], n_loads, n_stores);
    $display("            prefetch beats=%0d shi shifts=%0d shi blocks=%0d busy(dma,nv,shi)=%0d,%0d,%0d dram stalls=%0d",
             n_prefetch, n_shift, n_shi_blocks, stat_busy[0], stat_busy[1], stat_busy[2], u_dram.n_stall);
    expect_true("both sub-accelerators computing at once", stat_overlap > 0);
    expect_true("sub-accelerator waiting for a dependence",
                stat_dep_wait[UNIT_NV] > 0 && stat_dep_wait[UNIT_SHI] > 0);
    expect_true("DRAM engine waiting for a layer before a store", stat_dep_wait[UNIT_DMA] > 0);
    expect_true("DRAM loads", n_loads == 7);
    expect_true("DRAM stores", n_stores == 3);
    expect_true("loads overlapping computation (prefetch)", n_prefetch > 0);
    expect_true("Shi convolutional-reuse shifts", n_shift > 0);
    expect_true("Shi multi-block output plane", n_shi_blocks > 8 * 1);
    expect_true("DRAM back-pressure", u_dram.n_stall > 0);
    expect_true("layer parallelism shortens the schedule",
                t_end - t_go < stat_busy[UNIT_NV] + stat_busy[UNIT_SHI]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

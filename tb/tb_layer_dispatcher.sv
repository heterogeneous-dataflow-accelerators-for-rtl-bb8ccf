// tb_layer_dispatcher: self-checking test of the schedule dispatcher.
// Three behavioural units take a random number of cycles per command. The
// schedule has three "models" as dependence chains spread over the units,
// with DRAM transfers feeding layers. The testbench checks that every command
// starts exactly once, in queue order per unit, never before its
// dependences finished, that both compute units ran at the same time, that a
// dependence stall was seen, and that all_done rises only at the end.
module tb_layer_dispatcher;
  import hda_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, cmd_wr_en = 1'b0, go = 1'b0, all_done;
  unit_e cmd_wr_unit;
  cmd_t cmd_wr;
  logic unit_start [NUNITS];
  cmd_t unit_cmd [NUNITS];
  logic unit_done [NUNITS];
  logic dep_wait [NUNITS];
  int checks = 0, failures = 0;
  int fin_time [64], start_time [64];
  int expect_order [NUNITS][$];
  int remaining [NUNITS];
  int busy_id [NUNITS];
  int cyc = 0, overlap = 0, stalls = 0, ncmd = 0;
  always #5 clk = ~clk;

  layer_dispatcher #(.QDEPTH(16), .NIDS(64)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // behavioural units
  always @(posedge clk) begin
    cyc++;
    for (int u = 0; u < NUNITS; u++) begin
      unit_done[u] <= 1'b0;
      if (remaining[u] > 0) begin
        remaining[u]--;
        if (remaining[u] == 0) begin unit_done[u] <= 1'b1; fin_time[busy_id[u]] = cyc; end
      end
      if (unit_start[u]) begin
        int id;
        id = int'(unit_cmd[u].id);
        checks++;
        if (remaining[u] != 0 || start_time[id] != -1) begin failures++; $display("bad start %0d", id); end
        checks++;
        if (expect_order[u].size() == 0 || expect_order[u][0] != id) begin
          failures++; $display("unit %0d out of order: %0d", u, id);
        end else void'(expect_order[u].pop_front());
        checks++;
        if ((unit_cmd[u].dep0_v && (fin_time[unit_cmd[u].dep0] < 0 || fin_time[unit_cmd[u].dep0] >= cyc)) ||
            (unit_cmd[u].dep1_v && (fin_time[unit_cmd[u].dep1] < 0 || fin_time[unit_cmd[u].dep1] >= cyc))) begin
          failures++; $display("cmd %0d started before its dependences", id);
        end
        start_time[id] = cyc;
        busy_id[u] = id;
        remaining[u] = $urandom_range(3, 25);
      end
    end
    if (remaining[UNIT_NV] > 0 && remaining[UNIT_SHI] > 0) overlap++;
    for (int u = 0; u < NUNITS; u++) if (dep_wait[u]) stalls++;
    if (all_done && remaining[UNIT_DMA] + remaining[UNIT_NV] + remaining[UNIT_SHI] != 0) begin
      checks++; failures++; $display("all_done while a unit is busy");
    end
  end

  task automatic put(unit_e u, int id, int d0, int d1);
    @(negedge clk);
    cmd_wr = '0; cmd_wr.id = ID_W'(id);
    cmd_wr.dep0_v = (d0 >= 0); cmd_wr.dep0 = ID_W'(d0 < 0 ? 0 : d0);
    cmd_wr.dep1_v = (d1 >= 0); cmd_wr.dep1 = ID_W'(d1 < 0 ? 0 : d1);
    cmd_wr_unit = u; cmd_wr_en = 1'b1;
    expect_order[u].push_back(id);
    ncmd++;
    @(negedge clk); cmd_wr_en = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < 64; i++) begin fin_time[i] = -1; start_time[i] = -1; end
    for (int u = 0; u < NUNITS; u++) begin remaining[u] = 0; unit_done[u] = 1'b0; busy_id[u] = 0; end
    cmd_wr = '0; cmd_wr_unit = UNIT_DMA;
    repeat (3) @(posedge clk); rst_n = 1'b1;
    // DRAM transfers: weights/inputs of models A (0,1), B (2), C (3)
    put(UNIT_DMA, 0, -1, -1); put(UNIT_DMA, 1, -1, -1); put(UNIT_DMA, 2, -1, -1); put(UNIT_DMA, 3, -1, -1);
    // model A on NVDLA: 10 -> 11 -> 12 ; model B on Shi: 20 -> 21 ; model C mixes
    put(UNIT_NV, 10, 0, -1);   put(UNIT_SHI, 20, 2, -1);
    put(UNIT_NV, 11, 10, 1);   put(UNIT_SHI, 21, 20, -1);
    put(UNIT_SHI, 30, 3, -1);  put(UNIT_NV, 31, 30, 11);
    put(UNIT_NV, 12, 11, -1);  put(UNIT_SHI, 32, 31, 21);
    put(UNIT_DMA, 4, 12, 32);  // store results once both chains end
    go = 1'b1; @(negedge clk); go = 1'b0;
    while (!all_done) @(posedge clk);
    begin
      int ids [14] = '{0, 1, 2, 3, 4, 10, 11, 12, 20, 21, 30, 31, 32, 0};
      for (int i = 0; i < 13; i++) begin
        checks++;
        if (fin_time[ids[i]] < 0) begin failures++; $display("cmd %0d never finished", ids[i]); end
      end
    end
    for (int u = 0; u < NUNITS; u++) begin
      checks++;
      if (expect_order[u].size() != 0) begin failures++; $display("unit %0d left commands", u); end
    end
    checks++; if (overlap == 0) begin failures++; $display("no overlap of the two sub-accelerators"); end
    checks++; if (stalls == 0)  begin failures++; $display("no dependence stall seen"); end
    $display("overlap cycles %0d, dependence-stall cycles %0d", overlap, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

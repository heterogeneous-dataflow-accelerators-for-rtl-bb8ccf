// maelstrom_top: Maelstrom, a two-way heterogeneous dataflow accelerator
// (HDA) for multi-DNN workloads.
//
// Instead of one accelerator with one dataflow, or one that reconfigures its
// dataflow per layer, the chip holds two fixed-dataflow sub-accelerators and
// runs each layer on the one whose dataflow suits it, with layers of
// different networks running on both at once:
//   * nvdla_subacc - NVDLA style: parallel over output x input channels,
//                    weight stationary; good for deep-channel CONV and FC;
//   * shi_subacc   - Shi-diannao style: parallel over output rows x columns,
//                    output stationary; good for shallow-channel, large-
//                    activation and depth-wise layers.
// The PEs and the global NoC bandwidth are partitioned unevenly between them;
// the defaults are the edge-class partition found for the AR/VR-A workload
// (128 / 896 PEs, 4 / 12 GB/s, 4 MiB global buffer). Both sub-accelerators
// and the DRAM engine reach the shared global buffer through dedicated byte
// lanes (hard-partitioned NoC wires), and the layer dispatcher runs the
// offline schedule: per-unit command queues with dependences.
//
// Host interface: clear, then write commands (cmd_wr_en, cmd_wr_unit,
// cmd_wr), then go; all_done rises when the schedule has completed. DRAM is
// external (dram_* ports). Event counters: cycles each unit is busy, cycles
// both sub-accelerators compute at once (layer parallelism), cycles a free
// unit waits for a dependence, and commands completed per unit. Counters
// reset on clear.
module maelstrom_top
  import hda_pkg::*;
#(
  parameter int unsigned NV_KP     = 16,
  parameter int unsigned NV_CP     = 8,
  parameter int unsigned NV_LANES  = 4,
  parameter int unsigned NV_MAX_OX = 1024,
  parameter int unsigned SHI_OYP   = 28,
  parameter int unsigned SHI_OXP   = 32,
  parameter int unsigned SHI_LANES = 12,
  parameter int unsigned DMA_BEAT  = 16,
  parameter int unsigned GB_BYTES  = 4194304,
  parameter int unsigned QDEPTH    = 1024,
  parameter int unsigned NIDS      = 4096
) (
  input  logic               clk,
  input  logic               rst_n,
  // host
  input  logic               clear,
  input  logic               cmd_wr_en,
  input  unit_e              cmd_wr_unit,
  input  cmd_t               cmd_wr,
  input  logic               go,
  output logic               all_done,
  // DRAM
  output logic               dram_rd_valid,
  input  logic               dram_rd_ready,
  output logic [DRAM_AW-1:0] dram_rd_addr,
  input  logic               dram_rsp_valid,
  input  logic [DW-1:0]      dram_rsp_data [DMA_BEAT],
  output logic               dram_wr_valid,
  input  logic               dram_wr_ready,
  output logic [DRAM_AW-1:0] dram_wr_addr,
  output logic [DW-1:0]      dram_wr_data [DMA_BEAT],
  output logic [DMA_BEAT-1:0] dram_wr_strb,
  // event counters
  output logic [31:0]        stat_busy     [NUNITS],
  output logic [31:0]        stat_dep_wait [NUNITS],
  output logic [31:0]        stat_cmds     [NUNITS],
  output logic [31:0]        stat_overlap
);

  localparam int unsigned NLANES = DMA_BEAT + NV_LANES + SHI_LANES;
  localparam int unsigned NV_L0  = DMA_BEAT;
  localparam int unsigned SHI_L0 = DMA_BEAT + NV_LANES;

  logic unit_start [NUNITS];
  cmd_t unit_cmd   [NUNITS];
  logic unit_done  [NUNITS];
  logic unit_busy  [NUNITS];
  logic dep_wait   [NUNITS];

  layer_dispatcher #(.QDEPTH(QDEPTH), .NIDS(NIDS)) u_disp (
    .clk, .rst_n, .clear, .cmd_wr_en, .cmd_wr_unit, .cmd_wr, .go, .all_done,
    .unit_start, .unit_cmd, .unit_done, .dep_wait
  );

  // Global NoC: lanes [0, DMA_BEAT) DRAM engine, then NVDLA, then Shi-diannao.
  gb_req_t       gb_req   [NLANES];
  logic [DW-1:0] gb_rdata [NLANES];
  gb_req_t       dma_req  [DMA_BEAT];
  logic [DW-1:0] dma_rd   [DMA_BEAT];
  gb_req_t       nv_req   [NV_LANES];
  logic [DW-1:0] nv_rd    [NV_LANES];
  gb_req_t       shi_req  [SHI_LANES];
  logic [DW-1:0] shi_rd   [SHI_LANES];

  always_comb begin
    for (int l = 0; l < DMA_BEAT; l++) begin
      gb_req[l] = dma_req[l];  dma_rd[l] = gb_rdata[l];
    end
    for (int l = 0; l < NV_LANES; l++) begin
      gb_req[NV_L0 + l] = nv_req[l];  nv_rd[l] = gb_rdata[NV_L0 + l];
    end
    for (int l = 0; l < SHI_LANES; l++) begin
      gb_req[SHI_L0 + l] = shi_req[l];  shi_rd[l] = gb_rdata[SHI_L0 + l];
    end
  end

  global_buffer #(.GB_BYTES(GB_BYTES), .NLANES(NLANES)) u_gb (
    .clk, .req(gb_req), .rdata(gb_rdata)
  );

  dram_dma #(.BEAT(DMA_BEAT)) u_dma (
    .clk, .rst_n,
    .start(unit_start[UNIT_DMA]), .desc(unit_cmd[UNIT_DMA].dma),
    .busy(unit_busy[UNIT_DMA]), .done(unit_done[UNIT_DMA]),
    .dram_rd_valid, .dram_rd_ready, .dram_rd_addr, .dram_rsp_valid, .dram_rsp_data,
    .dram_wr_valid, .dram_wr_ready, .dram_wr_addr, .dram_wr_data, .dram_wr_strb,
    .gb_req(dma_req), .gb_rdata(dma_rd)
  );

  nvdla_subacc #(.KP(NV_KP), .CP(NV_CP), .LANES(NV_LANES), .MAX_OX(NV_MAX_OX)) u_nv (
    .clk, .rst_n,
    .start(unit_start[UNIT_NV]), .desc(unit_cmd[UNIT_NV].layer),
    .busy(unit_busy[UNIT_NV]), .done(unit_done[UNIT_NV]),
    .gb_req(nv_req), .gb_rdata(nv_rd)
  );

  shi_subacc #(.OYP(SHI_OYP), .OXP(SHI_OXP), .LANES(SHI_LANES)) u_shi (
    .clk, .rst_n,
    .start(unit_start[UNIT_SHI]), .desc(unit_cmd[UNIT_SHI].layer),
    .busy(unit_busy[UNIT_SHI]), .done(unit_done[UNIT_SHI]),
    .gb_req(shi_req), .gb_rdata(shi_rd)
  );

  // Event counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_overlap <= '0;
      for (int u = 0; u < NUNITS; u++) begin
        stat_busy[u] <= '0; stat_dep_wait[u] <= '0; stat_cmds[u] <= '0;
      end
    end else if (clear) begin
      stat_overlap <= '0;
      for (int u = 0; u < NUNITS; u++) begin
        stat_busy[u] <= '0; stat_dep_wait[u] <= '0; stat_cmds[u] <= '0;
      end
    end else begin
      if (unit_busy[UNIT_NV] && unit_busy[UNIT_SHI]) stat_overlap <= stat_overlap + 1;
      for (int u = 0; u < NUNITS; u++) begin
        if (unit_busy[u])  stat_busy[u]     <= stat_busy[u] + 1;
        if (dep_wait[u])   stat_dep_wait[u] <= stat_dep_wait[u] + 1;
        if (unit_done[u])  stat_cmds[u]     <= stat_cmds[u] + 1;
      end
    end
  end

endmodule

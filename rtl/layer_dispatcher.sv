// layer_dispatcher: executes a layer execution schedule on the units of
// Maelstrom (unit 0 = DRAM engine, 1 = NVDLA-style, 2 = Shi-diannao-style
// sub-accelerator).
//
// The schedule is computed offline: which sub-accelerator runs each layer,
// in which order, and which DRAM transfers feed it. The host writes it as one
// in-order command queue per unit (cmd_wr_*). Every command has an id and up
// to two ids it depends on (the layer producing its input, the transfer
// bringing its weights, ...). After go, each unit independently starts its
// next command as soon as the unit is free and the command's dependences are
// complete, so layers of different models run on both sub-accelerators at the
// same time and transfers overlap computation; a layer starts as soon as its
// inputs are available. Completion of each id is recorded on a scoreboard of
// NIDS bits. all_done rises when every queue is empty and every unit idle.
// clear empties the queues and the scoreboard.
//
// Interface: unit_start[u] is a one-cycle pulse with unit_cmd[u] valid from
// that cycle until the next start; the unit answers with a one-cycle
// unit_done[u]. dep_wait[u] is high in every cycle unit u is free and has a
// command that waits only for its dependences (a dependence stall).
// Timing: a command can start the cycle after its last dependence's done
// pulse; back-to-back commands on one unit are two cycles apart.
// Following the paper: layer-granularity execution, per-sub-accelerator order
// from an offline schedule, start-when-inputs-ready. This design's own
// choices: queues, two-dependence commands, the scoreboard and all sizes.
module layer_dispatcher
  import hda_pkg::*;
#(
  parameter int unsigned QDEPTH = 1024,
  parameter int unsigned NIDS   = 4096
) (
  input  logic         clk,
  input  logic         rst_n,
  // host
  input  logic         clear,
  input  logic         cmd_wr_en,
  input  unit_e        cmd_wr_unit,
  input  cmd_t         cmd_wr,
  input  logic         go,
  output logic         all_done,
  // units
  output logic         unit_start [NUNITS],
  output cmd_t         unit_cmd   [NUNITS],
  input  logic         unit_done  [NUNITS],
  output logic         dep_wait   [NUNITS]
);

  localparam int unsigned QAW = $clog2(QDEPTH);
  localparam int unsigned IW  = $clog2(NIDS);

  cmd_t               q    [NUNITS][QDEPTH];
  logic [QAW:0]       head [NUNITS];
  logic [QAW:0]       tail [NUNITS];
  logic               running [NUNITS];
  logic [NIDS-1:0]    done_bits;
  logic               active;

  // Head command of each queue and whether it may start.
  cmd_t hcmd   [NUNITS];
  logic avail  [NUNITS];
  logic ready  [NUNITS];
  always_comb begin
    for (int u = 0; u < NUNITS; u++) begin
      hcmd[u]  = q[u][head[u][QAW-1:0]];
      avail[u] = active && (head[u] != tail[u]) && !running[u] && !unit_start[u];
      ready[u] = (!hcmd[u].dep0_v || done_bits[hcmd[u].dep0[IW-1:0]]) &&
                 (!hcmd[u].dep1_v || done_bits[hcmd[u].dep1[IW-1:0]]);
      dep_wait[u] = avail[u] && !ready[u];
    end
  end

  always_ff @(posedge clk) begin
    if (cmd_wr_en) q[cmd_wr_unit][tail[cmd_wr_unit][QAW-1:0]] <= cmd_wr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      done_bits <= '0;
      for (int u = 0; u < NUNITS; u++) begin
        head[u] <= '0; tail[u] <= '0; running[u] <= 1'b0;
        unit_start[u] <= 1'b0; unit_cmd[u] <= '0;
      end
    end else if (clear) begin
      active    <= 1'b0;
      done_bits <= '0;
      for (int u = 0; u < NUNITS; u++) begin
        head[u] <= '0; tail[u] <= '0; running[u] <= 1'b0;
        unit_start[u] <= 1'b0;
      end
    end else begin
      if (go) active <= 1'b1;
      if (cmd_wr_en) tail[cmd_wr_unit] <= tail[cmd_wr_unit] + 1'b1;
      for (int u = 0; u < NUNITS; u++) begin
        unit_start[u] <= 1'b0;
        if (unit_done[u] && running[u]) begin
          running[u] <= 1'b0;
          done_bits[unit_cmd[u].id[IW-1:0]] <= 1'b1;
        end
        if (avail[u] && ready[u]) begin
          unit_start[u] <= 1'b1;
          unit_cmd[u]   <= hcmd[u];
          running[u]    <= 1'b1;
          head[u]       <= head[u] + 1'b1;
        end
      end
    end
  end

  always_comb begin
    all_done = active;
    for (int u = 0; u < NUNITS; u++)
      if (head[u] != tail[u] || running[u] || unit_start[u]) all_done = 1'b0;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_wr_en && !clear) |->
                   (tail[cmd_wr_unit] - head[cmd_wr_unit] < (QAW+1)'(QDEPTH)))
    else $error("layer_dispatcher: queue %0d overflow", cmd_wr_unit);

endmodule

// nvdla_subacc: the NVDLA-style (weight-stationary, channel-parallel)
// sub-accelerator of Maelstrom.
//
// It runs one layer per start pulse. The layer is tiled over output channels
// (KT = KP per tile, or CP for depth-wise layers) and input channels (CP per
// tile). The loop nest is
//   for k-tile, for output row oy:
//     for c-tile, r, s:                      -- one "step"
//       load the KP x CP weight tile          (WLOAD -> WWAIT -> SWAP)
//       for ox: fetch CP activations, the array adds the CP products of
//               each row, accumulate into the row buffer acc[ox][k] (STREAM)
//     write the KT x OX outputs of the row  (DRAIN -> WRITE)
// so every weight is reused OX times (weight stationary) and the partial sums
// of a row stay in a local buffer until all channels and filter taps are done.
// A depth-wise layer puts channel k on the diagonal (row k, column k) of the
// array, so only min(KP, CP) PEs do work: the under-utilisation the paper
// reports for this dataflow on depth-wise layers.
//
// Interface: start + desc (layer_desc_t) begin a layer; done pulses for one
// cycle when its last output byte has been written; busy is high in between.
// All global-buffer traffic goes through the LANES byte lanes this
// sub-accelerator owns (gb_req / gb_rdata, read latency one cycle). Zero
// padding is produced without a read. Outputs are requantised to 8 bits.
//
// Timing: a step costs ceil(KP*CP/LANES) + 2 cycles of weight load plus
// OX * ceil(CP/LANES) cycles of streaming; a row adds 3 drain cycles and
// ceil(KP*OX/LANES) write cycles. The lanes are busy in every cycle of
// WLOAD, STREAM and WRITE, so the unit runs at its NoC bandwidth.
// Following the paper: the channel parallelism, weight stationarity, spatial
// reduction and the lane (bandwidth) budget. This design's own choices: the
// 16 x 8 shape, the loop order, the row partial-sum buffer (MAX_OX columns),
// padding/stride support and requantisation.
module nvdla_subacc
  import hda_pkg::*;
#(
  parameter int unsigned KP     = 16,
  parameter int unsigned CP     = 8,
  parameter int unsigned LANES  = 4,
  parameter int unsigned MAX_OX = 1024
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  layer_desc_t   desc,
  output logic          busy,
  output logic          done,
  output gb_req_t       gb_req   [LANES],
  input  logic [DW-1:0] gb_rdata [LANES]
);

  localparam int unsigned NW     = KP * CP;
  localparam int unsigned WIDX_W = $clog2(NW);
  localparam int unsigned CIDX_W = (CP > 1) ? $clog2(CP) : 1;
  localparam int unsigned OXW    = $clog2(MAX_OX);

  typedef enum logic [2:0] {
    S_IDLE, S_WLOAD, S_WWAIT, S_SWAP, S_STREAM, S_DRAIN, S_WRITE
  } state_e;

  typedef enum logic [1:0] { K_NONE, K_W, K_ACT } kind_e;

  state_e      state;
  layer_desc_t d;
  int unsigned k0, oy, c0, ox, n;
  int unsigned r, s;
  logic [1:0]  drain_cnt;

  logic        is_dw;
  int unsigned kt;
  logic        first_step, last_step;
  assign is_dw      = (d.op == OP_DWCONV);
  assign kt         = is_dw ? CP : KP;
  assign first_step = (c0 == 0) && (r == 0) && (s == 0);
  assign last_step  = (is_dw || (c0 + CP >= 32'(d.c))) && (r == 32'(d.r) - 1) && (s == 32'(d.s) - 1);

  // ---------------------------------------------------------------------
  // Row partial-sum buffer
  // ---------------------------------------------------------------------
  logic signed [ACC_W-1:0] acc_mem [MAX_OX][KP];

  // ---------------------------------------------------------------------
  // Request issue (combinational)
  // ---------------------------------------------------------------------
  logic               iss_en   [LANES];
  logic               iss_zero [LANES];
  logic [WIDX_W-1:0]  iss_idx  [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned item, ki, ci, ch, oxw;
      int signed   iy, ix;
      logic        ok;
      item = n + l;
      gb_req[l]   = '0;
      iss_en[l]   = 1'b0;
      iss_zero[l] = 1'b1;
      iss_idx[l]  = '0;
      ki = 0; ci = 0; ch = 0; oxw = 0; iy = 0; ix = 0; ok = 1'b0;
      unique case (state)
        S_WLOAD: if (item < NW) begin
          ki = item / CP;
          ci = item % CP;
          iss_en[l]  = 1'b1;
          iss_idx[l] = WIDX_W'(item);
          if (is_dw) begin
            ok = (ki == ci) && (k0 + ki < 32'(d.k));
            gb_req[l].addr = GB_AW'(32'(d.w_base) + ((k0 + ki) * d.r + r) * d.s + s);
          end else begin
            ok = (k0 + ki < 32'(d.k)) && (c0 + ci < 32'(d.c));
            gb_req[l].addr = GB_AW'(32'(d.w_base) +
                             (((k0 + ki) * d.c + (c0 + ci)) * d.r + r) * d.s + s);
          end
          gb_req[l].en = ok;
          iss_zero[l]  = !ok;
        end
        S_STREAM: if (item < CP) begin
          ci = item;
          ch = is_dw ? k0 + ci : c0 + ci;
          iy = $signed(oy * d.stride + r) - $signed(32'(d.pad));
          ix = $signed(ox * d.stride + s) - $signed(32'(d.pad));
          ok = (ch < 32'(d.c)) && (iy >= 0) && (iy < $signed(32'(d.iy))) &&
               (ix >= 0) && (ix < $signed(32'(d.ix)));
          iss_en[l]  = 1'b1;
          iss_idx[l] = WIDX_W'(ci);
          gb_req[l].en   = ok;
          gb_req[l].addr = GB_AW'(32'(d.in_base) + (ch * d.iy + 32'(iy)) * d.ix + 32'(ix));
          iss_zero[l]    = !ok;
        end
        S_WRITE: if (item < KP * 32'(d.ox)) begin
          oxw = item / KP;
          ki  = item % KP;
          ok  = (ki < kt) && (k0 + ki < 32'(d.k));
          gb_req[l].en    = ok;
          gb_req[l].we    = 1'b1;
          gb_req[l].addr  = GB_AW'(32'(d.out_base) + ((k0 + ki) * d.oy + oy) * d.ox + oxw);
          gb_req[l].wdata = requant(acc_mem[oxw[OXW-1:0]][ki], d.shift);
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // Control
  // ---------------------------------------------------------------------
  logic stream_last_chunk;
  assign stream_last_chunk = (state == S_STREAM) && (n + LANES >= CP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      d <= '0;
      k0 <= 0; oy <= 0; c0 <= 0; ox <= 0; n <= 0; r <= 0; s <= 0;
      drain_cnt <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d <= desc;
          k0 <= 0; oy <= 0; c0 <= 0; ox <= 0; n <= 0; r <= 0; s <= 0;
          state <= S_WLOAD;
        end
        S_WLOAD: begin
          if (n + LANES >= NW) begin n <= 0; state <= S_WWAIT; end
          else n <= n + LANES;
        end
        S_WWAIT: state <= S_SWAP;
        S_SWAP:  begin state <= S_STREAM; ox <= 0; n <= 0; end
        S_STREAM: begin
          if (stream_last_chunk) begin
            n <= 0;
            if (ox == 32'(d.ox) - 1) begin
              ox <= 0;
              if (last_step) begin
                drain_cnt <= '0;
                state <= S_DRAIN;
              end else begin
                state <= S_WLOAD;
                if (s != 32'(d.s) - 1) s <= s + 1;
                else begin
                  s <= 0;
                  if (r != 32'(d.r) - 1) r <= r + 1;
                  else begin r <= 0; c0 <= c0 + CP; end
                end
              end
            end else ox <= ox + 1;
          end else n <= n + LANES;
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1;
          if (drain_cnt == 2'd2) begin n <= 0; state <= S_WRITE; end
        end
        S_WRITE: begin
          if (n + LANES >= KP * 32'(d.ox)) begin
            n <= 0; c0 <= 0; r <= 0; s <= 0;
            if (oy == 32'(d.oy) - 1) begin
              oy <= 0;
              if (k0 + kt >= 32'(d.k)) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                k0 <= k0 + kt;
                state <= S_WLOAD;
              end
            end else begin
              oy <= oy + 1;
              state <= S_WLOAD;
            end
          end else n <= n + LANES;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------------
  // Return stage: read data of the previous cycle's requests
  // ---------------------------------------------------------------------
  kind_e              ret_kind;
  logic               ret_en   [LANES];
  logic               ret_zero [LANES];
  logic [WIDX_W-1:0]  ret_idx  [LANES];
  logic               ret_last, ret_first;
  logic [OXW-1:0]     ret_ox;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ret_kind <= K_NONE;
      ret_last <= 1'b0;
      ret_first <= 1'b0;
      ret_ox <= '0;
      for (int l = 0; l < LANES; l++) begin
        ret_en[l] <= 1'b0; ret_zero[l] <= 1'b1; ret_idx[l] <= '0;
      end
    end else begin
      ret_kind  <= (state == S_WLOAD) ? K_W : (state == S_STREAM) ? K_ACT : K_NONE;
      ret_last  <= stream_last_chunk;
      ret_first <= first_step;
      ret_ox    <= OXW'(ox);
      ret_en    <= iss_en;
      ret_zero  <= iss_zero;
      ret_idx   <= iss_idx;
    end
  end

  logic               w_wr_en   [LANES];
  logic [WIDX_W-1:0]  w_wr_idx  [LANES];
  logic [DW-1:0]      w_wr_data [LANES];
  logic [DW-1:0]      act_buf   [CP];
  logic [DW-1:0]      act_next  [CP];

  always_comb begin
    act_next = act_buf;
    for (int l = 0; l < LANES; l++) begin
      w_wr_en[l]   = (ret_kind == K_W) && ret_en[l];
      w_wr_idx[l]  = ret_idx[l];
      w_wr_data[l] = ret_zero[l] ? '0 : gb_rdata[l];
      if (ret_kind == K_ACT && ret_en[l])
        act_next[ret_idx[l][CIDX_W-1:0]] = ret_zero[l] ? '0 : gb_rdata[l];
    end
  end

  always_ff @(posedge clk) act_buf <= act_next;

  // ---------------------------------------------------------------------
  // PE array and accumulation into the row buffer
  // ---------------------------------------------------------------------
  logic                    arr_valid;
  logic signed [ACC_W-1:0] psum [KP];
  logic [OXW-1:0]          p_ox;
  logic                    p_first;

  nvdla_pe_array #(.KP(KP), .CP(CP), .LANES(LANES)) u_array (
    .clk, .rst_n,
    .w_wr_en, .w_wr_idx, .w_wr_data,
    .w_swap   (state == S_SWAP),
    .in_valid (ret_kind == K_ACT && ret_last),
    .act      (act_next),
    .out_valid(arr_valid),
    .psum
  );

  always_ff @(posedge clk) begin
    p_ox    <= ret_ox;
    p_first <= ret_first;
    if (arr_valid)
      for (int k = 0; k < KP; k++)
        acc_mem[p_ox][k] <= p_first ? psum[k] : acc_mem[p_ox][k] + psum[k];
  end

  // Layer descriptors this unit can run.
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      assert (32'(desc.ox) <= MAX_OX && desc.ox != 0 && desc.oy != 0)
        else $error("nvdla_subacc: output width %0d unsupported", desc.ox);
      assert (desc.op != OP_DWCONV || desc.k == desc.c)
        else $error("nvdla_subacc: depth-wise layer needs K == C");
      assert (desc.r != 0 && desc.s != 0 && desc.stride != 0)
        else $error("nvdla_subacc: zero filter size or stride");
    end
  end

endmodule

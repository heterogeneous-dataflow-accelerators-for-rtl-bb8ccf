// shi_subacc: the Shi-diannao-style (output-stationary, activation-parallel)
// sub-accelerator of Maelstrom.
//
// It runs one layer per start pulse. The output plane of each output channel
// is cut into OYP x OXP blocks, one output pixel per PE. The loop nest is
//   for k, for block row oy0, for block column ox0:
//     for c (only c = k for depth-wise), r, s:      -- one "step"
//       fetch the weight w[k][c][r][s] and the block's inputs   (LOAD, LWAIT)
//       every PE: acc += in * w                                  (MAC)
//     write the block's outputs                                  (WRITE)
// Partial sums never leave the PEs (temporal accumulation, output
// stationary). For stride-1 layers the step s -> s+1 fetches only one new
// input column of OYP values and the PEs shift their inputs one place left
// (convolutional reuse); the first filter column of each (c, r), and every
// step of a strided layer, loads the whole block. Rows of a block that lie
// below the output plane are not fetched.
//
// Interface: start + desc (layer_desc_t) begin a layer; done pulses for one
// cycle after the last output byte has been written; busy is high in between.
// All global-buffer traffic uses the LANES byte lanes this unit owns
// (gb_req / gb_rdata, read latency one cycle).
//
// Timing per step: ceil((1 + rows*OXP)/LANES) cycles for a full load or
// ceil((1 + rows)/LANES) for a shifted one, plus one wait and one MAC cycle;
// per block ceil(rows*OXP/LANES) write cycles (rows = block rows inside the
// output plane). Following the paper: output-row/column parallelism, output
// stationarity, temporal accumulation, convolutional reuse, and the lane
// (bandwidth) budget. This design's own choices: 28 x 32 block shape, the loop
// order, stride/padding handling and requantisation.
module shi_subacc
  import hda_pkg::*;
#(
  parameter int unsigned OYP   = 28,
  parameter int unsigned OXP   = 32,
  parameter int unsigned LANES = 12
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

  localparam int unsigned RW = $clog2(OYP);
  localparam int unsigned CW = $clog2(OXP);

  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_LWAIT, S_MAC, S_WRITE } state_e;

  state_e      state;
  layer_desc_t d;
  int unsigned k, oy0, ox0, c, r, s, n;
  logic        shift_mode;     // current load fetches one new column only

  logic        is_dw;
  int unsigned rows, n_items;
  logic        first_step;
  assign is_dw      = (d.op == OP_DWCONV);
  assign rows       = (32'(d.oy) - oy0 < OYP) ? 32'(d.oy) - oy0 : OYP;
  assign first_step = (r == 0) && (s == 0) && (c == (is_dw ? k : 0));
  always_comb begin
    if (state == S_WRITE) n_items = rows * OXP;
    else if (shift_mode)  n_items = 1 + rows;
    else                  n_items = 1 + rows * OXP;
  end

  // ---------------------------------------------------------------------
  // PE array
  // ---------------------------------------------------------------------
  logic                    ld_en   [LANES];
  logic [RW-1:0]           ld_row  [LANES];
  logic [CW-1:0]           ld_col  [LANES];
  logic [DW-1:0]           ld_data [LANES];
  logic [DW-1:0]           newcol  [OYP];
  logic [DW-1:0]           w_reg;
  logic signed [ACC_W-1:0] acc     [OYP][OXP];

  shi_pe_array #(.OYP(OYP), .OXP(OXP), .LANES(LANES)) u_array (
    .clk,
    .ld_en, .ld_row, .ld_col, .ld_data,
    .shift (state == S_MAC && shift_mode),
    .newcol,
    .mac   (state == S_MAC),
    .clr   (first_step),
    .w     (w_reg),
    .acc
  );

  // ---------------------------------------------------------------------
  // Request issue (combinational)
  // ---------------------------------------------------------------------
  logic          iss_en   [LANES];
  logic          iss_zero [LANES];
  logic          iss_w    [LANES];
  logic [RW-1:0] iss_row  [LANES];
  logic [CW-1:0] iss_col  [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned m, p, i, j;
      int signed   iy, ix;
      logic        ok;
      m = n + l;
      p = 0; i = 0; j = 0; iy = 0; ix = 0; ok = 1'b0;
      gb_req[l]   = '0;
      iss_en[l]   = 1'b0;
      iss_zero[l] = 1'b1;
      iss_w[l]    = 1'b0;
      iss_row[l]  = '0;
      iss_col[l]  = '0;
      unique case (state)
        S_LOAD: if (m < n_items) begin
          iss_en[l] = 1'b1;
          if (m == 0) begin
            iss_w[l] = 1'b1;
            ok = 1'b1;
            gb_req[l].addr = is_dw
              ? GB_AW'(32'(d.w_base) + (k * d.r + r) * d.s + s)
              : GB_AW'(32'(d.w_base) + ((k * d.c + c) * d.r + r) * d.s + s);
          end else begin
            p = m - 1;
            if (shift_mode) begin i = p;       j = OXP - 1; end
            else            begin i = p / OXP; j = p % OXP; end
            iy = $signed((oy0 + i) * d.stride + r) - $signed(32'(d.pad));
            ix = $signed((ox0 + j) * d.stride + s) - $signed(32'(d.pad));
            ok = (iy >= 0) && (iy < $signed(32'(d.iy))) &&
                 (ix >= 0) && (ix < $signed(32'(d.ix)));
            gb_req[l].addr = GB_AW'(32'(d.in_base) + (c * d.iy + 32'(iy)) * d.ix + 32'(ix));
          end
          gb_req[l].en = ok;
          iss_zero[l]  = !ok;
          iss_row[l]   = RW'(i);
          iss_col[l]   = CW'(j);
        end
        S_WRITE: if (m < n_items) begin
          i = m / OXP;
          j = m % OXP;
          ok = (ox0 + j < 32'(d.ox));
          gb_req[l].en    = ok;
          gb_req[l].we    = 1'b1;
          gb_req[l].addr  = GB_AW'(32'(d.out_base) + (k * d.oy + oy0 + i) * d.ox + ox0 + j);
          gb_req[l].wdata = requant(acc[RW'(i)][CW'(j)], d.shift);
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // Control
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      d <= '0;
      k <= 0; oy0 <= 0; ox0 <= 0; c <= 0; r <= 0; s <= 0; n <= 0;
      shift_mode <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d <= desc;
          k <= 0; oy0 <= 0; ox0 <= 0; c <= 0; r <= 0; s <= 0; n <= 0;
          shift_mode <= 1'b0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (n + LANES >= n_items) begin n <= 0; state <= S_LWAIT; end
          else n <= n + LANES;
        end
        S_LWAIT: state <= S_MAC;
        S_MAC: begin
          state <= S_LOAD;
          if (s != 32'(d.s) - 1) begin
            s <= s + 1;
            shift_mode <= (d.stride == 3'd1);
          end else begin
            s <= 0;
            shift_mode <= 1'b0;
            if (r != 32'(d.r) - 1) r <= r + 1;
            else begin
              r <= 0;
              if (!is_dw && c != 32'(d.c) - 1) c <= c + 1;
              else state <= S_WRITE;
            end
          end
        end
        S_WRITE: begin
          if (n + LANES >= n_items) begin
            n <= 0;
            state <= S_LOAD;
            if (ox0 + OXP < 32'(d.ox)) begin
              ox0 <= ox0 + OXP;
              c <= is_dw ? k : 0;
            end else begin
              ox0 <= 0;
              if (oy0 + OYP < 32'(d.oy)) begin
                oy0 <= oy0 + OYP;
                c <= is_dw ? k : 0;
              end else begin
                oy0 <= 0;
                if (k + 1 < 32'(d.k)) begin
                  k <= k + 1;
                  c <= is_dw ? k + 1 : 0;
                end else begin
                  state <= S_IDLE;
                  done  <= 1'b1;
                end
              end
            end
          end else n <= n + LANES;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------------
  // Return stage
  // ---------------------------------------------------------------------
  logic          ret_en   [LANES];
  logic          ret_zero [LANES];
  logic          ret_w    [LANES];
  logic [RW-1:0] ret_row  [LANES];
  logic [CW-1:0] ret_col  [LANES];
  logic          ret_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ret_shift <= 1'b0;
      for (int l = 0; l < LANES; l++) begin
        ret_en[l] <= 1'b0; ret_zero[l] <= 1'b1; ret_w[l] <= 1'b0;
        ret_row[l] <= '0; ret_col[l] <= '0;
      end
    end else begin
      ret_en    <= iss_en;
      ret_zero  <= iss_zero;
      ret_w     <= iss_w;
      ret_row   <= iss_row;
      ret_col   <= iss_col;
      ret_shift <= shift_mode;
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      ld_en[l]   = ret_en[l] && !ret_w[l] && !ret_shift;
      ld_row[l]  = ret_row[l];
      ld_col[l]  = ret_col[l];
      ld_data[l] = ret_zero[l] ? '0 : gb_rdata[l];
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (ret_en[l] && ret_w[l])
        w_reg <= gb_rdata[l];
      if (ret_en[l] && !ret_w[l] && ret_shift)
        newcol[ret_row[l]] <= ret_zero[l] ? '0 : gb_rdata[l];
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      assert (desc.oy != 0 && desc.ox != 0 && desc.k != 0 && desc.c != 0)
        else $error("shi_subacc: empty layer");
      assert (desc.op != OP_DWCONV || desc.k == desc.c)
        else $error("shi_subacc: depth-wise layer needs K == C");
      assert (desc.r != 0 && desc.s != 0 && desc.stride != 0)
        else $error("shi_subacc: zero filter size or stride");
    end
  end

endmodule

// dram_dma: the DRAM transfer engine of Maelstrom.
//
// One command moves `len` bytes between DRAM (byte address dram_addr) and the
// global buffer (byte address gb_addr): DMA_LOAD brings filter-weight and
// activation tiles in, DMA_STORE writes output activations back when a
// layer's tensors do not fit the global buffer. Because this engine runs its
// own command queue, the next layer's weights and activations are fetched
// while the sub-accelerators compute (double buffering across two
// global-buffer regions chosen by the schedule).
//
// DRAM side: BEAT bytes per beat on valid/ready channels. Reads: a request
// (dram_rd_valid/ready, dram_rd_addr) is answered later, in order, by one
// response beat (dram_rsp_valid, dram_rsp_data; byte i of the beat is address
// dram_rd_addr + i); several requests may be outstanding. Writes: dram_wr_valid
// /ready with address, data and a byte strobe.
// Global-buffer side: BEAT byte lanes, lane i handles byte i of a beat.
//
// Timing: a load issues one read request per cycle and writes each response
// beat to the buffer in the cycle it arrives (BEAT bytes per cycle at best);
// a store takes three cycles per beat plus any DRAM back-pressure (read lanes,
// capture, write handshake). done pulses one cycle after the last byte.
// The beat size, the handshakes and the in-order responses are this design's
// choices; the paper only states that tiles move between DRAM and the buffer.
module dram_dma
  import hda_pkg::*;
#(
  parameter int unsigned BEAT = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  dma_desc_t             desc,
  output logic                  busy,
  output logic                  done,
  // DRAM read channel
  output logic                  dram_rd_valid,
  input  logic                  dram_rd_ready,
  output logic [DRAM_AW-1:0]    dram_rd_addr,
  input  logic                  dram_rsp_valid,
  input  logic [DW-1:0]         dram_rsp_data [BEAT],
  // DRAM write channel
  output logic                  dram_wr_valid,
  input  logic                  dram_wr_ready,
  output logic [DRAM_AW-1:0]    dram_wr_addr,
  output logic [DW-1:0]         dram_wr_data [BEAT],
  output logic [BEAT-1:0]       dram_wr_strb,
  // global-buffer lanes
  output gb_req_t               gb_req   [BEAT],
  input  logic [DW-1:0]         gb_rdata [BEAT]
);

  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_ST_RD, S_ST_CAP, S_ST_WR } state_e;

  state_e      state;
  dma_desc_t   d;
  int unsigned nbeats, b_req, b_rsp, b_st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      d <= '0;
      nbeats <= 0; b_req <= 0; b_rsp <= 0; b_st <= 0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d      <= desc;
          nbeats <= (32'(desc.len) + BEAT - 1) / BEAT;
          b_req  <= 0; b_rsp <= 0; b_st <= 0;
          if (desc.len == 0) done <= 1'b1;
          else state <= (desc.dir == DMA_LOAD) ? S_LOAD : S_ST_RD;
        end
        S_LOAD: begin
          if (dram_rd_valid && dram_rd_ready) b_req <= b_req + 1;
          if (dram_rsp_valid) begin
            b_rsp <= b_rsp + 1;
            if (b_rsp + 1 == nbeats) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_ST_RD:  state <= S_ST_CAP;
        S_ST_CAP: state <= S_ST_WR;
        S_ST_WR: if (dram_wr_ready) begin
          if (b_st + 1 == nbeats) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            b_st  <= b_st + 1;
            state <= S_ST_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  assign dram_rd_valid = (state == S_LOAD) && (b_req < nbeats);
  assign dram_rd_addr  = d.dram_addr + DRAM_AW'(b_req * BEAT);

  // Buffer lanes: response bytes in a load, reads in a store.
  always_comb begin
    for (int l = 0; l < BEAT; l++) begin
      int unsigned off;
      off = ((state == S_LOAD) ? b_rsp : b_st) * BEAT + l;
      gb_req[l]      = '0;
      gb_req[l].addr = GB_AW'(32'(d.gb_addr) + off);
      if (state == S_LOAD && dram_rsp_valid && off < 32'(d.len)) begin
        gb_req[l].en    = 1'b1;
        gb_req[l].we    = 1'b1;
        gb_req[l].wdata = dram_rsp_data[l];
      end else if (state == S_ST_RD && off < 32'(d.len)) begin
        gb_req[l].en = 1'b1;
      end
    end
  end

  // Store beat: captured in the cycle after the lane reads.
  always_ff @(posedge clk) begin
    if (state == S_ST_CAP) begin
      dram_wr_data <= gb_rdata;
      for (int l = 0; l < BEAT; l++)
        dram_wr_strb[l] <= (b_st * BEAT + l < 32'(d.len));
    end
  end

  assign dram_wr_valid = (state == S_ST_WR);
  assign dram_wr_addr  = d.dram_addr + DRAM_AW'(b_st * BEAT);

  // A response must never arrive that was not requested.
  assert property (@(posedge clk) disable iff (!rst_n)
                   dram_rsp_valid |-> (state == S_LOAD && b_rsp < b_req))
    else $error("dram_dma: unexpected DRAM response");

endmodule

// hda_pkg: types and constants shared by the Maelstrom heterogeneous dataflow
// accelerator (an NVDLA-style and a Shi-diannao-style sub-accelerator sharing
// one global buffer).
//
// It defines the global-buffer lane request, the layer descriptor that both
// sub-accelerators execute, the DRAM-transfer descriptor, the command word of
// the layer dispatcher, and the requantisation used when a 32-bit sum is
// written back as an 8-bit activation.
//
// The tensor layout is common to both sub-accelerators (the design picks
// dataflows with the same inner loop order so no layout conversion is
// needed): activations [C][Y][X], weights [K][C][R][S] (depth-wise [C][R][S]),
// outputs [K][OY][OX], all bytes, row-major. Widths of the fields are this
// design's own choice.
package hda_pkg;

  localparam int unsigned GB_AW   = 22;   // 4 MiB global buffer, byte address
  localparam int unsigned DW      = 8;    // activation / weight width
  localparam int unsigned ACC_W   = 32;   // partial-sum width
  localparam int unsigned DIM_W   = 16;   // tensor dimension fields
  localparam int unsigned DRAM_AW = 32;
  localparam int unsigned ID_W    = 12;   // command ids, 4096 per schedule

  typedef logic [GB_AW-1:0] gb_addr_t;
  typedef logic [DIM_W-1:0] dim_t;

  // One byte lane of the hard-partitioned global NoC.
  typedef struct packed {
    logic     en;
    logic     we;
    gb_addr_t addr;
    logic [DW-1:0] wdata;
  } gb_req_t;

  // CONV covers CONV2D, point-wise (R=S=1) and fully connected (IY=IX=1)
  // layers; DWCONV is depth-wise (K == C, no accumulation across channels).
  typedef enum logic [0:0] {
    OP_CONV   = 1'b0,
    OP_DWCONV = 1'b1
  } op_e;

  typedef struct packed {
    op_e         op;
    dim_t        k;        // output channels
    dim_t        c;        // input channels
    dim_t        iy, ix;   // input height, width
    dim_t        oy, ox;   // output height, width
    logic [3:0]  r, s;     // filter height, width (1..15)
    logic [2:0]  stride;   // 1..7
    logic [2:0]  pad;      // zero padding on top/left
    gb_addr_t    in_base;
    gb_addr_t    w_base;
    gb_addr_t    out_base;
    logic [4:0]  shift;    // output requantisation shift
  } layer_desc_t;

  typedef enum logic [0:0] {
    DMA_LOAD  = 1'b0,      // DRAM -> global buffer
    DMA_STORE = 1'b1       // global buffer -> DRAM
  } dma_dir_e;

  typedef struct packed {
    dma_dir_e             dir;
    logic [DRAM_AW-1:0]   dram_addr;
    gb_addr_t             gb_addr;
    logic [GB_AW:0]       len;       // bytes
  } dma_desc_t;

  typedef enum logic [1:0] {
    UNIT_DMA = 2'd0,
    UNIT_NV  = 2'd1,
    UNIT_SHI = 2'd2
  } unit_e;

  localparam int unsigned NUNITS = 3;

  // A command of the layer execution schedule.
  typedef struct packed {
    logic [ID_W-1:0] id;
    logic            dep0_v;
    logic [ID_W-1:0] dep0;
    logic            dep1_v;
    logic [ID_W-1:0] dep1;
    layer_desc_t     layer;     // used by the sub-accelerators
    dma_desc_t       dma;       // used by the DRAM engine
  } cmd_t;

  // Arithmetic right shift then saturation to a signed byte.
  function automatic logic [DW-1:0] requant(input logic signed [ACC_W-1:0] acc,
                                            input logic [4:0] sh);
    logic signed [ACC_W-1:0] v;
    v = acc >>> sh;
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return 8'h80;
    else                    return v[DW-1:0];
  endfunction

endpackage

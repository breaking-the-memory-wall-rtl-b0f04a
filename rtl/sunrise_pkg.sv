// sunrise_pkg: types and constants shared by the near-memory accelerator.
//
// Operands are 8-bit signed integers, partial sums 32-bit signed. All DRAM
// words are VEC bytes wide (one feature vector or one weight row). The
// register map below is what the control bus (SPI host or on-chip
// processor) sees of the Unified Control Engine. The paper gives neither
// operand precision nor a register map; both are this design's choices.
package sunrise_pkg;

  localparam int DATA_W = 8;    // feature and weight width
  localparam int ACC_W  = 32;   // accumulator width
  localparam int ADDR_W = 24;   // word address on every DRAM PHY port
  localparam int TAG_W  = 10;   // request tag carried through a DRAM PHY
  localparam int REG_AW = 6;    // control-bus register index width
  localparam int REG_DW = 32;   // control-bus data width

  // Control-bus register indices (word addresses).
  localparam logic [REG_AW-1:0] REG_CTRL     = 6'd0;  // W: bit0 layer, bit1 DMA in, bit2 DMA out
  localparam logic [REG_AW-1:0] REG_STATUS   = 6'd1;  // R: bit0 busy, bit1 repair init done
  localparam logic [REG_AW-1:0] REG_SRC_DSU  = 6'd2;  // DSU that serves features
  localparam logic [REG_AW-1:0] REG_DST_DSU  = 6'd3;  // DSU that receives results
  localparam logic [REG_AW-1:0] REG_FBASE    = 6'd4;  // feature base word address
  localparam logic [REG_AW-1:0] REG_WBASE    = 6'd5;  // weight base word address (all VPUs)
  localparam logic [REG_AW-1:0] REG_OBASE    = 6'd6;  // output base word address
  localparam logic [REG_AW-1:0] REG_KCH      = 6'd7;  // input chunks of VEC elements
  localparam logic [REG_AW-1:0] REG_BATCH    = 6'd8;  // batch items per layer pass
  localparam logic [REG_AW-1:0] REG_FUNC     = 6'd9;  // [1:0] function, [12:8] right shift
  localparam logic [REG_AW-1:0] REG_DMA_UNIT = 6'd10; // unit id: DSUs first, then VPUs
  localparam logic [REG_AW-1:0] REG_DMA_ADDR = 6'd11; // DMA start word address
  localparam logic [REG_AW-1:0] REG_DMA_LEN  = 6'd12; // DMA length in words
  localparam logic [REG_AW-1:0] REG_STALLS   = 6'd13; // R: cycles a request waited on a busy array
  localparam logic [REG_AW-1:0] REG_LAYERS   = 6'd14; // R: layer passes completed

  // Output function applied by the VPUs at write-back (the "function selector").
  typedef enum logic [1:0] {
    FN_PASS = 2'd0,   // shift and saturate
    FN_RELU = 2'd1    // shift, clamp negatives to zero, saturate
  } func_e;

  // One control-bus access.
  typedef struct packed {
    logic              wr;
    logic              rd;
    logic [REG_AW-1:0] addr;
    logic [REG_DW-1:0] wdata;
  } bus_req_t;

  // One DRAM defect record as stored in the NVM (32 bits).
  typedef struct packed {
    logic        valid;
    logic [4:0]  unit;   // DSU 0..N_DSU-1, then VPUs
    logic [2:0]  bank;   // DRAM array within the unit
    logic [1:0]  slot;   // repair slot = spare row index
    logic [20:0] row;    // defective row within the array
  } repair_entry_t;

endpackage

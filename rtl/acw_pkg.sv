// acw_pkg -- types and constants shared by the Access Control Wrapper (ACW).
//
// The ACW sits between one AXI4 controller and the interconnect. This package
// holds the channel structs for the five AXI4 channels (AW/AR share one
// address-channel struct), the AXI-lite configuration channels, the region
// descriptor of the local access control policy (base address + size, as the
// policy ranges are described), the operating-mode encoding and the register
// map of the configuration port.
//
// Follows the paper: five AXI channels, regions encoded as base and size,
// three operating modes, Reset = 2'b00 and Decouple = 2'b10 (the encodings
// used in the paper's security property templates). This design's own
// choices: the bus widths, Supervising = 2'b01, and the register map.
package acw_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned ADDR_W  = 32;  // AXI address width
  localparam int unsigned DATA_W  = 32;  // AXI data width (one 32-bit word)
  localparam int unsigned STRB_W  = DATA_W / 8;
  localparam int unsigned ID_W    = 4;   // AXI ID width
  localparam int unsigned LITE_AW = 12;  // AXI-lite address width of one ACW

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [STRB_W-1:0] strb_t;
  typedef logic [ID_W-1:0]   id_t;

  // ---------------------------------------------------------------- AXI4
  localparam logic [1:0] BURST_FIXED = 2'b00;
  localparam logic [1:0] BURST_INCR  = 2'b01;
  localparam logic [1:0] BURST_WRAP  = 2'b10;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // Address channel (AW or AR) payload.
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;    // beats - 1
    logic [2:0] size;   // log2(bytes per beat)
    logic [1:0] burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
  } ax_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } r_t;

  // ---------------------------------------------------------------- AXI-lite
  typedef struct packed {
    logic [LITE_AW-1:0] addr;
    logic [2:0]         prot;
  } lite_ax_t;

  typedef struct packed {
    logic [31:0] data;
    logic [3:0]  strb;
  } lite_w_t;

  typedef struct packed {
    logic [31:0] data;
    logic [1:0]  resp;
  } lite_r_t;

  // ---------------------------------------------------------------- policy
  // One region of the local access control policy: bytes [base, base+size).
  // A region of size 0 matches nothing.
  typedef struct packed {
    addr_t base;
    addr_t size;
  } region_t;

  // Operating mode of one channel direction (read or write).
  typedef enum logic [1:0] {
    MODE_RESET       = 2'b00,
    MODE_SUPERVISING = 2'b01,
    MODE_DECOUPLE    = 2'b10
  } acw_mode_e;

  // Diagnostic record of an illegal request (the anomaly registers).
  typedef struct packed {
    addr_t      addr;
    id_t        id;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    logic [2:0] prot;
  } anomaly_t;

  // ---------------------------------------------------------------- register map
  // Byte offsets inside one ACW's 4 KiB configuration window.
  localparam logic [LITE_AW-1:0] REG_CTRL      = 12'h000; // W1: bit0 read go, bit1 write go
  localparam logic [LITE_AW-1:0] REG_STATUS    = 12'h004; // RO: [1:0] read mode, [3:2] write mode
  localparam logic [LITE_AW-1:0] REG_RD_A_ADDR = 12'h010; // RO: read anomaly address
  localparam logic [LITE_AW-1:0] REG_RD_A_INFO = 12'h014; // RO: read anomaly attributes
  localparam logic [LITE_AW-1:0] REG_WR_A_ADDR = 12'h018; // RO: write anomaly address
  localparam logic [LITE_AW-1:0] REG_WR_A_INFO = 12'h01C; // RO: write anomaly attributes
  localparam logic [LITE_AW-1:0] REG_NREGIONS  = 12'h020; // RO: [15:0] read regions, [31:16] write regions
  localparam logic [LITE_AW-1:0] REG_RD_REGION = 12'h100; // RW: read region k: base at +8k, size at +8k+4
  localparam logic [LITE_AW-1:0] REG_WR_REGION = 12'h200; // RW: write region k: base at +8k, size at +8k+4

  // Packs an anomaly record's attributes into the INFO register layout:
  // [3:0] id, [11:4] len, [14:12] size, [17:16] burst, [22:20] prot.
  function automatic logic [31:0] anomaly_info(anomaly_t a);
    logic [31:0] v;
    v          = '0;
    v[3:0]     = a.id;
    v[11:4]    = a.len;
    v[14:12]   = a.size;
    v[17:16]   = a.burst;
    v[22:20]   = a.prot;
    return v;
  endfunction

endpackage

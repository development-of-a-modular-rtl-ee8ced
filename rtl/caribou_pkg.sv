// caribou_pkg: types and constants shared by the readout firmware of the
// central interface board.
//
// The firmware moves two kinds of data (ADC samples and FE-I4B hit records)
// as 32-bit words whose top nibble is a source tag, and is controlled through
// a small register bus driven either by the AXI4-Lite port of the processing
// system (Ethernet link) or by commands carried in GBT frames (optical link).
// The register map, the word tags and the GBT frame layout below are this
// design's own choices; the paper names the paths but gives no encodings.
package caribou_pkg;

  localparam int unsigned WORD_W = 32;   // data word width on every stream
  localparam int unsigned ADDR_W = 8;    // register index width

  // Source tags in bits [31:28] of every data word
  localparam logic [3:0] TAG_ADC  = 4'hA;
  localparam logic [3:0] TAG_FEI4 = 4'hF;

  // Register bus request, held by the master until ack
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] wdata;
  } reg_req_t;

  // Register bus response, combinational, ack for exactly the cycle of acceptance
  typedef struct packed {
    logic              ack;
    logic [WORD_W-1:0] rdata;
  } reg_rsp_t;

  // Register map (word indices)
  typedef enum logic [ADDR_W-1:0] {
    REG_ID          = 8'h00,  // RO  firmware identifier
    REG_CTRL        = 8'h01,  // RW  [0] ADC enable, [1] FE-I4B rx enable, [2] link select (1 = GBT)
    REG_STATUS      = 8'h02,  // RO  busy / lock flags
    REG_I2C_CMD     = 8'h03,  // WO  [12] start [11] stop [10] read [9] write [8] nack-on-read, [7:0] byte
    REG_I2C_RX      = 8'h04,  // RO  [9] busy [8] slave NACK [7:0] byte read
    REG_SENS_BITS   = 8'h05,  // RW  [5:0] bits per sensor word (0 = 32)
    REG_SENS_DATA   = 8'h06,  // WO  sensor word, shifted MSB first
    REG_SENS_LOAD   = 8'h07,  // WO  any write: load pulse
    REG_FEI4_BITS   = 8'h08,  // RW  [5:0] bits per FE-I4B command word (0 = 32)
    REG_FEI4_DATA   = 8'h09,  // WO  FE-I4B command word, sent MSB first
    REG_ADC_FRAMES  = 8'h0A,  // RO  ADC frames received
    REG_FEI4_RECS   = 8'h0B,  // RO  FE-I4B records received
    REG_FEI4_ERRS   = 8'h0C,  // RO  FE-I4B 8b/10b code errors
    REG_DROPS       = 8'h0D,  // RO  [31:16] FE-I4B words dropped [15:0] ADC frames dropped
    REG_DDR_BASE    = 8'h10,  // RW  ring buffer base address in DDR3 (bytes)
    REG_DDR_SIZE    = 8'h11,  // RW  ring buffer size (bytes)
    REG_DDR_WCOUNT  = 8'h12,  // RO  bytes written to the ring since reset
    REG_DDR_RCOUNT  = 8'h13,  // RW  bytes consumed by the software
    REG_GBT_FRAMES  = 8'h14,  // RO  GBT data frames sent
    REG_GBT_LOST    = 8'h15   // RO  [15:0] GBT commands lost while the decoder was busy
  } reg_addr_e;

  localparam logic [WORD_W-1:0] FW_ID = 32'hCA1B_0001;

  // 80-bit GBT user payload layout (IC/EC bits [83:80] unused)
  typedef enum logic [3:0] {
    GBT_IDLE  = 4'h0,
    GBT_DATA  = 4'h1,   // uplink: [75:72] word count (1 or 2), [71:64] sequence, [63:32] word 0, [31:0] word 1
    GBT_RDRSP = 4'h2,   // uplink: [71:64] register index, [31:0] read data
    GBT_WRITE = 4'h3,   // downlink: [71:64] register index, [31:0] write data
    GBT_READ  = 4'h4    // downlink: [71:64] register index
  } gbt_type_e;

endpackage

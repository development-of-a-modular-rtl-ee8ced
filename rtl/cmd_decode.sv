// cmd_decode: command decoder, the controller of every other firmware block.
//
// Host commands reach it as register accesses from two masters: the AXI4-Lite
// bridge (Ethernet link through the processing system) and the GBT command
// extractor (optical link). When both request in the same cycle the AXI4-Lite
// side goes first. The register map is in caribou_pkg. Plain registers hold
// the enables, the link selection and the DDR3 ring-buffer settings; the
// read-only ones report counters and status of the data paths.
//
// Writes to the command registers of the I2C controller, the sensor and the
// FE-I4B configure modules are passed straight on as valid/ready handshakes:
// the write is acknowledged only in the cycle the target accepts it, so a
// busy target stalls the host's access instead of losing the command.
// Acknowledge and read data are combinational (same cycle as the accepted
// request); the master drops its request after seeing ack.
// The two-master arrangement, the map and the stalling are this design's
// choices; the paper says only that commands arrive over the AXI4 bus or a
// custom IP bus and that this module controls all internal modules.
module cmd_decode
  import caribou_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  reg_req_t    axi_req,
  output reg_rsp_t    axi_rsp,
  input  reg_req_t    gbt_req,
  output reg_rsp_t    gbt_rsp,
  // control
  output logic        adc_enable,
  output logic        fei4_enable,
  output logic        link_gbt,
  // I2C controller
  output logic        i2c_valid,
  input  logic        i2c_ready,
  output logic [12:0] i2c_cmd,
  input  logic [7:0]  i2c_rx_data,
  input  logic        i2c_rx_nack,
  // sensor configure module
  output logic        sens_valid,
  input  logic        sens_ready,
  output logic [31:0] sens_data,
  output logic [5:0]  sens_bits,
  output logic        sens_load,
  input  logic        sens_busy,
  // FE-I4B configure module
  output logic        fei4c_valid,
  input  logic        fei4c_ready,
  output logic [31:0] fei4c_data,
  output logic [5:0]  fei4c_bits,
  input  logic        fei4c_busy,
  // data path status
  input  logic [31:0] adc_frames,
  input  logic [15:0] adc_drops,
  input  logic        fei4_locked,
  input  logic [31:0] fei4_records,
  input  logic [31:0] fei4_errors,
  input  logic [15:0] fei4_drops,
  // DDR3 ring buffer
  output logic [31:0] ddr_base,
  output logic [31:0] ddr_size,
  output logic [31:0] ddr_rcount,
  input  logic [31:0] ddr_wcount,
  input  logic [31:0] gbt_frames,
  input  logic [15:0] gbt_lost
);
  reg_req_t r;
  logic     sel_gbt, wr, stall, ack;
  logic [31:0] rdata;

  assign sel_gbt = !axi_req.valid;
  assign r       = sel_gbt ? gbt_req : axi_req;
  assign wr      = r.valid && r.we;

  assign i2c_valid   = wr && (r.addr == REG_I2C_CMD);
  assign i2c_cmd     = r.wdata[12:0];
  assign sens_valid  = wr && (r.addr == REG_SENS_DATA);
  assign sens_data   = r.wdata;
  assign sens_load   = wr && (r.addr == REG_SENS_LOAD) && sens_ready;
  assign fei4c_valid = wr && (r.addr == REG_FEI4_DATA);
  assign fei4c_data  = r.wdata;

  always_comb begin
    stall = 1'b0;
    if (wr) begin
      unique case (r.addr)
        REG_I2C_CMD:   stall = !i2c_ready;
        REG_SENS_DATA,
        REG_SENS_LOAD: stall = !sens_ready;
        REG_FEI4_DATA: stall = !fei4c_ready;
        default:       stall = 1'b0;
      endcase
    end
  end
  assign ack = r.valid && !stall;

  always_comb begin
    unique case (r.addr)
      REG_ID:         rdata = FW_ID;
      REG_CTRL:       rdata = {29'd0, link_gbt, fei4_enable, adc_enable};
      REG_STATUS:     rdata = {27'd0, fei4_locked, fei4c_busy, sens_busy, !i2c_ready, 1'b0};
      REG_I2C_RX:     rdata = {22'd0, !i2c_ready, i2c_rx_nack, i2c_rx_data};
      REG_SENS_BITS:  rdata = {26'd0, sens_bits};
      REG_FEI4_BITS:  rdata = {26'd0, fei4c_bits};
      REG_ADC_FRAMES: rdata = adc_frames;
      REG_FEI4_RECS:  rdata = fei4_records;
      REG_FEI4_ERRS:  rdata = fei4_errors;
      REG_DROPS:      rdata = {fei4_drops, adc_drops};
      REG_DDR_BASE:   rdata = ddr_base;
      REG_DDR_SIZE:   rdata = ddr_size;
      REG_DDR_WCOUNT: rdata = ddr_wcount;
      REG_DDR_RCOUNT: rdata = ddr_rcount;
      REG_GBT_FRAMES: rdata = gbt_frames;
      REG_GBT_LOST:   rdata = {16'd0, gbt_lost};
      default:        rdata = 32'hDEAD_BEEF;
    endcase
  end

  always_comb begin
    axi_rsp = '0;
    gbt_rsp = '0;
    if (sel_gbt) begin gbt_rsp.ack = ack; gbt_rsp.rdata = rdata; end
    else         begin axi_rsp.ack = ack; axi_rsp.rdata = rdata; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_enable <= 1'b0; fei4_enable <= 1'b0; link_gbt <= 1'b0;
      sens_bits  <= '0;   fei4c_bits  <= '0;
      ddr_base   <= '0;   ddr_size    <= 32'h0001_0000; ddr_rcount <= '0;
    end else if (wr && ack) begin
      unique case (r.addr)
        REG_CTRL:       {link_gbt, fei4_enable, adc_enable} <= r.wdata[2:0];
        REG_SENS_BITS:  sens_bits  <= r.wdata[5:0];
        REG_FEI4_BITS:  fei4c_bits <= r.wdata[5:0];
        REG_DDR_BASE:   ddr_base   <= r.wdata;
        REG_DDR_SIZE:   ddr_size   <= r.wdata;
        REG_DDR_RCOUNT: ddr_rcount <= r.wdata;
        default: ;
      endcase
    end
  end
endmodule

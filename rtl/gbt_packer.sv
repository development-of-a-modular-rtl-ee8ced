// gbt_packer: builds the uplink payload of the GBT optical link.
//
// The GBT-FPGA core sends one 120-bit frame per 40 MHz bunch-crossing
// period: a 4-bit header, 4 slow-control bits, 80 user bits and 32 bits of
// forward error correction. The core adds header and FEC itself; this module
// supplies the 84 bits around them (tx_data, slow-control bits [83:80] left
// at zero) and tx_isdata, which makes the core send the data header rather
// than the idle one. The paper states that the buffered data are packaged
// into the 120-bit frame; the 80-bit layout (caribou_pkg, gbt_type_e) is this
// design's own:
//   data frame      [79:76] GBT_DATA  [75:72] words (1 or 2) [71:64] sequence
//                   [63:32] first word [31:0] second word
//   read response   [79:76] GBT_RDRSP [71:64] register index [31:0] data
//   idle            all zero, tx_isdata low
//
// tx_strobe (from the core, one system-clock cycle per frame) loads the next
// frame into tx_data, where it stays until the following strobe. Between
// strobes up to two stream words are collected; a pending read response
// takes precedence over data. Two 32-bit words per 25 ns frame is
// 2.56 Gbit/s of payload, far more than the FE-I4B link (128 Mbit/s of data
// after 8b/10b). The ADC at its full 8 x 40 MS/s cannot be carried by either
// link; it is taken in capture windows, see adc_interface and data_buffer.
module gbt_packer
  import caribou_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        rsp_valid,
  output logic        rsp_ready,
  input  logic [7:0]  rsp_addr,
  input  logic [31:0] rsp_data,
  input  logic        tx_strobe,
  output logic [83:0] tx_data,
  output logic        tx_isdata,
  output logic [31:0] frames
);
  logic [31:0] w0, w1;
  logic [1:0]  nw;
  logic [7:0]  seq;
  logic        take;

  assign in_ready  = (nw != 2'd2) || (tx_strobe && !rsp_valid);
  assign take      = in_valid && in_ready;
  assign rsp_ready = tx_strobe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w0 <= '0; w1 <= '0; nw <= '0; seq <= '0; frames <= '0;
      tx_data <= '0; tx_isdata <= 1'b0;
    end else begin
      if (tx_strobe) begin
        if (rsp_valid) begin
          tx_data   <= {4'h0, GBT_RDRSP, 4'h0, rsp_addr, 32'd0, rsp_data};
          tx_isdata <= 1'b1;
          if (take) begin
            if (nw == 2'd0) w0 <= in_data; else w1 <= in_data;
            nw <= nw + 1'b1;
          end
        end else if (nw != 2'd0) begin
          tx_data   <= {4'h0, GBT_DATA, 2'b00, nw, seq, w0, (nw == 2'd2) ? w1 : 32'd0};
          tx_isdata <= 1'b1;
          seq       <= seq + 1'b1;
          frames    <= frames + 1'b1;
          if (take) begin w0 <= in_data; nw <= 2'd1; end
          else      nw <= 2'd0;
        end else begin
          tx_data   <= '0;
          tx_isdata <= 1'b0;
          if (take) begin w0 <= in_data; nw <= 2'd1; end
        end
      end else if (take) begin
        if (nw == 2'd0) w0 <= in_data; else w1 <= in_data;
        nw <= nw + 1'b1;
      end
    end
  end

  a_nw_max: assert property (@(posedge clk) disable iff (!rst_n) nw <= 2'd2);
endmodule

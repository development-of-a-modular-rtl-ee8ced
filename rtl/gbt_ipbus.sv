// gbt_ipbus: command path of the GBT optical link.
//
// Commands from the host travel down the optical link inside the 80-bit user
// field of GBT frames and are turned here into accesses on the firmware's
// register bus (the "IP bus" of the GBT side). A received frame with
// rx_isdata high and type GBT_WRITE or GBT_READ (layout in caribou_pkg:
// [79:76] type, [71:64] register index, [31:0] write data) starts an access
// that is held until the command decoder acknowledges it. For a read, the
// index and the read data are then offered to the uplink packer
// (rsp_valid/rsp_ready) and go back to the host in a read-response frame.
// Frames of other types are ignored. A command arriving while the previous
// one is still in progress is dropped and counted in lost. The frame layout
// and one-outstanding-command rule are this design's choices; the paper only
// names a custom-designed IP bus.
module gbt_ipbus
  import caribou_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_strobe,
  input  logic [83:0] rx_data,
  input  logic        rx_isdata,
  output reg_req_t    req,
  input  reg_rsp_t    rsp,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output logic [7:0]  rsp_addr,
  output logic [31:0] rsp_data,
  output logic [15:0] lost
);
  logic       is_cmd;
  gbt_type_e  rx_type;

  assign rx_type = gbt_type_e'(rx_data[79:76]);
  assign is_cmd  = rx_strobe && rx_isdata && (rx_type == GBT_WRITE || rx_type == GBT_READ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req <= '0; rsp_valid <= 1'b0; rsp_addr <= '0; rsp_data <= '0; lost <= '0;
    end else begin
      if (req.valid && rsp.ack) begin
        req.valid <= 1'b0;
        if (!req.we) begin
          rsp_valid <= 1'b1;
          rsp_addr  <= req.addr;
          rsp_data  <= rsp.rdata;
        end
      end
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (is_cmd) begin
        if (req.valid || rsp_valid) begin
          if (lost != 16'hFFFF) lost <= lost + 1'b1;
        end else begin
          req.valid <= 1'b1;
          req.we    <= (rx_type == GBT_WRITE);
          req.addr  <= rx_data[71:64];
          req.wdata <= rx_data[31:0];
        end
      end
    end
  end
endmodule

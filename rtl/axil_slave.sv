// axil_slave: AXI4-Lite slave that turns register accesses of the processing
// system (the Ethernet path: host -> LwIP TCP server -> AXI4-Lite) into
// requests on the firmware's internal register bus.
//
// A write is started once both its address and its data have been received;
// a read once its address has. Only one access is in flight; a pending write
// goes before a pending read. The register index is address bits
// [ADDR_W+1:2] (32-bit registers, byte address); byte strobes are ignored,
// every write is a full word. The request is held until the command decoder
// acknowledges it, then the B or R response is returned with OKAY. AXI
// requires the slave's response signals to stay stable until accepted; this
// is asserted.
module axil_slave
  import caribou_pkg::*;
#(
  parameter int unsigned AXI_ADDR_W = 12
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave
  input  logic [AXI_ADDR_W-1:0] s_awaddr,
  input  logic                  s_awvalid,
  output logic                  s_awready,
  input  logic [31:0]           s_wdata,
  input  logic [3:0]            s_wstrb,
  input  logic                  s_wvalid,
  output logic                  s_wready,
  output logic [1:0]            s_bresp,
  output logic                  s_bvalid,
  input  logic                  s_bready,
  input  logic [AXI_ADDR_W-1:0] s_araddr,
  input  logic                  s_arvalid,
  output logic                  s_arready,
  output logic [31:0]           s_rdata,
  output logic [1:0]            s_rresp,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  // register bus master
  output reg_req_t              req,
  input  reg_rsp_t              rsp
);
  typedef enum logic [1:0] {A_IDLE, A_WRITE, A_READ, A_RESP} state_e;

  state_e                state;
  logic                  aw_have, w_have, ar_have;
  logic [AXI_ADDR_W-1:0] awaddr_q, araddr_q;
  logic [31:0]           wdata_q;

  assign s_awready = !aw_have;
  assign s_wready  = !w_have;
  assign s_arready = !ar_have;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_comb begin
    req = '0;
    if (state == A_WRITE) begin
      req.valid = 1'b1;
      req.we    = 1'b1;
      req.addr  = awaddr_q[ADDR_W+1:2];
      req.wdata = wdata_q;
    end else if (state == A_READ) begin
      req.valid = 1'b1;
      req.addr  = araddr_q[ADDR_W+1:2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; aw_have <= 1'b0; w_have <= 1'b0; ar_have <= 1'b0;
      awaddr_q <= '0; araddr_q <= '0; wdata_q <= '0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
    end else begin
      if (s_awvalid && s_awready) begin aw_have <= 1'b1; awaddr_q <= s_awaddr; end
      if (s_wvalid && s_wready)   begin w_have  <= 1'b1; wdata_q  <= s_wdata;  end
      if (s_arvalid && s_arready) begin ar_have <= 1'b1; araddr_q <= s_araddr; end
      unique case (state)
        A_IDLE:
          if (aw_have && w_have) state <= A_WRITE;
          else if (ar_have)      state <= A_READ;
        A_WRITE:
          if (rsp.ack) begin
            s_bvalid <= 1'b1;
            state    <= A_RESP;
          end
        A_READ:
          if (rsp.ack) begin
            s_rvalid <= 1'b1;
            s_rdata  <= rsp.rdata;
            state    <= A_RESP;
          end
        A_RESP: begin
          if (s_bvalid && s_bready) begin
            s_bvalid <= 1'b0; aw_have <= 1'b0; w_have <= 1'b0; state <= A_IDLE;
          end
          if (s_rvalid && s_rready) begin
            s_rvalid <= 1'b0; ar_have <= 1'b0; state <= A_IDLE;
          end
        end
      endcase
    end
  end

  // AXI: a response once offered stays offered, unchanged, until accepted
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule

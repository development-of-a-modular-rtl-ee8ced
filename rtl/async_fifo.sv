// async_fifo: dual-clock first-in first-out buffer for crossing from the
// ADC bit-clock domain into the system clock domain.
//
// Classic Gray-coded pointer design: each side keeps a binary pointer one bit
// wider than the index, converts it to Gray code and passes it through a
// two-flop synchronizer to the other side. full is computed in the write
// domain, empty in the read domain, both conservatively. Show-ahead read
// port: rdata is valid whenever empty is low. DEPTH must be a power of two.
module async_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         winc,
  input  logic [W-1:0] wdata,
  output logic         wfull,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         rinc,
  output logic [W-1:0] rdata,
  output logic         rempty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;
  logic [AW:0]  wbin_n, rbin_n, wgray_n, rgray_n;

  // write domain
  assign wbin_n  = wbin + (AW+1)'(winc && !wfull);
  assign wgray_n = (wbin_n >> 1) ^ wbin_n;

  always_ff @(posedge wclk) begin
    if (winc && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; wq1_rgray <= '0; wq2_rgray <= '0; wfull <= 1'b0;
    end else begin
      wbin      <= wbin_n;
      wgray     <= wgray_n;
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
      wfull     <= (wgray_n == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});
    end
  end

  // read domain
  assign rbin_n  = rbin + (AW+1)'(rinc && !rempty);
  assign rgray_n = (rbin_n >> 1) ^ rbin_n;
  assign rdata   = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; rq1_wgray <= '0; rq2_wgray <= '0; rempty <= 1'b1;
    end else begin
      rbin      <= rbin_n;
      rgray     <= rgray_n;
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
      rempty    <= (rgray_n == rq2_wgray);
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("async_fifo: DEPTH must be a power of two, at least 4");
endmodule

// adc_interface: receiver for the CaR board's multi-channel serial ADC.
//
// The CaR board carries a 40 MHz, 12-bit ADC with eight analog inputs. Such
// converters send each channel's samples on its own serial LVDS lane, with a
// frame clock (fco) that marks sample boundaries and a bit clock (dco): eight
// data lanes plus the two clocks are the block's ten LVDS inputs. The lane
// layout is this design's reading of "x10"; the paper gives only the ADC's
// rate, resolution and channel count.
//
// In the dco domain each lane is shifted into a BITS-wide register, MSB
// first. A rising edge of fco marks the first bit of a sample; when BITS bits
// have arrived, all LANES samples and a frame number are written as one entry
// into an asynchronous FIFO, if capture is enabled (enable is synchronized
// into the dco domain). One bit per dco cycle is modelled; at the real
// 480 Mbit/s per lane the FPGA's input DDR/SERDES primitives would feed the
// same logic with several bits per cycle. A frame that finds the FIFO full is
// dropped and counted.
//
// In the system clock domain each frame is unpacked into LANES 32-bit words
// {TAG_ADC, channel[3:0], frame[7:0], sample zero-extended to 16 bits},
// channel 0 first, on a valid/ready stream. frames counts frames delivered,
// drops the frames lost (both in the system domain).
//
// Rate: at 40 MS/s the eight channels make 320 M words/s, twice what one
// word per 160 MHz cycle can carry and far more than either host link. So
// the ADC is read in capture windows (enable) and, once the buffers are
// full, whole frames are dropped and counted; a frame is never split. How
// the original firmware reduces the ADC data is not described.
module adc_interface
  import caribou_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned BITS  = 12,
  parameter int unsigned FIFO_DEPTH = 8
) (
  // ADC side
  input  logic             adc_dco,
  input  logic             adc_fco,
  input  logic [LANES-1:0] adc_d,
  // system side
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [31:0]      out_data,
  output logic [31:0]      frames,
  output logic [15:0]      drops
);
  localparam int unsigned FW = LANES*BITS + 8;

  // ---------------- dco domain ----------------
  logic             arst_n_q1, arst_n;      // reset synchronized to dco
  logic             en_q1, en_q2;
  logic             fco_q;
  logic             seen;                    // a frame-clock edge has been seen since reset
  logic [BITS-1:0]  sh [LANES];
  logic [$clog2(BITS+1)-1:0] nbits;
  logic [7:0]       fnum;
  logic             fifo_wr, fifo_full;
  logic [FW-1:0]    fifo_din;
  logic             drop_tgl;                // toggles once per dropped frame
  logic             frame_done;

  always_ff @(posedge adc_dco or negedge rst_n) begin
    if (!rst_n) begin arst_n_q1 <= 1'b0; arst_n <= 1'b0; end
    else        begin arst_n_q1 <= 1'b1; arst_n <= arst_n_q1; end
  end

  // Bits received of the current sample, counting the one on the lanes now.
  // Frames are only formed after the first frame-clock edge., counting the one on the lanes now
  logic [$clog2(BITS+1)-1:0] nbits_n;
  assign nbits_n    = (adc_fco && !fco_q) ? ($clog2(BITS+1))'(1) : nbits + 1'b1;
  assign frame_done = seen && (nbits_n == ($clog2(BITS+1))'(BITS));

  always_comb begin
    fifo_din = '0;
    for (int l = 0; l < LANES; l++)
      fifo_din[l*BITS +: BITS] = {sh[l][BITS-2:0], adc_d[l]};
    fifo_din[LANES*BITS +: 8] = fnum;
  end
  assign fifo_wr = frame_done && en_q2 && !fifo_full;

  always_ff @(posedge adc_dco or negedge arst_n) begin
    if (!arst_n) begin
      en_q1 <= 1'b0; en_q2 <= 1'b0; fco_q <= 1'b0; seen <= 1'b0; nbits <= '0; fnum <= '0; drop_tgl <= 1'b0;
      for (int l = 0; l < LANES; l++) sh[l] <= '0;
    end else begin
      en_q1 <= enable;
      en_q2 <= en_q1;
      fco_q <= adc_fco;
      if (adc_fco && !fco_q) seen <= 1'b1;
      for (int l = 0; l < LANES; l++) sh[l] <= {sh[l][BITS-2:0], adc_d[l]};
      if (frame_done) begin
        nbits <= '0;
        if (en_q2) begin
          fnum <= fnum + 1'b1;
          if (fifo_full) drop_tgl <= ~drop_tgl;
        end
      end else if (nbits_n < ($clog2(BITS+1))'(BITS)) begin
        nbits <= nbits_n;
      end
    end
  end

  // ---------------- crossing ----------------
  logic          fifo_rd, fifo_empty;
  logic [FW-1:0] fifo_dout;

  async_fifo #(.W(FW), .DEPTH(FIFO_DEPTH)) u_cdc (
    .wclk(adc_dco), .wrst_n(arst_n), .winc(fifo_wr), .wdata(fifo_din), .wfull(fifo_full),
    .rclk(clk), .rrst_n(rst_n), .rinc(fifo_rd), .rdata(fifo_dout), .rempty(fifo_empty)
  );

  // ---------------- system domain ----------------
  logic [$clog2(LANES)-1:0] ch;
  logic [2:0]               drop_sync;

  assign out_valid = !fifo_empty;
  assign out_data  = {TAG_ADC, 4'(ch), fifo_dout[LANES*BITS +: 8],
                      16'(fifo_dout[ch*BITS +: BITS])};
  assign fifo_rd   = out_valid && out_ready && (ch == ($clog2(LANES))'(LANES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch <= '0; frames <= '0; drops <= '0; drop_sync <= '0;
    end else begin
      if (out_valid && out_ready) begin
        if (ch == ($clog2(LANES))'(LANES - 1)) begin
          ch     <= '0;
          frames <= frames + 1'b1;
        end else begin
          ch <= ch + 1'b1;
        end
      end
      drop_sync <= {drop_sync[1:0], drop_tgl};
      if (drop_sync[2] != drop_sync[1]) drops <= drops + 1'b1;
    end
  end

  initial assert (LANES >= 2 && LANES <= 16 && BITS >= 2 && BITS <= 16)
    else $error("adc_interface: LANES 2..16 and BITS 2..16 supported");
endmodule

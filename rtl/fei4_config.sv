// fei4_config: command and configuration link to the FE-I4B readout chip.
//
// FE-I4B receives its triggers, fast commands and register writes as a serial
// bit stream on one line, clocked by the 40 MHz command clock it is given on a
// second line; these are the two LVDS lines of the block. The host sends the
// command bits (already in FE-I4B's command format) as words of 1 to 32 bits
// (word_bits, 0 meaning 32; most significant of those bits first); this
// module serializes them back to back onto cmd_data with no gaps, and drives
// zeros between words, which the chip treats as no command.
//
// cmd_clk is the system clock divided by DIV (default 4: 40 MHz from
// 160 MHz), high for the first half of each period. cmd_data changes on the
// falling edge of cmd_clk so it is stable around the rising edge, where the
// chip samples it. A word offered on the valid/ready port is taken at the
// start of a command-clock period. busy is high while bits are still going
// out. The word-level interface and the clock phase are this design's
// choices; the paper names the module only.
module fei4_config #(
  parameter int unsigned DIV = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        word_valid,
  output logic        word_ready,
  input  logic [31:0] word_data,
  input  logic [5:0]  word_bits,
  output logic        busy,
  output logic        cmd_clk,
  output logic        cmd_data
);
  logic [$clog2(DIV)-1:0] div_cnt;
  logic [31:0] shreg;
  logic [5:0]  left;          // bits queued, the one on cmd_data included
  logic        fall;          // this cycle is the falling edge of cmd_clk

  assign fall       = (div_cnt == ($clog2(DIV))'(DIV/2 - 1));
  // a new word may be loaded when the last bit of the old one leaves at this edge
  assign word_ready = fall && (left <= 6'd1);
  assign busy       = (left != 6'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0; cmd_clk <= 1'b1; cmd_data <= 1'b0; shreg <= '0; left <= '0;
    end else begin
      div_cnt <= (div_cnt == ($clog2(DIV))'(DIV - 1)) ? '0 : div_cnt + 1'b1;
      if (div_cnt == ($clog2(DIV))'(DIV - 1)) cmd_clk <= 1'b1;
      if (fall) begin
        cmd_clk <= 1'b0;
        if (word_valid && left <= 6'd1) begin
          shreg    <= ((word_bits == 6'd0) ? word_data : word_data << (6'd32 - word_bits)) << 1;
          cmd_data <= (word_bits == 6'd0) ? word_data[31] : word_data[5'(word_bits - 6'd1)];
          left     <= (word_bits == 6'd0) ? 6'd32 : word_bits;
        end else if (left > 6'd1) begin
          cmd_data <= shreg[31];
          shreg    <= shreg << 1;
          left     <= left - 1'b1;
        end else begin
          cmd_data <= 1'b0;
          left     <= '0;
        end
      end
    end
  end

  initial assert (DIV >= 2 && DIV % 2 == 0) else $error("fei4_config: DIV must be even");
endmodule

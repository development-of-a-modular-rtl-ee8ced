// sensor_config: serial configuration port of the sensor under test.
//
// The pixel and global configuration of an HV-CMOS sensor such as AMS180v4
// is held in an on-chip shift register. This module drives it over the four
// lines the firmware has for the sensor: serial data (sin), two
// non-overlapping shift clocks (ck1, ck2) and a load strobe (ld) that copies
// the shifted bits into the configuration latches. That the four lines have
// these meanings, the two-phase clocking and MSB-first order are this design's
// choices; the paper states only that the module configures the sensor and
// uses four LVDS lines.
//
// Words arrive over a valid/ready port with the number of bits to take from
// each (bits 1..32, 0 meaning 32; the most significant of those bits goes
// first). Each bit takes four phases of DIV clock cycles: sin set, ck1 high,
// ck2 high, gap. A load request (load_req, a one-cycle pulse, accepted when
// idle) raises ld for two phases. busy is high while a word or a load is in
// progress.
module sensor_config #(
  parameter int unsigned DIV = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        word_valid,
  output logic        word_ready,
  input  logic [31:0] word_data,
  input  logic [5:0]  word_bits,
  input  logic        load_req,
  output logic        busy,
  output logic        sin,
  output logic        ck1,
  output logic        ck2,
  output logic        ld
);
  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_LOAD} state_e;

  state_e      state;
  logic [31:0] shreg;
  logic [5:0]  left;       // bits still to send, including the current one
  logic [1:0]  phase;
  logic [$clog2(DIV+1)-1:0] cnt;

  assign word_ready = (state == S_IDLE);
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; shreg <= '0; left <= '0; phase <= '0; cnt <= '0;
      sin <= 1'b0; ck1 <= 1'b0; ck2 <= 1'b0; ld <= 1'b0;
    end else begin
      if (cnt != '0) cnt <= cnt - 1'b1;
      unique case (state)
        S_IDLE: begin
          if (word_valid) begin
            // left-align the word so the first bit to send is bit 31
            shreg <= (word_bits == 6'd0) ? word_data : word_data << (6'd32 - word_bits);
            left  <= (word_bits == 6'd0) ? 6'd32 : word_bits;
            state <= S_SHIFT;
            phase <= '0;
            cnt   <= ($clog2(DIV+1))'(DIV - 1);
            sin   <= (word_bits == 6'd0) ? word_data[31] : word_data[5'(word_bits - 6'd1)];
          end else if (load_req) begin
            state <= S_LOAD;
            phase <= '0;
            cnt   <= ($clog2(DIV+1))'(DIV - 1);
            ld    <= 1'b1;
          end
        end
        S_SHIFT: if (cnt == '0) begin
          cnt   <= ($clog2(DIV+1))'(DIV - 1);
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: ck1 <= 1'b1;
            2'd1: begin ck1 <= 1'b0; ck2 <= 1'b1; end
            2'd2: ck2 <= 1'b0;
            2'd3: begin
              if (left == 6'd1) begin
                state <= S_IDLE;
                sin   <= 1'b0;
              end else begin
                shreg <= shreg << 1;
                sin   <= shreg[30];
              end
              left <= left - 1'b1;
            end
          endcase
        end
        S_LOAD: if (cnt == '0) begin
          cnt   <= ($clog2(DIV+1))'(DIV - 1);
          phase <= phase + 1'b1;
          if (phase == 2'd1) begin
            ld    <= 1'b0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

// i2c_master: byte-level I2C bus master of the central interface board.
//
// Over this bus the firmware reaches the CaR board's INA226 current and
// voltage monitors, its bias-voltage and power-rail settings and, through an
// I2C-to-SPI bridge, the configuration registers of the ADC. The host builds
// each transaction from commands, one byte per command: a command may start
// with a (repeated) START condition, then either writes the byte and samples
// the slave's acknowledge, or reads a byte and sends ACK/NACK, and may end
// with a STOP condition. This is the usual split of I2C masters into a byte
// engine driven by software; the paper gives only the block's purpose.
//
// Every bus phase lasts DIV clock cycles and one bit takes four phases, so
// the SCL frequency is f_clk / (4*DIV); the default DIV = 400 gives 100 kHz
// from a 160 MHz clock. Lines are open drain: scl_oe / sda_oe high pull the
// line low, the differential I2C buffers of the adapter cards carry them. A
// slave may stretch the clock: a phase that releases SCL waits until scl_i
// reads high. cmd_ready is high when idle; done pulses for one cycle when
// the command completes, with rx_data and rx_nack (slave NACK on a write)
// valid from then until the next command.
module i2c_master #(
  parameter int unsigned DIV = 400
) (
  input  logic       clk,
  input  logic       rst_n,
  // command
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  logic       cmd_start,
  input  logic       cmd_stop,
  input  logic       cmd_read,
  input  logic       cmd_write,
  input  logic       cmd_nack,     // on a read: send NACK (last byte) instead of ACK
  input  logic [7:0] cmd_data,
  output logic       done,
  output logic [7:0] rx_data,
  output logic       rx_nack,
  // bus
  output logic       scl_oe,
  output logic       sda_oe,
  input  logic       scl_i,
  input  logic       sda_i
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_BIT, S_STOP} state_e;

  state_e          state;
  logic [1:0]      phase;
  logic [$clog2(DIV+1)-1:0] cnt;
  logic [3:0]      bitn;        // 0..7 data bits, 8 = acknowledge bit
  logic            c_stop, c_read, c_write, c_nack;
  logic [7:0]      shreg;
  logic            tick;

  assign cmd_ready = (state == S_IDLE);
  // a phase ends when its count expires; a phase with SCL released also waits for SCL high
  assign tick = (cnt == '0) && !(scl_oe == 1'b0 && scl_i == 1'b0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= '0; cnt <= '0; bitn <= '0;
      {c_stop, c_read, c_write, c_nack} <= '0;
      shreg <= '0; rx_data <= '0; rx_nack <= 1'b0; done <= 1'b0;
      scl_oe <= 1'b0; sda_oe <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cnt != '0) cnt <= cnt - 1'b1;
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            {c_stop, c_read, c_write, c_nack} <= {cmd_stop, cmd_read, cmd_write, cmd_nack};
            shreg <= cmd_data;
            phase <= '0;
            bitn  <= '0;
            cnt   <= ($clog2(DIV+1))'(DIV - 1);
            if (cmd_start)                  state <= S_START;
            else if (cmd_read || cmd_write) state <= S_BIT;
            else if (cmd_stop)              state <= S_STOP;
            else                            done  <= 1'b1;
            // first phase of the chosen sequence
            if (cmd_start)                  sda_oe <= 1'b0;
            else if (cmd_read || cmd_write) sda_oe <= cmd_write ? !cmd_data[7] : 1'b0;
            else if (cmd_stop)              sda_oe <= 1'b1;
          end
        end
        // START: SDA released with SCL low, SCL released, SDA pulled, SCL pulled
        S_START: if (tick) begin
          cnt   <= ($clog2(DIV+1))'(DIV - 1);
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: scl_oe <= 1'b0;
            2'd1: sda_oe <= 1'b1;
            2'd2: scl_oe <= 1'b1;
            2'd3: begin
              phase <= '0;
              if (c_read || c_write) begin
                state  <= S_BIT;
                sda_oe <= c_write ? !shreg[7] : 1'b0;
              end else if (c_stop) begin
                state  <= S_STOP;
                sda_oe <= 1'b1;
              end else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end
          endcase
        end
        // one bit: SDA set with SCL low, SCL released, SCL high (sample at end), SCL pulled
        S_BIT: if (tick) begin
          cnt   <= ($clog2(DIV+1))'(DIV - 1);
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: scl_oe <= 1'b0;
            2'd1: ;
            2'd2: begin
              scl_oe <= 1'b1;
              if (bitn == 4'd8) begin
                if (c_write) rx_nack <= sda_i;
              end else begin
                shreg <= {shreg[6:0], sda_i};
              end
            end
            2'd3: begin
              phase <= '0;
              if (bitn == 4'd8) begin
                if (c_read) rx_data <= shreg;
                if (c_stop) begin
                  state  <= S_STOP;
                  sda_oe <= 1'b1;
                end else begin
                  state  <= S_IDLE;
                  sda_oe <= 1'b0;
                  done   <= 1'b1;
                end
              end else begin
                bitn <= bitn + 1'b1;
                if (bitn == 4'd7) sda_oe <= c_read ? !c_nack : 1'b0;   // ACK bit
                else              sda_oe <= c_write ? !shreg[7] : 1'b0;
              end
            end
          endcase
        end
        // STOP: SDA pulled with SCL low, SCL released, SDA released, bus free time
        S_STOP: if (tick) begin
          cnt   <= ($clog2(DIV+1))'(DIV - 1);
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: scl_oe <= 1'b0;
            2'd1: sda_oe <= 1'b0;
            2'd2: ;
            2'd3: begin
              phase <= '0;
              state <= S_IDLE;
              done  <= 1'b1;
            end
          endcase
        end
      endcase
    end
  end
endmodule

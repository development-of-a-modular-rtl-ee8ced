// i2c_slave_model: behavioural I2C slave for testbenches (not synthesizable).
//
// Samples the wired-AND bus each clock. Acknowledges its 7-bit address ADDR,
// stores written bytes in wr_log, and on reads returns the bytes of rd_vals
// in turn. sda_drv = 1 pulls SDA low.
module i2c_slave_model #(
  parameter logic [6:0] ADDR = 7'h40
) (
  input  logic clk,
  input  logic rst_n,
  input  logic scl,
  input  logic sda,
  output logic sda_drv
);
  logic prev_scl = 1, prev_sda = 1;
  int   st = 0, bitcnt = 0, rd_idx = 0;
  logic [7:0] sbyte = 0, tx = 0;
  logic rw = 0;
  logic [7:0] wr_log [$];
  logic [7:0] rd_vals [4] = '{8'h12, 8'h34, 8'h56, 8'h78};

  always @(posedge clk) begin
    if (!rst_n) sda_drv <= 0;
    else begin
      prev_scl <= scl; prev_sda <= sda;
      if (scl && prev_scl && prev_sda && !sda) begin st <= 1; bitcnt <= 0; sbyte <= 0; end
      else if (scl && prev_scl && !prev_sda && sda) begin st <= 0; sda_drv <= 0; end
      else if (scl && !prev_scl) begin
        if (bitcnt < 8) begin sbyte <= {sbyte[6:0], sda}; bitcnt <= bitcnt + 1; end
        else if (bitcnt == 8) begin bitcnt <= 9; if (st == 3 && sda) st <= 4; end
      end else if (!scl && prev_scl) begin
        if (bitcnt == 8) begin
          if (st == 1) begin
            if (sbyte[7:1] == ADDR) begin sda_drv <= 1; rw <= sbyte[0]; end else st <= 4;
          end else if (st == 2) begin wr_log.push_back(sbyte); sda_drv <= 1; end
          else sda_drv <= 0;
        end else if (bitcnt == 9) begin
          bitcnt <= 0; sbyte <= 0;
          if ((st == 1 && rw) || st == 3) begin
            st <= 3; tx = rd_vals[rd_idx % 4]; rd_idx <= rd_idx + 1; sda_drv <= !tx[7];
          end else begin
            if (st == 1) st <= 2;
            sda_drv <= 0;
          end
        end else if (st == 3 && bitcnt >= 1 && bitcnt <= 7) sda_drv <= !tx[7 - bitcnt];
      end
    end
  end
endmodule

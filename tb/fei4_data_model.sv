// fei4_data_model: behavioural model of the FE-I4B data output (testbench
// only, not synthesizable).
//
// Sends 8b/10b symbols one bit per clock, bit 'a' first, keeping the running
// disparity. The test calls put_k / put_d / put_raw to queue symbols (raw
// 10-bit symbols can be invalid codes); when the queue is empty the model
// sends the FE-I4B idle symbol K.28.1. Before start_bits random line bits
// have gone out the line carries noise, so the receiver must find the
// symbol boundary by itself.
module fei4_data_model #(
  parameter int START_BITS = 37
) (
  input  logic clk,
  input  logic rst_n,
  output logic dout
);
  logic [10:0] q [$];     // {raw, k, byte} or {1, 10-bit raw}
  logic        rd_pos = 0;  // running disparity, 0 = negative
  logic [9:0]  cur = 0;
  int          bitn = 10, pre = 0;

  // 5b/6b codes for running disparity negative, abcdei with a in bit 5
  function automatic logic [5:0] code6(input logic [4:0] x);
    case (x)
      0: return 6'b100111;  1: return 6'b011101;  2: return 6'b101101;  3: return 6'b110001;
      4: return 6'b110101;  5: return 6'b101001;  6: return 6'b011001;  7: return 6'b111000;
      8: return 6'b111001;  9: return 6'b100101; 10: return 6'b010101; 11: return 6'b110100;
     12: return 6'b001101; 13: return 6'b101100; 14: return 6'b011100; 15: return 6'b010111;
     16: return 6'b011011; 17: return 6'b100011; 18: return 6'b010011; 19: return 6'b110010;
     20: return 6'b001011; 21: return 6'b101010; 22: return 6'b011010; 23: return 6'b111010;
     24: return 6'b110011; 25: return 6'b100110; 26: return 6'b010110; 27: return 6'b110110;
     28: return 6'b001110; 29: return 6'b101110; 30: return 6'b011110; default: return 6'b101011;
    endcase
  endfunction

  // 3b/4b codes for running disparity negative, fghj with f in bit 3
  function automatic logic [3:0] code4(input logic [2:0] y);
    case (y)
      0: return 4'b1011; 1: return 4'b1001; 2: return 4'b0101; 3: return 4'b1100;
      4: return 4'b1101; 5: return 4'b1010; 6: return 4'b0110; default: return 4'b1110;
    endcase
  endfunction

  function automatic int ones(input logic [9:0] v, input int n);
    int c = 0;
    for (int i = 0; i < n; i++) c += v[i];
    return c;
  endfunction

  function automatic logic [9:0] encode(input logic k, input logic [7:0] b);
    logic [5:0] s6; logic [3:0] s4; logic [4:0] x; logic [2:0] y;
    x = b[4:0]; y = b[7:5];
    if (k) begin  // only K.28.y used here
      logic [9:0] neg;
      logic [3:0] k4 [8] = '{4'b0100, 4'b1001, 4'b0101, 4'b0011, 4'b0010, 4'b1010, 4'b0110, 4'b1000};
      neg = {6'b001111, k4[y]};
      return rd_pos ? ~neg : neg;
    end
    s6 = code6(x);
    if (rd_pos && (ones(10'(s6), 6) != 3 || x == 7)) s6 = ~s6;
    // running disparity after the 6b block
    if (ones(10'(s6), 6) > 3) rd_pos = 1; else if (ones(10'(s6), 6) < 3) rd_pos = 0;
    s4 = code4(y);
    if (y == 7 && ((!rd_pos && (x == 17 || x == 18 || x == 20)) || (rd_pos && (x == 11 || x == 13 || x == 14))))
      s4 = 4'b0111;
    if (rd_pos && (ones(10'(s4), 4) != 2 || y == 3)) s4 = ~s4;
    if (ones(10'(s4), 4) > 2) rd_pos = 1; else if (ones(10'(s4), 4) < 2) rd_pos = 0;
    return {s6, s4};
  endfunction

  task automatic put_k(input logic [7:0] b); q.push_back({2'b00, 1'b1, b}); endtask
  task automatic put_d(input logic [7:0] b); q.push_back({2'b00, 1'b0, b}); endtask
  task automatic put_raw(input logic [9:0] s); q.push_back({1'b1, s}); endtask
  function automatic int pending(); return q.size(); endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      dout <= 0; bitn <= 10; pre <= 0; rd_pos = 0;
    end else if (pre < START_BITS) begin
      dout <= 1'($urandom);
      pre  <= pre + 1;
    end else begin
      if (bitn == 10) begin
        logic [10:0] e;
        logic [9:0]  s;
        if (q.size() != 0) e = q.pop_front(); else e = {2'b00, 1'b1, 8'h3C};
        if (e[10]) s = e[9:0];
        else begin
          s = encode(e[8], e[7:0]);
          if (e[8]) begin  // K.28.y: running disparity from the whole symbol
            if (ones(s, 10) > 5) rd_pos = 1; else if (ones(s, 10) < 5) rd_pos = 0;
          end
        end
        cur = s;
        dout <= s[9];
        bitn <= 1;
      end else begin
        dout <= cur[9 - bitn];
        bitn <= bitn + 1;
      end
    end
  end
endmodule

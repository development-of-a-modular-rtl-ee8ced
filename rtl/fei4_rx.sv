// fei4_rx: FE-I4B data interface.
//
// FE-I4B sends its hit data as one 160 Mbit/s serial stream, 8b/10b encoded.
// Following the paper, this module de-serializes the stream, aligns it to the
// 10-bit symbol boundaries, decodes 10b to 8b and extracts the data records.
//
// De-serializing: one line bit per system clock (160 MHz), first bit of each
// symbol ('a') ending up in bit 9. Recovering the bit phase of the incoming
// line (oversampling or an IDELAY scan) is left to the FPGA input logic
// in front of this module.
// Aligning: while unlocked every bit position is searched for the comma
// sequence (0011111 or 1100000 in bits a..g), which only K.28.1, K.28.5 and
// K.28.7 contain. A comma sets a candidate symbol boundary (a later comma
// elsewhere moves it); three commas on the same boundary declare lock, so a
// comma-like pattern in line noise does not hold the receiver on a wrong
// boundary. While locked the boundary is fixed (data after K.28.7 can form a
// false comma across symbols); a symbol that is not a valid code drops the
// lock, is counted in code_errors, and aborts the frame.
// Decoding: dec_8b10b gives byte, K flag and invalid-code flag. The running
// disparity is tracked here: each 6-bit and 4-bit sub-block must have the
// disparity the code allows at the current running disparity (unbalanced
// sub-blocks alternate; 111000/000111 and 1100/0011 are tied to one
// disparity each). While hunting and checking, the running disparity is
// taken from each comma symbol (001111... follows negative disparity); once
// locked, a disparity violation counts as a code error like an invalid code.
// Extracting: FE-I4B frames its output as K.28.7 (start of frame), a series
// of 24-bit records sent as three bytes MSB first, and K.28.5 (end of frame);
// K.28.1 fills idle time. Each complete record is output once as the word
// {TAG_FEI4, 4'h0, record}. An invalid code or an unexpected K symbol inside
// a frame aborts it; bytes of an incomplete record are discarded. The frame
// format and the K-codes are FE-I4B's (its manual), not given in the paper.
//
// rec_valid is a one-cycle pulse, at most once per 30 clock cycles; there is
// no back-pressure, the data buffer behind must take it. Latency from the
// last bit of a record on din to rec_valid is one clock cycle.
module fei4_rx
  import caribou_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        din,
  output logic        locked,
  output logic        rec_valid,
  output logic [31:0] rec_data,
  output logic [31:0] records,
  output logic [31:0] code_errors
);
  localparam logic [7:0] K28_1 = 8'h3C;   // idle
  localparam logic [7:0] K28_5 = 8'hBC;   // end of frame
  localparam logic [7:0] K28_7 = 8'hFC;   // start of frame

  logic [8:0]  sr;
  logic [9:0]  sr_n;
  logic [3:0]  bitcnt;
  logic        comma, on_boundary, sym_stb;
  logic [7:0]  dbyte;
  logic        dk, derr;
  logic        rd, rd_in, rd_6, rd_out, rd_err, sym_err;
  logic [2:0]  n6, n4;

  typedef enum logic [1:0] {L_HUNT, L_CHECK, L_LOCKED} lstate_e;
  lstate_e     lstate;
  logic [1:0]  ncomma;

  assign sr_n        = {sr[8:0], din};
  assign comma       = (sr_n[9:3] == 7'b0011111) || (sr_n[9:3] == 7'b1100000);
  assign on_boundary = (bitcnt == 4'd9);
  // while hunting or checking, any comma (re)defines the boundary
  assign sym_stb     = (lstate == L_LOCKED) ? on_boundary : (comma || (lstate == L_CHECK && on_boundary));
  assign locked      = (lstate == L_LOCKED);

  dec_8b10b u_dec (.sym(sr_n), .data(dbyte), .k(dk), .err(derr));

  // running disparity (1 = positive) before and after the symbol in sr_n
  assign n6    = 3'($countones(sr_n[9:4]));
  assign n4    = 3'($countones(sr_n[3:0]));
  assign rd_in = (lstate == L_LOCKED) ? rd : (sr_n[9:4] == 6'b110000);
  always_comb begin
    rd_err = 1'b0;
    rd_6   = rd_in;
    if (n6 == 3'd4)                   begin rd_err = rd_in;  rd_6 = 1'b1; end
    else if (n6 == 3'd2)              begin rd_err = !rd_in; rd_6 = 1'b0; end
    else if (sr_n[9:4] == 6'b111000)  rd_err = rd_in;
    else if (sr_n[9:4] == 6'b000111)  rd_err = !rd_in;
    rd_out = rd_6;
    if (n4 == 3'd3)                   begin rd_err = rd_err || rd_6;  rd_out = 1'b1; end
    else if (n4 == 3'd1)              begin rd_err = rd_err || !rd_6; rd_out = 1'b0; end
    else if (sr_n[3:0] == 4'b1100)    rd_err = rd_err || rd_6;
    else if (sr_n[3:0] == 4'b0011)    rd_err = rd_err || !rd_6;
  end
  assign sym_err = derr || rd_err;

  typedef enum logic {F_IDLE, F_DATA} fstate_e;
  fstate_e     fstate;
  logic [1:0]  nbyte;
  logic [15:0] partial;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr <= '0; bitcnt <= '0; lstate <= L_HUNT; ncomma <= '0; rd <= 1'b0;
      fstate <= F_IDLE; nbyte <= '0; partial <= '0;
      rec_valid <= 1'b0; rec_data <= '0; records <= '0; code_errors <= '0;
    end else begin
      rec_valid <= 1'b0;
      sr <= sr_n[8:0];
      if (!enable) begin
        lstate <= L_HUNT;
        bitcnt <= '0;
        fstate <= F_IDLE;
      end else begin
        bitcnt <= (sym_stb || on_boundary) ? 4'd0 : bitcnt + 1'b1;
        if (sym_stb) rd <= rd_out;
        // ---- alignment: three commas on one boundary give lock ----
        if (sym_stb) begin
          unique case (lstate)
            L_HUNT: begin
              lstate <= L_CHECK;
              ncomma <= 2'd1;
            end
            L_CHECK: begin
              if (comma && !on_boundary) ncomma <= 2'd1;   // new boundary, start over
              else if (derr)             lstate <= L_HUNT;
              else if (comma) begin
                if (ncomma == 2'd2) lstate <= L_LOCKED;
                ncomma <= ncomma + 1'b1;
              end
            end
            L_LOCKED: if (sym_err) begin
              lstate      <= L_HUNT;
              code_errors <= code_errors + 1'b1;
            end
            default: lstate <= L_HUNT;
          endcase
        end
        // ---- record extraction, only while locked ----
        if (sym_stb && lstate == L_LOCKED) begin
          if (sym_err) begin
            fstate <= F_IDLE;
          end else if (dk) begin
            nbyte <= '0;
            if (dbyte == K28_7)      fstate <= F_DATA;   // start of frame
            else if (dbyte == K28_5) fstate <= F_IDLE;   // end of frame
            else if (dbyte != K28_1) fstate <= F_IDLE;   // any other K aborts the frame
          end else if (fstate == F_DATA) begin
            if (nbyte == 2'd2) begin
              nbyte     <= '0;
              rec_valid <= 1'b1;
              rec_data  <= {TAG_FEI4, 4'h0, partial, dbyte};
              records   <= records + 1'b1;
            end else begin
              nbyte   <= nbyte + 1'b1;
              partial <= {partial[7:0], dbyte};
            end
          end
        end
      end
    end
  end
endmodule

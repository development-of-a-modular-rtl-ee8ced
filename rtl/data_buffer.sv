// data_buffer: buffers the ADC and FE-I4B data streams and merges them into
// the one stream that goes out on the selected host link.
//
// Each source has its own FIFO of DEPTH 32-bit words (the depth is this
// design's choice; the paper does not size the buffer). The FE-I4B source
// cannot be held off, so a word that finds its FIFO full is dropped and
// counted in fei4_drops. The ADC source has a valid/ready port and is held
// off instead (its own front FIFO then drops whole frames). The output is a
// round-robin merge: when both FIFOs hold data, the source not served last
// goes next, so neither can starve the other. Words are not altered; their
// tags tell the sources apart. out_valid/out_ready follow the usual rule:
// a word moves in a cycle where both are high.
module data_buffer #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adc_valid,
  output logic        adc_ready,
  input  logic [31:0] adc_data,
  input  logic        fei4_valid,
  input  logic [31:0] fei4_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic [15:0] fei4_drops
);
  logic [31:0] a_dout, f_dout;
  logic        a_full, a_empty, f_full, f_empty;
  logic        a_rd, f_rd, pick_f, last_f;
  logic [$clog2(DEPTH):0] a_level, f_level;

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_adc (
    .clk, .rst_n, .wr_en(adc_valid), .din(adc_data), .rd_en(a_rd),
    .dout(a_dout), .full(a_full), .empty(a_empty), .level(a_level));

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fei4 (
    .clk, .rst_n, .wr_en(fei4_valid), .din(fei4_data), .rd_en(f_rd),
    .dout(f_dout), .full(f_full), .empty(f_empty), .level(f_level));

  assign adc_ready = !a_full;
  // FE-I4B goes next if it alone has data, or both have and ADC went last
  assign pick_f    = !f_empty && (a_empty || !last_f);
  assign out_valid = !a_empty || !f_empty;
  assign out_data  = pick_f ? f_dout : a_dout;
  assign a_rd      = out_valid && out_ready && !pick_f;
  assign f_rd      = out_valid && out_ready && pick_f;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_f     <= 1'b0;
      fei4_drops <= '0;
    end else begin
      if (out_valid && out_ready) last_f <= pick_f;
      if (fei4_valid && f_full && fei4_drops != 16'hFFFF) fei4_drops <= fei4_drops + 1'b1;
    end
  end

  // a stalled output word must stay put until taken
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid;
  endproperty
  a_out_stable: assert property (p_out_stable);
endmodule

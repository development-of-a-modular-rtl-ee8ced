// axi_hp_writer: moves the buffered data stream into DDR3 memory through an
// AXI-HP port of the processing system, for the Ethernet link.
//
// The software (LwIP server on the processor) and this writer share a ring
// buffer in DDR3: base and size (bytes, multiples of 4) are registers, and
// two free-running byte counters tell how far each side has come: wcount,
// bytes this writer has written and seen acknowledged, and rcount, bytes the
// software has sent on and freed. The writer never lets wcount - rcount
// exceed size, so data are held back rather than overwritten.
//
// Words are collected in a staging FIFO of 2*BURST entries. A burst is
// started when BURST words are waiting, or when at least one word has waited
// FLUSH_CYCLES cycles. Its length is the smallest of the words waiting,
// BURST, the room left before the next 4 KiB boundary (AXI bursts may not
// cross one), the room left before the end of the ring, and the free space in
// the ring. The writer then issues AW (INCR, 32-bit beats), streams the words
// on W with WLAST on the last, and waits for B before the next burst; wcount
// advances by the burst size when B arrives. BURST = 16 is the longest burst
// the AXI3-based HP ports accept. The ring protocol, burst policy and 32-bit
// port width are this design's choices; the paper states only that the data
// are written into DDR3 through AXI-HP.
module axi_hp_writer #(
  parameter int unsigned BURST        = 16,
  parameter int unsigned FLUSH_CYCLES = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // data stream
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  // ring buffer
  input  logic [31:0] base,
  input  logic [31:0] size,
  input  logic [31:0] rcount,
  output logic [31:0] wcount,
  // AXI write master
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready
);
  localparam int unsigned LW = $clog2(2*BURST) + 1;

  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} state_e;

  state_e      state;
  logic [31:0] offset;       // byte offset of the next write within the ring
  logic [31:0] used, room_ring, room_end, room_4k, nwords;
  logic [LW-1:0] level;
  logic        f_empty, f_full, f_rd;
  logic [31:0] f_dout;
  logic [$clog2(FLUSH_CYCLES+1)-1:0] wait_cnt;
  logic [8:0]  beats_left;
  logic [8:0]  blen;          // words in the current burst

  sync_fifo #(.W(32), .DEPTH(2*BURST)) u_stage (
    .clk, .rst_n, .wr_en(in_valid), .din(in_data), .rd_en(f_rd),
    .dout(f_dout), .full(f_full), .empty(f_empty), .level(level));

  assign in_ready = !f_full;

  // burst length, in words
  logic [31:0] m_awaddr_n;
  assign m_awaddr_n = base + offset;
  assign used      = wcount - rcount;
  assign room_ring = (size - used) >> 2;
  assign room_end  = (size - offset) >> 2;
  assign room_4k   = (32'h1000 - {20'd0, m_awaddr_n[11:0]}) >> 2;
  always_comb begin
    nwords = 32'(level);
    if (nwords > 32'(BURST)) nwords = 32'(BURST);
    if (nwords > room_4k)    nwords = room_4k;
    if (nwords > room_end)   nwords = room_end;
    if (nwords > room_ring)  nwords = room_ring;
  end

  assign m_awsize  = 3'd2;       // 4 bytes per beat
  assign m_awburst = 2'b01;      // INCR
  assign m_wstrb   = 4'hF;
  assign m_wdata   = f_dout;
  assign m_wvalid  = (state == W_DATA) && !f_empty;
  assign m_wlast   = (beats_left == 9'd1);
  assign m_bready  = (state == W_RESP);
  assign f_rd      = m_wvalid && m_wready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W_IDLE; offset <= '0; wcount <= '0; wait_cnt <= '0;
      beats_left <= '0; blen <= '0;
      m_awaddr <= '0; m_awlen <= '0; m_awvalid <= 1'b0;
    end else begin
      unique case (state)
        W_IDLE: begin
          if (f_empty) wait_cnt <= '0;
          else if (wait_cnt != ($clog2(FLUSH_CYCLES+1))'(FLUSH_CYCLES)) wait_cnt <= wait_cnt + 1'b1;
          if (nwords != 0 &&
              (32'(level) >= 32'(BURST) ||
               wait_cnt == ($clog2(FLUSH_CYCLES+1))'(FLUSH_CYCLES) ||
               nwords < 32'(level) && nwords != 32'(BURST))) begin
            m_awaddr   <= m_awaddr_n;
            m_awlen    <= 8'(nwords - 1);
            m_awvalid  <= 1'b1;
            blen       <= 9'(nwords);
            beats_left <= 9'(nwords);
            state      <= W_ADDR;
          end
        end
        W_ADDR:
          if (m_awready) begin
            m_awvalid <= 1'b0;
            state     <= W_DATA;
          end
        W_DATA:
          if (f_rd) begin
            beats_left <= beats_left - 1'b1;
            if (beats_left == 9'd1) state <= W_RESP;
          end
        W_RESP:
          if (m_bvalid) begin
            wcount   <= wcount + {21'd0, blen, 2'b00};
            offset   <= (offset + {21'd0, blen, 2'b00} >= size) ? '0 : offset + {21'd0, blen, 2'b00};
            wait_cnt <= '0;
            state    <= W_IDLE;
          end
      endcase
    end
  end

  // AXI: address and data held until accepted; no burst crosses 4 KiB
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  a_no_4k: assert property (@(posedge clk) disable iff (!rst_n)
                            m_awvalid |-> ({20'd0, m_awaddr[11:0]} + {22'd0, m_awlen, 2'b00}) < 32'h1000);
  a_bresp_ok: assert property (@(posedge clk) disable iff (!rst_n) m_bvalid && m_bready |-> m_bresp == 2'b00);
endmodule

// tb_gbt_packer: self-checking test of the GBT uplink packer.
//
// A strobe every 4 clocks stands for the 40 MHz frame clock of the GBT-FPGA
// core. The test streams numbered words with random gaps and read responses
// at random times, unpacks every frame on tx_strobe and checks: words come
// out complete and in order, at most two per frame, frames are numbered,
// read responses get their own frame with index and data, idle frames have
// tx_isdata low, and a continuous stream fills every frame with two words.
module tb_gbt_packer;
  import caribou_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, rsp_valid = 0, rsp_ready, tx_strobe = 0, tx_isdata;
  logic [31:0] in_data = 0, rsp_data = 0, frames;
  logic [7:0]  rsp_addr = 0;
  logic [83:0] tx_data;

  gbt_packer dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .rsp_valid, .rsp_ready,
    .rsp_addr, .rsp_data, .tx_strobe, .tx_data, .tx_isdata, .frames);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cnt = 0;
  always @(posedge clk) begin cnt <= (cnt + 1) % 4; tx_strobe <= (cnt == 3); end

  // frame checker: tx_data is the frame loaded at the previous strobe
  int next_word = 0, nrsp = 0, bad = 0, ndata = 0, nidle = 0, two = 0;
  logic [7:0] seq_exp = 0;
  logic [31:0] rsp_q [$];
  logic pstrobe = 0;
  always @(posedge clk) begin
    pstrobe <= tx_strobe;
    if (pstrobe && rst_n) begin
      if (!tx_isdata) begin
        nidle++;
        if (tx_data != 0) bad++;
      end else if (tx_data[79:76] == GBT_DATA) begin
        ndata++;
        if (tx_data[71:64] != seq_exp) bad++;
        seq_exp <= seq_exp + 1;
        if (tx_data[75:72] == 1 || tx_data[75:72] == 2) begin
          if (tx_data[63:32] != 32'(next_word)) bad++;
          if (tx_data[75:72] == 2) begin
            two++;
            if (tx_data[31:0] != 32'(next_word + 1)) bad++;
            next_word += 2;
          end else next_word += 1;
        end else bad++;
      end else if (tx_data[79:76] == GBT_RDRSP) begin
        nrsp++;
        if (rsp_q.size() == 0 || tx_data[31:0] != rsp_q.pop_front() || tx_data[71:64] != 8'h5C) bad++;
      end else bad++;
      if (tx_data[83:80] != 0) bad++;
    end
  end

  // handshakes are counted at the clock edge; the driver reacts at the next falling edge
  int sent = 0, rsp_taken = 0;
  always @(posedge clk) begin
    if (in_valid && in_ready)   sent++;
    if (rsp_valid && rsp_ready) rsp_taken++;
  end

  task automatic drive(input int cycles, input int idle_weight, input bit with_rsp);
    int seen = sent, rseen = rsp_taken;
    for (int i = 0; i < cycles; i++) begin
      @(negedge clk);
      if (!in_valid || sent != seen) in_valid = ($urandom_range(0, idle_weight) == 0);
      seen = sent;
      in_data = 32'(sent);
      if (rsp_valid && rsp_taken != rseen) rsp_valid = 0;
      rseen = rsp_taken;
      if (with_rsp && !rsp_valid && $urandom_range(0, 40) == 0) begin
        rsp_valid = 1; rsp_addr = 8'h5C; rsp_data = $urandom; rsp_q.push_back(rsp_data);
      end
    end
    // finish the words and responses on offer
    while (in_valid || rsp_valid) begin
      @(negedge clk);
      if (sent != seen) in_valid = 0;
      if (rsp_taken != rseen) rsp_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    drive(2000, 3, 1);
    repeat (20) @(posedge clk);
    check(bad == 0, $sformatf("frames well formed (%0d bad)", bad));
    check(next_word == sent, $sformatf("all words sent (%0d of %0d)", next_word, sent));
    check(nrsp > 10 && rsp_q.size() == 0, $sformatf("read responses sent (%0d)", nrsp));
    check(nidle > 0, "idle frames when there is no data");
    check(frames == 32'(ndata), "frame counter");
    // full rate: a word offered every clock gives two words in every frame
    begin
      int two0, d0;
      two0 = two; d0 = ndata;
      drive(400, 0, 0);
      repeat (20) @(posedge clk);
      check(ndata - d0 >= 99, $sformatf("a data frame every frame period (%0d)", ndata - d0));
      check(two - two0 >= 98, $sformatf("two words per frame at full rate (%0d)", two - two0));
      check(next_word == sent && bad == 0, "full-rate words intact");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

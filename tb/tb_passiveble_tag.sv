// tb_passiveble_tag -- end-to-end test of the tag in a simulated BLE
// connection, at the design's default parameters.
//
// For each connection event the testbench plays the excitation source: it
// hops to the next data channel (channel selection algorithm #1, hop 7),
// builds the pre-modulated excitation packet for the addressed tag (tag
// address in the Access Address, the tag packet's preamble/AA/header in the
// first payload bytes, whitening and the CRC_Init share of the CRC after
// them) and turns its symbol changes into comparator pulses (3-cycle pulses,
// 3 cycles after each change, +/-1 cycle jitter, random noise pulses in
// front). It plays the commodity receiver: from rf_sw it measures the phase
// the tag adds in every symbol, XORs that with the excitation symbol (the
// over-the-air XOR), de-whitens with the channel's sequence and checks
// preamble, Access Address, header, payload and CRC against CRC_Init.
// Events addressed to another tag must leave the switch idle. A final event
// is an advertising packet (channel 37, Access Address 0x8E89BED6, CRC_Init
// 0x555555), which the paper lets the tag send the same way. It counts
// wake-ups, activations, rejections, LE 1M and LE 2M packets, channels used,
// empty and largest (241 / 240-byte) payloads, noise bursts and the sync-circuit switch-off;
// a mechanism that never happened is a failure.
module tb_passiveble_tag;
  import pble_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic phy_2m, comp_in, wr_en;
  logic [3:0] tag_id, rx_addr;
  logic [7:0] payload_len, wr_addr, wr_data;
  logic rf_sw, sync_en, wake, activated, tx_busy, tx_done;
  logic [2:0] field;
  int checks = 0, failures = 0;
  int cyc = 0, since = 0;
  logic rf_q = 0;
  int n_wake = 0, n_act = 0, n_done = 0, n_ok = 0, n_reject = 0, n_1m = 0, n_2m = 0;
  int n_adv = 0, n_empty = 0, n_max = 0, n_noise = 0, n_sync_off = 0, busy_cycles = 0;
  bit chan_used [40];
  localparam int FE_DELAY = 3;

  passiveble_tag dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rf_q <= rf_sw;
    if (rf_sw && !rf_q) since <= 0; else since <= since + 1;
    if (wake && rst_n) n_wake++;
    if (activated && rst_n) n_act++;
    if (tx_done && rst_n) n_done++;
    if (tx_busy) busy_cycles++;
    if (tx_busy && !sync_en) n_sync_off++;
  end

  initial begin
    #400000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  task automatic load_payload(input byte unsigned p[$]);
    foreach (p[i]) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(i); wr_data = p[i];
    end
    @(negedge clk); wr_en = 0;
  endtask

  // One connection event. own: the packet addresses this tag.
  task automatic event_(input bit m2, input int chan, input int len, input bit own,
                        input bit noise, input bit adv = 0);
    exc_pkt_t  ep;
    bitq_t     w, rx;
    byte unsigned pay[$];
    bit [23:0] crc_init = adv ? 24'h555555 : 24'($urandom);
    bit [31:0] tag_aa = adv ? 32'h8E89BED6 : $urandom;
    int        sps = m2 ? 32 : 64, lead = 800, id, bad;
    int        wake0 = n_wake, act0 = n_act, done0 = n_done, busy0 = busy_cycles;
    int        wake_t = -1, t0;
    real       period = 65536.0 / 6144.0, ph [$];
    id = own ? int'(tag_id) : int'((tag_id + 1 + $urandom % 15) % 16);
    for (int i = 0; i < len; i++) pay.push_back(8'($urandom));
    load_payload(pay);
    phy_2m = m2; payload_len = 8'(len);
    ep = build_excitation(m2, id, 8, chan, crc_init, tag_aa, len, $urandom);
    w = comp_wave(ep.sym, sps, lead, FE_DELAY, 1, 3);
    if (noise) begin
      // Isolated noise pulses well before the preamble.
      for (int k = 0; k < 5; k++) begin
        int t = 40 + int'($urandom % (lead - 3 * 64 - 50));
        w[t] = 1; w[t+1] = 1;
      end
    end
    @(negedge clk);
    t0 = cyc;
    foreach (w[t]) begin
      comp_in = w[t];
      if (wake && wake_t < 0) wake_t = cyc - t0;
      if (t >= lead + 3 && (t - lead - 3) % sps == 0) begin
        int i = (t - lead - 3) / sps;
        if (i >= ep.tag_start && i <= ep.tag_end) ph.push_back(real'(since) / period);
      end
      @(negedge clk);
    end
    comp_in = 0;
    repeat (4) @(negedge clk);
    if (noise) n_noise++;
    // Another tag's payload is random data and may look like a preamble
    // now and then; the tag's own packet gives exactly one wake-up.
    chk(own ? (n_wake == wake0 + 1) : (n_wake >= wake0 + 1), "wake-up on the preamble");
    chk(wake_t >= 0 && wake_t - lead <= (m2 ? 1 : 1) * 666, "wake-up within 10.4 us of packet start");
    if (own) begin
      int nsym = ep.tag_end - ep.tag_start;
      chk(n_act == act0 + 1 && n_done == done0 + 1, "activated and finished");
      chk(busy_cycles - busy0 >= nsym * sps - 2 && busy_cycles - busy0 <= nsym * sps + 2,
          "shift on for exactly the tag packet");
      chk(ph.size() == nsym + 1, "phase samples");
      // Tag phase per symbol: the shift starts at phase 0 (1/2 period before
      // the first rising edge of the square wave).
      ph[0] = -0.5;
      for (int k = 0; k < nsym; k++) begin
        real d = ph[k] - ph[k+1];
        bit tb_bit;
        d = d - $floor(d);
        tb_bit = (d > 0.25 && d < 0.75);
        rx.push_back(ep.sym[ep.tag_start + k] ^ tb_bit);
      end
      checks++;
      if (receiver_ok(m2, rx, chan, crc_init, tag_aa, pay, bad)) begin
        n_ok++;
        if (m2) n_2m++; else n_1m++;
        if (adv) n_adv++;
        if (len == 0) n_empty++;
        if (len == (m2 ? 240 : 241)) n_max++;
        chan_used[chan] = 1;
      end else begin
        failures++;
        $display("FAIL receiver: %0d bad bits (%s, ch %0d, len %0d)", bad, m2 ? "2M" : "1M", chan, len);
      end
    end else begin
      chk(n_act == act0 && n_done == done0 && busy_cycles == busy0, "other tag's packet ignored");
      n_reject++;
    end
  endtask

  initial begin
    automatic int chan = 0, nch = 0;
    comp_in = 0; wr_en = 0; wr_addr = 0; wr_data = 0; phy_2m = 0; payload_len = 0;
    tag_id = 4'd9;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // A connection: events hop over the data channels; 1M then 2M.
    for (int e = 0; e < 16; e++) begin
      automatic bit m2 = (e >= 8);
      automatic int len = (e % 8 == 0) ? 0 : (e % 8 == 3) ? (m2 ? 240 : 241) : 1 + int'($urandom % 40);
      automatic bit own = (e % 8 != 5);
      chan = (chan + 7) % 37;
      event_(m2, chan, len, own, e % 4 == 1);
    end
    // An advertising packet from the tag on channel 37 (fixed Access Address
    // and CRC_Init; the tag logic is the same, only the source's share changes).
    event_(1'b0, 37, 20, 1'b1, 1'b0, 1'b1);
    // Noise alone never wakes the tag.
    begin
      automatic int w0 = n_wake;
      for (int t = 0; t < 4000; t++) begin
        @(negedge clk); comp_in = ($urandom % 300) == 0;
      end
      comp_in = 0;
      repeat (4) @(negedge clk);
      chk(n_wake == w0, "noise alone gives no wake-up");
    end
    for (int c = 0; c < 37; c++) nch += chan_used[c];
    $display("wake %0d activate %0d done %0d good %0d (1M %0d, 2M %0d) reject %0d channels %0d empty %0d max %0d noise %0d sync-off cycles %0d",
             n_wake, n_act, n_done, n_ok, n_1m, n_2m, n_reject, nch, n_empty, n_max, n_noise, n_sync_off);
    chk(n_1m > 0, "LE 1M packet");
    chk(n_2m > 0, "LE 2M packet");
    chk(n_reject > 0, "address rejection");
    chk(n_adv > 0, "advertising packet on channel 37");
    chk(nch > 1, "frequency hops");
    chk(n_empty > 0, "empty payload");
    chk(n_max > 0, "largest payload (241 bytes in LE 1M, 240 in LE 2M)");
    chk(n_noise > 0, "noise before preamble");
    chk(n_sync_off > 0, "sync circuit off in uplink");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tx_sequencer -- runs the field state machine through whole packets in
// both PHY modes, with payloads of 0, 1, 13 and 241 bytes (and a length
// above the PHY's largest payload, 241 in LE 1M and 240 in LE 2M, which is
// clamped), and through packets whose address does not
// match. Against cycle numbers worked out from the BLE field sizes it checks:
// the 32 slot_end strobes (half a symbol after each expected edge), the
// start of the frequency shift at the boundary of symbol 48, the tag bit of
// every symbol (0 for the 7/8 re-allocated bytes, the buffer bits LSB first,
// then the CRC bits), the bits fed to the pre-CRC, the 24 CRC shifts, the
// cycle of tx_done, the 24-symbol hold-off after it and the wake-up circuit
// enable.
module tb_tx_sequencer;
  import pble_pkg::*;
  logic clk = 0, rst_n = 0;
  phy_e phy;
  logic [7:0] payload_len, rd_data;
  logic sync_pulse, addr_done, addr_match, crc_bit;
  logic hunt, slot_end, sym_start, crc_clear, crc_in_valid, crc_in_bit, crc_shift;
  logic tx_en, tag_bit, sync_en, activated, tx_done;
  logic [7:0] rd_addr;
  field_e field;
  byte unsigned mem [256];
  int checks = 0, failures = 0, cyc = 0;
  int n_tx = 0, n_abort = 0, n_clamp = 0;
  localparam int LAT = 6;

  tx_sequencer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin cyc <= cyc + 1; rd_data <= mem[rd_addr]; end

  initial begin
    #60000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  task automatic packet(input phy_e m, input int len_in, input bit match_it);
    int sps = (m == PHY_2M) ? 32 : 64;
    int len = (len_in > int'(max_payload(m))) ? int'(max_payload(m)) : len_in;
    int ts, nslot = 0, ncrc_in = 0, nshift = 0, s_end;
    int realloc = (m == PHY_2M) ? 64 : 56;
    bit crcpat [24];
    int ci = 0, done_cyc = 0;
    bit paybits [$];
    for (int i = 0; i < 256; i++) mem[i] = 8'($urandom);
    for (int i = 0; i < len; i++) for (int k = 0; k < 8; k++) paybits.push_back(mem[i][k]);
    for (int i = 0; i < 24; i++) crcpat[i] = bit'($urandom);
    phy = m; payload_len = 8'(len_in);
    s_end = 48 + realloc + 8 * len + 24;
    @(negedge clk);
    chk(hunt && sync_en, "idle before sync");
    sync_pulse = 1; ts = cyc;
    @(negedge clk); sync_pulse = 0;
    crc_bit = crcpat[0];
    // Walk cycle by cycle until the packet is over.
    for (int t = 1; t < (s_end + 2) * sps; t++) begin
      int ph = t % sps, p = t / sps;
      // Sample after the edge of cycle ts+t.
      if (slot_end) begin
        nslot++;
        chk(ph == sps / 2 - 1 && p == nslot, "slot_end position");
        if (nslot == 32) begin
          addr_done = 1; addr_match = match_it;
        end
      end
      if (crc_in_valid) begin
        chk(ncrc_in < paybits.size() && crc_in_bit == paybits[ncrc_in], "bit into pre-CRC");
        ncrc_in++;
      end
      if (crc_shift) begin nshift++; end
      @(negedge clk);
      addr_done = 0;
      if (crc_shift) ; // handled below
      if (nshift > ci && ci < 23) begin ci = nshift; crc_bit = crcpat[ci]; end
      if (!match_it && p == 33) break;
      // Mid-symbol check of the modulator inputs for symbol p (boundary at
      // phase sps-LAT of period p, registered one cycle later).
      if (ph == (sps - LAT + sps / 2) % sps && p >= 48 + (sps - LAT + sps / 2 >= sps ? 1 : 0)) begin
        int s = (sps - LAT + sps / 2 >= sps) ? p - 1 : p;
        if (s < 48) chk(!tx_en, "shift off before symbol 48");
        else if (s < 48 + realloc) chk(tx_en && !tag_bit, "re-allocated bytes: shift on, bit 0");
        else if (s < 48 + realloc + 8 * len) chk(tx_en && tag_bit == paybits[s - 48 - realloc], "payload bit");
        else if (s < s_end) chk(tx_en && tag_bit == crcpat[s - 48 - realloc - 8 * len], "CRC bit");
        if (s >= 33 && s < s_end) chk(!sync_en, "wake-up circuit off while active");
      end
      if (tx_done) begin
        done_cyc = cyc - 1;
        chk(match_it && cyc - 1 == ts + s_end * sps + (sps - LAT), "tx_done cycle");
      end
    end
    if (match_it) begin
      chk(nslot == 32, "32 slots");
      chk(ncrc_in == 8 * len, "payload bits into pre-CRC");
      chk(nshift == 24, "24 CRC shifts");
      chk(!hunt && !tx_en && sync_en, "standby, hunt held off for the dropped CRC");
      while (cyc < done_cyc + 24 * sps - 1) @(negedge clk);
      chk(!hunt, "hold-off lasts 24 symbols");
      repeat (3) @(negedge clk);
      chk(hunt, "hunting again after the hold-off");
      n_tx++;
      if (len_in > int'(max_payload(m))) n_clamp++;
    end else begin
      repeat (2) @(negedge clk);
      chk(hunt && !tx_en && sync_en, "mismatch returns to standby");
      n_abort++;
    end
  endtask

  initial begin
    phy = PHY_1M; payload_len = 0; sync_pulse = 0; addr_done = 0; addr_match = 0; crc_bit = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (mem[i]) mem[i] = 0;
    for (int mi = 0; mi < 2; mi++) begin
      automatic phy_e m = (mi != 0) ? PHY_2M : PHY_1M;
      packet(m, 0, 1);
      packet(m, 1, 1);
      packet(m, 13, 1);
      packet(m, 13, 0);
      packet(m, 241, 1);
    end
    packet(PHY_2M, 250, 1);
    $display("transmissions %0d aborts %0d clamps %0d", n_tx, n_abort, n_clamp);
    chk(n_tx > 0 && n_abort > 0 && n_clamp > 0, "every case ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

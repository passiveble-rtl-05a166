// tb_multi_tag -- several tags sharing one excitation source.
//
// Sixteen passiveble_tag instances at default parameters, with addresses
// 0..15, hear the same comparator pulse stream (in the field each tag has
// its own front end, but all see the same excitation packets). The
// testbench plays the excitation source for a sequence of connection
// events, each addressed to one tag in a shuffled order and alternating
// LE 1M / LE 2M on hopping channels. For every event it checks that exactly
// the addressed tag activates and switches, that no other tag turns its
// switch on, and that the receiver decodes the addressed tag's packet
// (phase measured from that tag's rf_sw, XORed with the excitation symbols,
// de-whitened, header/payload/CRC checked against CRC_Init).
// Timing: 64 MHz-equivalent clock (10 ns period in simulation time, only
// cycle counts matter); comparator pulses 3 cycles after each symbol change.
// Own choice: the one-event-per-tag polling order is this testbench's
// stand-in for the time-division access of a multi-tag deployment.
module tb_multi_tag;
  import pble_tb_pkg::*;
  localparam int NT = 16;
  localparam int FE_DELAY = 3;
  logic clk = 0, rst_n = 0;
  logic phy_2m = 0, comp_in = 0, wr_en = 0;
  logic [7:0] payload_len = 0, wr_addr = 0, wr_data = 0;
  logic [NT-1:0] rf_sw, sync_en, wake, activated, tx_busy, tx_done;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_act [NT];
  int n_busy [NT];
  int n_ok = 0, n_1m = 0, n_2m = 0, sel = 0, since = 0;
  logic rf_q = 0;

  for (genvar g = 0; g < NT; g++) begin : g_tag
    logic [3:0] rx_addr;
    logic [2:0] field;
    passiveble_tag dut (
      .clk, .rst_n, .phy_2m, .tag_id(4'(g)), .payload_len, .wr_en, .wr_addr, .wr_data,
      .comp_in, .rf_sw(rf_sw[g]), .sync_en(sync_en[g]), .wake(wake[g]),
      .activated(activated[g]), .tx_busy(tx_busy[g]), .tx_done(tx_done[g]),
      .rx_addr, .field
    );
  end

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rf_q <= rf_sw[sel];
    if (rf_sw[sel] && !rf_q) since <= 0; else since <= since + 1;
    if (rst_n)
      for (int i = 0; i < NT; i++) begin
        if (activated[i]) n_act[i]++;
        if (tx_busy[i]) n_busy[i]++;
      end
  end

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // All tags share the buffer write bus; every tag gets the same payload,
  // only the addressed one sends it.
  task automatic load_payload(input byte unsigned p[$]);
    foreach (p[i]) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(i); wr_data = p[i];
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic poll(input int id, input bit m2, input int chan, input int len);
    exc_pkt_t  ep;
    bitq_t     w, rx;
    byte unsigned pay[$];
    bit [23:0] crc_init = 24'($urandom);
    bit [31:0] tag_aa = $urandom;
    int        sps = m2 ? 32 : 64, lead = 300, bad, nsym;
    int        act0 [NT];
    int        busy0 [NT];
    real       period = 65536.0 / 6144.0, ph [$];
    act0 = n_act; busy0 = n_busy;
    for (int i = 0; i < len; i++) pay.push_back(8'($urandom));
    load_payload(pay);
    phy_2m = m2; payload_len = 8'(len); sel = id;
    ep = build_excitation(m2, id, 8, chan, crc_init, tag_aa, len, $urandom);
    w = comp_wave(ep.sym, sps, lead, FE_DELAY, 1, 3);
    @(negedge clk);
    foreach (w[t]) begin
      comp_in = w[t];
      if (t >= lead + 3 && (t - lead - 3) % sps == 0) begin
        int i = (t - lead - 3) / sps;
        if (i >= ep.tag_start && i <= ep.tag_end) ph.push_back(real'(since) / period);
      end
      @(negedge clk);
    end
    comp_in = 0;
    repeat (4) @(negedge clk);
    nsym = ep.tag_end - ep.tag_start;
    for (int i = 0; i < NT; i++) begin
      if (i == id) begin
        chk(n_act[i] == act0[i] + 1, $sformatf("tag %0d activated", i));
        chk(n_busy[i] - busy0[i] >= nsym * sps - 2 && n_busy[i] - busy0[i] <= nsym * sps + 2,
            $sformatf("tag %0d shift on for its packet", i));
      end else begin
        chk(n_act[i] == act0[i] && n_busy[i] == busy0[i], $sformatf("tag %0d silent", i));
      end
    end
    checks++;
    if (ph.size() == nsym + 1) begin
      ph[0] = -0.5;
      for (int k = 0; k < nsym; k++) begin
        real d = ph[k] - ph[k+1];
        d = d - $floor(d);
        rx.push_back(ep.sym[ep.tag_start + k] ^ (d > 0.25 && d < 0.75));
      end
    end
    if (ph.size() == nsym + 1 && receiver_ok(m2, rx, chan, crc_init, tag_aa, pay, bad)) begin
      n_ok++;
      if (m2) n_2m++; else n_1m++;
    end else begin
      failures++;
      $display("FAIL receiver for tag %0d (%0d phase samples, %0d bad bits)", id, ph.size(), bad);
    end
  endtask

  initial begin
    automatic int order [NT];
    automatic int chan = 3;
    for (int i = 0; i < NT; i++) begin n_act[i] = 0; n_busy[i] = 0; order[i] = i; end
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < NT; e++) begin
      chan = (chan + 11) % 37;
      poll(order[e], e % 2 == 1, chan, 1 + int'($urandom % 12));
    end
    $display("polled %0d tags: %0d packets decoded (1M %0d, 2M %0d)", NT, n_ok, n_1m, n_2m);
    chk(n_ok == NT, "every tag delivered one packet");
    chk(n_1m > 0 && n_2m > 0, "both PHYs used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

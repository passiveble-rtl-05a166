// tb_preamble_detector -- plays comparator pulse trains into the wake-up
// correlator. It checks that a full preamble (LE 1M and LE 2M) followed by
// an Access Address gives exactly one sync pulse, 3 cycles after the edge
// into the last preamble symbol, and so well inside the 10.4 us the paper
// measures from packet start to detection; that timing jitter of +/-2 cycles
// is tolerated; and that no sync comes from a preamble that is too short for
// the mode, from pulses at the wrong spacing, or while the hunt is disabled.
module tb_preamble_detector;
  import pble_pkg::*;
  import pble_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en, comp_in, edge_pulse, sync_pulse;
  phy_e phy;
  int checks = 0, failures = 0;
  int cyc = 0, nsync = 0, sync_cyc = -1;
  int n_wake = 0, n_reject = 0;

  preamble_detector dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (sync_pulse) begin nsync++; if (sync_cyc < 0) sync_cyc = cyc; end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Play a waveform; return the cycle count at its start.
  task automatic play(input bitq_t w, output int start);
    @(negedge clk);
    start = cyc;
    nsync = 0; sync_cyc = -1;
    foreach (w[t]) begin comp_in = w[t]; @(negedge clk); end
    comp_in = 0;
  endtask

  task automatic packet(input phy_e m, input int npre, input int jit, input bit expect_sync,
                        input bit enable, input int id = -1);
    bitq_t sym, aa, w;
    int sps = (m == PHY_2M) ? 32 : 64;
    int lead = 50, delay = 3, start;
    phy = m; en = enable;
    for (int i = 0; i < npre; i++) sym.push_back(bit'((npre - 1 - i) % 2));
    aa = addr_symbols((id < 0) ? $urandom % 16 : id, 8, 1'b0);
    foreach (aa[i]) sym.push_back(aa[i]);
    for (int i = 0; i < 40; i++) sym.push_back(bit'($urandom));
    w = comp_wave(sym, sps, lead, delay, jit, 3);
    play(w, start);
    checks++;
    if (expect_sync) begin
      // Edge into preamble symbol npre-1 at lead + (npre-1)*sps + delay.
      int want = start + lead + (npre - 1) * sps + delay + 3 + 1;  // +1: sampled one edge after it is driven
      if (nsync < 1) begin failures++; $display("FAIL no sync (npre=%0d jit=%0d)", npre, jit); end
      else begin
        n_wake++;
        checks++;
        if (jit == 0 && sync_cyc != want) begin
          failures++; $display("FAIL sync at %0d, want %0d", sync_cyc - start, want - start);
        end
        checks++;
        if (sync_cyc - start - lead > (m == PHY_2M ? 8 : 8) * 64 + 154) begin
          failures++; $display("FAIL detection later than 10.4 us after packet start");
        end
      end
    end else begin
      if (nsync != 0) begin failures++; $display("FAIL unexpected sync (npre=%0d en=%0d)", npre, enable); end
      else n_reject++;
    end
  endtask

  initial begin
    en = 1; comp_in = 0; phy = PHY_1M;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      packet(PHY_1M, 8, 0, 1, 1);
      packet(PHY_2M, 16, 0, 1, 1);
      packet(PHY_1M, 8, 2, 1, 1);
      packet(PHY_2M, 16, 2, 1, 1);
      packet(PHY_2M, 8, 0, 0, 1, 0);  // LE 1M-length preamble in LE 2M mode
      packet(PHY_1M, 8, 0, 0, 0);     // hunt disabled
    end
    // Pulses 1.5 symbols apart never form a preamble.
    begin
      bitq_t w;
      int start;
      phy = PHY_1M; en = 1;
      for (int t = 0; t < 20 * 96; t++) w.push_back(bit'((t % 96) < 3));
      play(w, start);
      checks++;
      if (nsync != 0) begin failures++; $display("FAIL sync on wrong spacing"); end
      else n_reject++;
    end
    $display("wake-ups %0d, rejections %0d", n_wake, n_reject);
    checks++;
    if (n_wake == 0 || n_reject == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

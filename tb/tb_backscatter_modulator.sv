// tb_backscatter_modulator -- drives random tag bits, one per symbol, in both
// PHY modes and measures the square wave on rf_sw: the number of rising edges
// per symbol run gives the shift frequency (6 MHz at 64 MHz clock, +pi per
// symbol when the bit is 1), and the phase of the wave at each symbol
// boundary, estimated from the time since the last rising edge, must advance
// by pi (mod 2pi) over a 1 symbol and by 0 over a 0 symbol. With tx_en low the
// switch must stay off.
module tb_backscatter_modulator;
  import pble_pkg::*;
  logic clk = 0, rst_n = 0;
  phy_e phy;
  logic tx_en, tag_bit, rf_sw;
  int checks = 0, failures = 0;
  int rises = 0, since = 0;
  logic rf_q = 0;
  real period = 65536.0 / 6144.0;

  backscatter_modulator dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    rf_q <= rf_sw;
    if (rf_sw && !rf_q) begin rises++; since <= 0; end
    else since <= since + 1;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_mode(phy_e m);
    int sps = (m == PHY_2M) ? 32 : 64;
    real ph_prev = 0.0, ph;
    int r0, want;
    bit bits [200];
    phy = m;
    @(negedge clk); tx_en = 0; tag_bit = 0;
    repeat (20) begin
      @(negedge clk);
      checks++;
      if (rf_sw !== 1'b0) begin failures++; $display("FAIL rf_sw active while disabled"); end
    end
    // Frequency: 100 symbols of 0, then 100 symbols of 1.
    for (int b = 0; b < 2; b++) begin
      tx_en = 1; tag_bit = b[0];
      repeat (sps) @(negedge clk);
      r0 = rises;
      repeat (100 * sps) @(negedge clk);
      checks++;
      want = (m == PHY_2M) ? (b ? 350 : 300) : (b ? 650 : 600);
      if ((rises - r0) < want - 1 || (rises - r0) > want + 1) begin
        failures++; $display("FAIL %s bit %0d: %0d rising edges in 100 symbols",
                             m == PHY_2M ? "2M" : "1M", b, rises - r0);
      end
      tx_en = 0; @(negedge clk);
    end
    // Phase per symbol.
    tx_en = 1; tag_bit = 0;
    repeat (3 * sps) @(negedge clk);
    for (int k = 0; k < 200; k++) bits[k] = bit'($urandom);
    for (int k = 0; k < 200; k++) begin
      tag_bit = bits[k];
      repeat (2) @(negedge clk);
      ph = real'(since) / period;
      if (k > 0) begin
        real d = (ph_prev - ph);        // phase advance beyond whole periods
        d = d - $floor(d);
        checks++;
        if ((d > 0.25 && d < 0.75) != bits[k-1]) begin
          failures++; $display("FAIL symbol %0d bit %0d phase advance %f", k - 1, bits[k-1], d);
        end
      end
      ph_prev = ph;
      repeat (sps - 2) @(negedge clk);
    end
    tx_en = 0;
  endtask

  initial begin
    phy = PHY_1M; tx_en = 0; tag_bit = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_mode(PHY_1M);
    run_mode(PHY_2M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pre_crc -- checks the tag's zero-initialised CRC-24 against the
// reference LFSR, and the distributed-CRC identity the design rests on:
// pre_crc(m) XOR CRC(CRC_Init, zeros) == CRC(CRC_Init, m).
module tb_pre_crc;
  import pble_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, in_bit, out_shift, out_bit;
  logic [23:0] crc;
  int checks = 0, failures = 0;

  pre_crc dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; in_bit = 0; out_shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic bitq_t m, zeros, want, wantz, got;
      automatic bit [23:0] init = 24'($urandom);
      automatic int n = (t == 0) ? 0 : 1 + ($urandom % 200);
      for (int i = 0; i < n; i++) begin m.push_back(bit'($urandom)); zeros.push_back(0); end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      foreach (m[i]) begin in_valid = 1; in_bit = m[i]; @(negedge clk); end
      in_valid = 0;
      want  = ref_crc(24'h0, m);
      for (int i = 0; i < 24; i++) begin
        got.push_back(out_bit);
        out_shift = 1; @(negedge clk);
      end
      out_shift = 0;
      checks++;
      if (got != want) begin failures++; $display("FAIL crc n=%0d", n); end
      wantz = ref_crc(init, zeros);
      want  = ref_crc(init, m);
      checks++;
      for (int i = 0; i < 24; i++) if ((got[i] ^ wantz[i]) != want[i]) begin
        failures++; $display("FAIL distributed identity n=%0d bit %0d", n, i); break;
      end
      checks++;
      if (crc != 0) begin failures++; $display("FAIL register not empty after 24 shifts"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

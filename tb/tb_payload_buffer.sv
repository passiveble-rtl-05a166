// tb_payload_buffer -- fills the 241-byte buffer with random bytes, reads
// every address back (registered read, one-cycle latency) and checks that a
// write to an address past the end changes nothing.
module tb_payload_buffer;
  logic clk = 0;
  logic wr_en;
  logic [7:0] wr_addr, rd_addr, wr_data, rd_data;
  byte unsigned ref_mem [241];
  int checks = 0, failures = 0;

  payload_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < 241; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 8'(a); wr_data = 8'($urandom); ref_mem[a] = wr_data;
      end
      @(negedge clk);
      wr_en = 1; wr_addr = 8'd250; wr_data = 8'hA5;   // out of range: ignored
      @(negedge clk);
      wr_en = 0;
      for (int a = 0; a < 241; a++) begin
        rd_addr = 8'(a);
        @(negedge clk);
        checks++;
        if (rd_data !== ref_mem[a]) begin
          failures++; $display("FAIL addr %0d got %02x want %02x", a, rd_data, ref_mem[a]);
        end
      end
      rd_addr = 8'd250;
      @(negedge clk);
      checks++;
      if (rd_data !== 8'h00) begin failures++; $display("FAIL out-of-range read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

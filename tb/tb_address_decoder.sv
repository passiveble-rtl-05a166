// tb_address_decoder -- drives 32 boundary slots per packet, with edges
// following the tag-address code (n = 8 symbols per bit, 16 addresses), for
// every address against a random own ID. Up to 2 of the 8 slots of a bit are
// corrupted (edge removed or added), which the decoder must absorb; with 3
// or 4 corrupted slots in one group the group is ambiguous and the packet
// must not match even when the majority gives the tag's own address. It
// checks the decoded address, match/mismatch and that done comes one cycle
// after the 32nd slot, and only then.
module tb_address_decoder;
  import pble_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, edge_pulse, slot_end, done, match;
  logic [3:0] tag_id, addr;
  int checks = 0, failures = 0, n_match = 0, n_mismatch = 0, ndone = 0, n_ambig = 0;

  address_decoder dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (done) ndone++;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int id, input int own, input int errs);
    bitq_t sym = addr_symbols(id, 8, 1'b0);
    bit prev = 1'b0;
    tag_id = 4'(own);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    ndone = 0;
    for (int g = 0; g < 4; g++) begin
      int flip [4];
      // Distinct slots to corrupt; the ambiguous case hits group 2 only.
      int ne = (errs > 2) ? ((g == 2) ? errs : 0) : errs;
      for (int e = 0; e < 4; e++) flip[e] = (e < ne) ? (3 * e + g) % 8 : -1;
      for (int k = 0; k < 8; k++) begin
        bit has = (sym[8*g + k] != prev);
        prev = sym[8*g + k];
        if (k == flip[0] || k == flip[1] || k == flip[2] || k == flip[3]) has = !has;
        repeat (4) @(negedge clk);
        if (has) begin edge_pulse = 1; @(negedge clk); edge_pulse = 0; end
        else @(negedge clk);
        repeat (3) @(negedge clk);
        checks++;
        if (ndone != 0) begin failures++; $display("FAIL done too early"); end
        slot_end = 1; @(negedge clk); slot_end = 0;
        if (8*g + k == 31) begin
          checks++;
          if (!done) begin failures++; $display("FAIL done not one cycle after last slot"); end
        end
      end
    end
    repeat (2) @(negedge clk);
    checks += 3;
    if (ndone != 1) begin failures++; $display("FAIL done pulses %0d", ndone); end
    if (errs <= 2 && addr != 4'(id)) begin failures++; $display("FAIL id %0d decoded %0d (errs %0d)", id, addr, errs); end
    if (match != (id == own && errs <= 2)) begin failures++; $display("FAIL match %0d for id %0d own %0d", match, id, own); end
    if (match) n_match++; else if (errs > 2 && id == own) n_ambig++; else n_mismatch++;
  endtask

  initial begin
    start = 0; edge_pulse = 0; slot_end = 0; tag_id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++)
      for (int id = 0; id < 16; id++) begin
        automatic int own = (r % 2) ? id : int'($urandom % 16);
        run(id, own, r % 5);
      end
    $display("matches %0d mismatches %0d ambiguous %0d", n_match, n_mismatch, n_ambig);
    checks++;
    if (n_match == 0 || n_mismatch == 0 || n_ambig == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

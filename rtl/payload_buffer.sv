// payload_buffer -- raw tag data for the next uplink packet.
//
// A simple dual-port byte memory: the sensor side writes bytes through
// wr_en/wr_addr/wr_data, the transmit sequencer reads one byte at a time.
// The read is registered: rd_data holds mem[rd_addr] of the previous cycle.
// DEPTH defaults to 241, the largest tag payload that fits in a 251-byte
// excitation payload (7 re-allocated header bytes and the 3-byte tag CRC
// take the rest). The writer is expected to fill the buffer while the tag is
// in standby; a write and a read of the same address in one cycle return the
// old byte. The memory itself is not reset.
module payload_buffer #(
  parameter int unsigned DEPTH = 241,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < AW'(DEPTH)) mem[wr_addr] <= wr_data;
    rd_data <= (rd_addr < AW'(DEPTH)) ? mem[rd_addr] : 8'h00;
  end

endmodule

// pre_crc -- the tag's half of the distributed BLE CRC.
//
// BLE's CRC-24 is linear: CRC(CRC_Init, m) = (m % g) XOR (CRC_Init % g), with
// g(x) = x^24+x^10+x^9+x^6+x^4+x^3+x+1. The excitation source supplies the
// CRC_Init part (together with the whitening sequence) as a pre-modulated
// carrier; the tag only computes m % g, i.e. the same LFSR started from
// zero, and the two are XORed over the air. Because an LFSR started from
// zero stays zero on zero input, the header bits the excitation source owns
// need not enter this LFSR.
//
// Operation: clear zeroes the register. in_valid shifts in in_bit (bits in
// air order, LSB of each byte first): feedback = in_bit ^ crc[23], the
// register shifts left and the taps of g are XORed in when the feedback is 1.
// out_bit is crc[23]; out_shift shifts the register left with zero fill, so
// 24 shifts send the CRC from position 23 down to position 0. One bit per
// cycle at most, single-cycle update.
//
// From the paper: polynomial, 24-bit LFSR, zero-initialised split of Eq. 2.
// Own choice: the shift-left register form and the transmit order.
module pre_crc
  import pble_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  logic                in_bit,
  input  logic                out_shift,
  output logic                out_bit,
  output logic [CRC_BITS-1:0] crc
);
  logic fb;
  assign fb      = in_bit ^ crc[CRC_BITS-1];
  assign out_bit = crc[CRC_BITS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          crc <= '0;
    else if (clear)      crc <= '0;
    else if (in_valid)   crc <= {crc[CRC_BITS-2:0], 1'b0} ^ (fb ? CRC_POLY : '0);
    else if (out_shift)  crc <= {crc[CRC_BITS-2:0], 1'b0};
  end

  // in_valid and out_shift belong to different fields of the packet.
  a_one_op: assert property (@(posedge clk) !(in_valid && out_shift))
    else $error("pre_crc: shift-in and shift-out in the same cycle");

endmodule

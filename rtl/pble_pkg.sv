// pble_pkg -- types and constants shared by the PassiveBLE tag baseband.
//
// The tag never decodes a BLE packet. It times the fields of a data packet
// sent by the excitation source (preamble, Access Address, header, payload)
// and, inside that packet's payload, backscatters its own packet. The field
// sizes below are those of the BLE link layer: 1-byte preamble in LE 1M,
// 2-byte in LE 2M, 4-byte Access Address, 2-byte header, 3-byte CRC. The
// first 7 (LE 1M) or 8 (LE 2M) payload bytes of the excitation packet carry
// the tag packet's own preamble, Access Address and header, which the tag
// passes with no phase change. The tag payload is at most 241 bytes. The CRC
// polynomial is g(x)=x^24+x^10+x^9+x^6+x^4+x^3+x+1.
package pble_pkg;

  // PHY mode of the connection.
  typedef enum logic {
    PHY_1M = 1'b0,
    PHY_2M = 1'b1
  } phy_e;

  // Field of the excitation packet the tag is in (symbol-indexed from the
  // first Access Address symbol).
  typedef enum logic [2:0] {
    F_IDLE    = 3'd0,   // standby: hunting for a preamble
    F_AA      = 3'd1,   // Access Address: tag address is decoded
    F_HDR     = 3'd2,   // excitation header: waits, triggers transmission
    F_REALLOC = 3'd3,   // tag packet's preamble/AA/header: shift, no phase change
    F_PAYLOAD = 3'd4,   // tag payload bits XORed onto the whitening carrier
    F_CRC     = 3'd5    // tag pre-CRC bits XORed onto CRC_Init%g ^ whitening
  } field_e;

  localparam int unsigned AA_SYMS     = 32;
  localparam int unsigned HDR_SYMS    = 16;
  localparam int unsigned CRC_BITS    = 24;
  localparam int unsigned MAX_PAYLOAD = 241;
  // Feedback taps of g(x) without the x^24 term: x^10+x^9+x^6+x^4+x^3+x+1.
  localparam logic [CRC_BITS-1:0] CRC_POLY = 24'h00065B;

  function automatic int unsigned preamble_syms(phy_e p);
    return (p == PHY_2M) ? 16 : 8;
  endfunction

  // Symbols of the excitation payload that form the tag packet's preamble,
  // Access Address and header.
  function automatic int unsigned realloc_syms(phy_e p);
    return (p == PHY_2M) ? 64 : 56;
  endfunction

  // Largest tag payload: a 251-byte excitation payload less the re-allocated
  // bytes (7 or 8) and the 3 CRC bytes, i.e. 241 in LE 1M and 240 in LE 2M.
  function automatic int unsigned max_payload(phy_e p);
    return 251 - realloc_syms(p) / 8 - CRC_BITS / 8;
  endfunction

endpackage

// tx_sequencer -- symbol timing and field state machine ("synchronization
// and trigger transmission") of the PassiveBLE tag.
//
// sync_pulse from the preamble detector fixes the symbol grid. From then on a
// phase counter (0..SPS-1) and a period counter run free; every period holds
// one symbol. Two strobes are derived from them:
//   * slot_end, half a symbol after each expected symbol-change edge of the
//     32 Access Address symbols, closes the address decoder's slots;
//   * the symbol boundary, LAT cycles before the expected edge grid, starts
//     each symbol the tag modulates. LAT is the latency of comparator and
//     detector, so the boundary falls on the true excitation symbol edge.
// Symbol s (counted from the first Access Address symbol) belongs to
//   0..31          Access Address: the address decoder runs
//   32..47         excitation header: the tag waits for the trigger
//   48..48+R-1     tag packet preamble/AA/header (R = 56 in LE 1M, 64 in
//                  LE 2M): frequency shift on, tag bit 0 (no phase change)
//   next 8*L       tag payload from the buffer, LSB of each byte first, each
//                  bit also shifted into the pre-CRC
//   next 24        pre-CRC bits, position 23 first
// after which the tag pulses tx_done and returns to standby. The excitation
// packet still carries its own 3-byte CRC, which the receiver drops; the
// tag ignores it by not hunting for HOLDOFF symbols after tx_done. A failed
// address match (addr_done without addr_match) returns it to standby at once.
// sync_en, the enable of the analog wake-up circuit, is low from activation to
// the end of the transmission, as the paper switches the synchronisation
// circuit off in uplink mode.
//
// Interface: rd_addr/rd_data read the payload buffer (registered read, a byte
// is addressed a full symbol before it is used). tag_bit and tx_en are
// registered and change on the cycle after a boundary.
// From the paper: field sizes and their roles, payload up to 241 bytes in
// LE 1M and 240 in LE 2M (longer lengths are clamped),
// trigger after the header, sync circuit off while transmitting. Own choices:
// the free-running symbol grid after sync, payload length as an input.
module tx_sequencer
  import pble_pkg::*;
#(
  parameter int unsigned SPS_1M = 64,
  parameter int unsigned SPS_2M = 32,
  parameter int unsigned LAT    = 6,
  parameter int unsigned HOLDOFF = 24,  // symbols of the dropped excitation CRC
  parameter int unsigned DEPTH  = 241,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  phy_e          phy,
  input  logic [7:0]    payload_len,
  input  logic          sync_pulse,
  input  logic          addr_done,
  input  logic          addr_match,
  input  logic [7:0]    rd_data,
  input  logic          crc_bit,
  output logic          hunt,
  output logic          slot_end,
  output logic          sym_start,
  output field_e        field,
  output logic [AW-1:0] rd_addr,
  output logic          crc_clear,
  output logic          crc_in_valid,
  output logic          crc_in_bit,
  output logic          crc_shift,
  output logic          tx_en,
  output logic          tag_bit,
  output logic          sync_en,
  output logic          activated,
  output logic          tx_done
);
  localparam int unsigned PW = $clog2(SPS_1M);
  localparam int unsigned SW = 12;   // symbols: up to 48+64+8*241+24 = 2064

  logic          active, matched;
  logic [PW-1:0] phase;
  logic [SW-1:0] per;
  logic [PW-1:0] sps_m1, bnd_phase, slot_phase;
  logic [SW-1:0] realloc_s, pay_s, crc_s, end_s, cur;
  logic [7:0]    len_q;
  logic [2:0]    bit_idx;
  logic          bnd, in_pay, in_crc;
  logic [$clog2(HOLDOFF * SPS_1M + 1)-1:0] guard;

  initial begin
    assert (LAT > 0 && LAT + 2 < SPS_2M / 2)
      else $error("tx_sequencer: LAT must lie between 1 and SPS/2-3");
    assert (DEPTH <= 256)
      else $error("tx_sequencer: DEPTH above 256 is not addressable");
  end

  assign sps_m1     = PW'(((phy == PHY_2M) ? SPS_2M : SPS_1M) - 1);
  assign bnd_phase  = PW'(((phy == PHY_2M) ? SPS_2M : SPS_1M) - LAT);
  assign slot_phase = PW'(((phy == PHY_2M) ? SPS_2M : SPS_1M) / 2 - 1);
  assign realloc_s  = SW'(AA_SYMS + HDR_SYMS);
  assign pay_s      = realloc_s + SW'(realloc_syms(phy));
  assign crc_s      = pay_s + SW'({len_q, 3'b000});
  assign end_s      = crc_s + SW'(CRC_BITS);

  assign hunt      = !active && (guard == '0);
  assign bnd       = active && (phase == bnd_phase);
  assign sym_start = bnd;
  assign slot_end  = active && (phase == slot_phase) &&
                     (per >= SW'(1)) && (per <= SW'(AA_SYMS));
  assign in_pay    = (per >= pay_s) && (per < crc_s);
  assign in_crc    = (per >= crc_s) && (per < end_s);

  assign crc_clear    = sync_pulse && !active;
  assign crc_in_valid = bnd && matched && in_pay;
  assign crc_in_bit   = rd_data[bit_idx];
  assign crc_shift    = bnd && matched && in_crc;
  assign sync_en      = !matched;

  // Field of the symbol being received/sent now (informational).
  assign cur = (phase >= bnd_phase) ? per : per - SW'(1);
  always_comb begin
    if (!active)                          field = F_IDLE;
    else if (phase < bnd_phase && per == '0) field = F_IDLE;  // last preamble symbol
    else if (cur < SW'(AA_SYMS))          field = F_AA;
    else if (cur < realloc_s)             field = F_HDR;
    else if (cur < pay_s)                 field = F_REALLOC;
    else if (cur < crc_s)                 field = F_PAYLOAD;
    else                                  field = F_CRC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      matched   <= 1'b0;
      phase     <= '0;
      per       <= '0;
      len_q     <= '0;
      bit_idx   <= '0;
      rd_addr   <= '0;
      tx_en     <= 1'b0;
      tag_bit   <= 1'b0;
      activated <= 1'b0;
      tx_done   <= 1'b0;
      guard     <= '0;
    end else begin
      activated <= 1'b0;
      tx_done   <= 1'b0;
      if (guard != '0) guard <= guard - 1'b1;
      if (!active) begin
        phase   <= '0;
        per     <= '0;
        matched <= 1'b0;
        tx_en   <= 1'b0;
        tag_bit <= 1'b0;
        if (sync_pulse && guard == '0) begin
          active  <= 1'b1;
          phase   <= PW'(1);
          len_q   <= (payload_len > 8'(max_payload(phy))) ? 8'(max_payload(phy)) :
                     (payload_len > 8'(DEPTH))       ? 8'(DEPTH) : payload_len;
          bit_idx <= '0;
          rd_addr <= '0;
        end
      end else begin
        if (phase == sps_m1) begin
          phase <= '0;
          per   <= per + 1'b1;
        end else begin
          phase <= phase + 1'b1;
        end
        if (addr_done) begin
          if (addr_match) begin
            matched   <= 1'b1;
            activated <= 1'b1;
          end else begin
            active <= 1'b0;
          end
        end
        if (bnd) begin
          if (per == realloc_s && !matched) begin
            active <= 1'b0;                 // address never matched
          end else if (per == realloc_s) begin
            tx_en   <= 1'b1;
            tag_bit <= 1'b0;
          end else if (in_pay) begin
            tag_bit <= rd_data[bit_idx];
            bit_idx <= bit_idx + 1'b1;
            if (bit_idx == 3'd7) rd_addr <= rd_addr + 1'b1;
          end else if (in_crc) begin
            tag_bit <= crc_bit;
          end else if (per == end_s && matched) begin
            tx_en   <= 1'b0;
            tag_bit <= 1'b0;
            active  <= 1'b0;
            tx_done <= 1'b1;
            guard   <= $bits(guard)'(HOLDOFF * (int'(sps_m1) + 1));
          end
        end
      end
    end
  end

endmodule

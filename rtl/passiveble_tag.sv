// passiveble_tag -- digital baseband of a PassiveBLE backscatter tag.
//
// The tag joins a real BLE connection without decoding anything. The
// excitation source (a commodity BLE transceiver) sends a BLE data packet on
// the channel f_s below the one the receiver listens to. Its preamble wakes
// the tag, its Access Address carries the tag address, its header triggers
// the tag, and its payload is a pre-modulated carrier: the first 7/8 bytes
// already are the tag packet's preamble, Access Address and header, the rest
// is the whitening sequence XOR the CRC_Init share of the CRC. The tag shifts
// the carrier by f_s and XORs its own bits (payload and zero-init CRC) onto
// it by adding pi of phase per 1 bit, so the receiver gets a standard,
// whitened, CRC-correct BLE data packet.
//
// Blocks: preamble_detector (wake-up on comparator pulses), address_decoder
// (activation), tx_sequencer (symbol timing and field walk), payload_buffer
// (raw data), pre_crc (m % g), backscatter_modulator (frequency shift and
// phase XOR). The analog front end and the RF switch are outside: comp_in is
// the comparator output, rf_sw the switch control, sync_en the enable of the
// analog wake-up circuit.
//
// Timing: one clock, SPS_1M/SPS_2M cycles per symbol (64 MHz clock assumed).
// FE_DELAY is the delay in cycles from a symbol change to the comparator
// pulse; the tag's symbol boundaries are placed FE_DELAY+3 cycles before the
// observed pulse grid to land on the true excitation symbol edges.
// Two block outputs stay unused here: the sequencer's sym_start strobe and
// the parallel CRC register; both exist for observation in the blocks' own
// tests.
//
// From the paper: the block split (synchronisation circuit, baseband logic,
// RF switch), the packet structure, the XOR on RF signals and the fixed
// frequency shift. Own choices: the clock, f_s = 6 MHz (FS_INC), the
// comparator pulse model behind FE_DELAY, and the tag address as an input.
module passiveble_tag
  import pble_pkg::*;
#(
  parameter int unsigned SPS_1M       = 64,
  parameter int unsigned SPS_2M       = 32,
  parameter int unsigned TOL          = 4,
  parameter int unsigned FE_DELAY     = 3,
  parameter int unsigned SYMS_PER_BIT = 8,
  parameter int unsigned DEPTH        = MAX_PAYLOAD,
  parameter int unsigned PHASE_W      = 16,
  parameter int unsigned FS_INC       = 6144,
  localparam int unsigned ID_BITS     = AA_SYMS / SYMS_PER_BIT,
  localparam int unsigned AW          = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               phy_2m,       // 0: LE 1M PHY, 1: LE 2M PHY
  input  logic [ID_BITS-1:0] tag_id,
  input  logic [7:0]         payload_len,  // tag payload bytes, 0..241 (240 in LE 2M)
  input  logic               wr_en,        // payload buffer write port
  input  logic [AW-1:0]      wr_addr,
  input  logic [7:0]         wr_data,
  input  logic               comp_in,      // comparator output (async)
  output logic               rf_sw,        // RF switch control
  output logic               sync_en,      // analog wake-up circuit enable
  output logic               wake,         // preamble found (one cycle)
  output logic               activated,    // own address matched (one cycle)
  output logic               tx_busy,      // frequency shift on
  output logic               tx_done,      // tag packet complete (one cycle)
  output logic [ID_BITS-1:0] rx_addr,      // last decoded tag address
  output logic [2:0]         field         // packet field (pble_pkg::field_e)
);
  phy_e          phy;
  logic          edge_pulse, sync_pulse, hunt;
  logic          slot_end;
  logic          addr_done, addr_match;
  field_e        field_q;
  logic [AW-1:0] rd_addr;
  logic [7:0]    rd_data;
  logic          crc_clear, crc_in_valid, crc_in_bit, crc_shift, crc_bit;
  logic [CRC_BITS-1:0] crc;
  logic          tx_en, tag_bit;

  assign phy     = phy_2m ? PHY_2M : PHY_1M;
  assign wake    = sync_pulse;
  assign tx_busy = tx_en;
  assign field   = field_q;

  preamble_detector #(.SPS_1M(SPS_1M), .SPS_2M(SPS_2M), .TOL(TOL)) u_det (
    .clk, .rst_n, .en(hunt), .phy, .comp_in, .edge_pulse, .sync_pulse
  );

  address_decoder #(.SYMS_PER_BIT(SYMS_PER_BIT), .AA_SYMS(AA_SYMS)) u_addr (
    .clk, .rst_n, .start(sync_pulse && hunt), .edge_pulse, .slot_end, .tag_id,
    .done(addr_done), .match(addr_match), .addr(rx_addr)
  );

  tx_sequencer #(.SPS_1M(SPS_1M), .SPS_2M(SPS_2M), .LAT(FE_DELAY + 3),
                 .DEPTH(DEPTH)) u_seq (
    .clk, .rst_n, .phy, .payload_len, .sync_pulse, .addr_done, .addr_match,
    .rd_data, .crc_bit, .hunt, .slot_end, .sym_start(), .field(field_q), .rd_addr,
    .crc_clear, .crc_in_valid, .crc_in_bit, .crc_shift, .tx_en, .tag_bit,
    .sync_en, .activated, .tx_done
  );

  payload_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  pre_crc u_crc (
    .clk, .rst_n, .clear(crc_clear), .in_valid(crc_in_valid), .in_bit(crc_in_bit),
    .out_shift(crc_shift), .out_bit(crc_bit), .crc
  );

  backscatter_modulator #(.PHASE_W(PHASE_W), .FS_INC(FS_INC),
                          .SPS_1M(SPS_1M), .SPS_2M(SPS_2M)) u_mod (
    .clk, .rst_n, .phy, .tx_en, .tag_bit, .rf_sw
  );

endmodule

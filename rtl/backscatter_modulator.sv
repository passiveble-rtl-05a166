// backscatter_modulator -- frequency shift and XOR-by-phase of the tag.
//
// The RF switch is toggled by a square wave at the shift frequency f_s, which
// moves the excitation carrier f_s away, onto the channel the receiver
// listens to. The square wave is the MSB of a PHASE_W-bit phase accumulator
// advanced by FS_INC every clock (f_s = FS_INC / 2^PHASE_W * f_clk). A BLE
// receiver decides a bit from the phase a symbol accumulates (+pi/2 for 1,
// -pi/2 for 0). During a symbol whose tag bit is 1 the accumulator gets an
// extra 2^(PHASE_W-1)/SPS per cycle, i.e. exactly pi over the symbol; a tag
// bit 0 adds nothing. pi/2 + pi = -pi/2 (mod 2pi) and -pi/2 + pi = +pi/2, so
// the receiver sees excitation bit XOR tag bit. The phase is continuous
// across symbols.
//
// Interface: tx_en starts the shift from phase 0 and stops it with the switch
// off (rf_sw = 0); tag_bit is sampled every cycle and must be held for the
// whole symbol. rf_sw is registered.
// From the paper: square-wave frequency shift, tag bit 1 = pi, bit 0 = 0
// phase accumulation (Fig. 9). Own choices: clock, f_s and the accumulator
// (default 6 MHz shift from a 64 MHz clock, three 2 MHz channels).
module backscatter_modulator
  import pble_pkg::*;
#(
  parameter int unsigned PHASE_W = 16,
  parameter int unsigned FS_INC  = 6144,
  parameter int unsigned SPS_1M  = 64,
  parameter int unsigned SPS_2M  = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  phy_e phy,
  input  logic tx_en,
  input  logic tag_bit,
  output logic rf_sw
);
  localparam logic [PHASE_W-1:0] PI_1M = PHASE_W'((2 ** (PHASE_W - 1)) / SPS_1M);
  localparam logic [PHASE_W-1:0] PI_2M = PHASE_W'((2 ** (PHASE_W - 1)) / SPS_2M);

  logic [PHASE_W-1:0] acc;
  logic [PHASE_W-1:0] step;

  initial begin
    assert ((2 ** (PHASE_W - 1)) % SPS_1M == 0 && (2 ** (PHASE_W - 1)) % SPS_2M == 0)
      else $error("backscatter_modulator: SPS must divide 2^(PHASE_W-1)");
  end

  assign step = PHASE_W'(FS_INC) + (tag_bit ? ((phy == PHY_2M) ? PI_2M : PI_1M) : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      rf_sw <= 1'b0;
    end else if (!tx_en) begin
      acc   <= '0;
      rf_sw <= 1'b0;
    end else begin
      acc   <= acc + step;
      rf_sw <= acc[PHASE_W-1];
    end
  end

endmodule

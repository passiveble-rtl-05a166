// preamble_detector -- wake-up correlator of the PassiveBLE tag.
//
// The analog front end (SAW delay line, diode mixer, filter, amplifier,
// comparator) turns each change between neighbouring GFSK symbols into a
// short pulse on comp_in. A BLE preamble alternates 0101..., so it shows up as
// a run of pulses exactly one symbol apart. This block synchronises comp_in
// into the clock domain (two flip-flops), detects its rising edges and counts
// consecutive edges whose spacing is within SPS +/- TOL clock cycles. When the
// run reaches the number of internal preamble boundaries (7 in LE 1M, 15 in
// LE 2M) it raises sync_pulse for one cycle, registered one cycle after the
// last edge is seen; that cycle is the timing reference for the packet.
//
// Interface: comp_in is asynchronous; edge_pulse marks every synchronised
// rising edge (used by the address decoder); en gates the hunt.
// Timing: edge_pulse comes 2 cycles after the comparator edge (two-flop
// synchroniser, combinational edge detect); sync_pulse comes 3 cycles after
// the edge that completes the preamble run.
//
// From the paper: preamble-based wake-up from the comparator output with
// logical correlation, symbol-level timing. Own choices: edge counting with
// a spacing tolerance as the correlator, the tolerance, two-flop input sync.
module preamble_detector
  import pble_pkg::*;
#(
  parameter int unsigned SPS_1M = 64,  // clock cycles per LE 1M symbol
  parameter int unsigned SPS_2M = 32,  // clock cycles per LE 2M symbol
  parameter int unsigned TOL    = 4    // accepted edge-spacing error, cycles
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  phy_e phy,
  input  logic comp_in,
  output logic edge_pulse,
  output logic sync_pulse
);
  localparam int unsigned CW = $clog2(SPS_1M + TOL + 2) + 1;

  logic [2:0]    sync_q;
  logic [CW-1:0] gap;      // cycles since the last edge (saturating)
  logic [4:0]    run;      // edges in the current run
  logic [CW-1:0] sps;
  logic [4:0]    need;
  logic          on_time;
  logic          late;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[1:0], comp_in};
  end

  assign edge_pulse = sync_q[1] & ~sync_q[2];

  assign sps     = CW'((phy == PHY_2M) ? SPS_2M : SPS_1M);
  assign need    = 5'(preamble_syms(phy) - 1);
  assign on_time = (gap >= sps - CW'(TOL)) && (gap <= sps + CW'(TOL));
  assign late    = (gap > sps + CW'(TOL));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap        <= '0;
      run        <= '0;
      sync_pulse <= 1'b0;
    end else begin
      sync_pulse <= 1'b0;
      if (!late) gap <= gap + 1'b1;
      if (!en) begin
        run <= '0;
      end else if (edge_pulse) begin
        gap <= CW'(1);
        if (run != 0 && on_time) begin
          if (run + 5'd1 == need) begin
            run        <= '0;
            sync_pulse <= 1'b1;
          end else begin
            run <= run + 5'd1;
          end
        end else begin
          run <= 5'd1;
        end
      end else if (late) begin
        run <= '0;
      end
    end
  end

endmodule

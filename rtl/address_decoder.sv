// address_decoder -- tag activation from the Access Address.
//
// The excitation source re-allocates the 32 Access Address symbols so that
// each tag-address bit spans SYMS_PER_BIT (n) symbols: the tag has 32/n
// address bits and the system can address 2^(32/n) tags (n = 8 gives 16 tags,
// the paper's operating point). The tag only sees symbol changes, so a bit
// is carried as "changes" or "no changes": for a 1 every one of the n
// symbols differs from the one before it, for a 0 none does. For every
// symbol boundary the sequencer opens a slot one symbol wide, centred on the
// expected edge; slot_end closes it. The decoder latches whether an edge
// arrived in the slot, counts such slots over each group of n, and decides 1
// when at least ceil(n/2) of them had an edge. Address bit 0 comes first.
// A group is only accepted when at most ERR_TOL of its n slots disagree with
// the decided bit; random data (a payload mistaken for a preamble) seldom
// passes this, so it rarely activates the tag by accident. After 32 slots
// done pulses with match = every group accepted and address == tag_id.
//
// Timing: done is registered, one cycle after the 32nd slot_end.
// From the paper: n symbols per address bit, 2^(32/n) tags, n = 8.
// Own choices: the change/no-change code, the majority threshold, the
// per-group error limit ERR_TOL, LSB first.
module address_decoder #(
  parameter int unsigned SYMS_PER_BIT = 8,
  parameter int unsigned ERR_TOL      = 2,
  parameter int unsigned AA_SYMS      = 32,
  parameter int unsigned ID_BITS      = AA_SYMS / SYMS_PER_BIT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,      // preamble found: clear
  input  logic               edge_pulse, // symbol-change pulse
  input  logic               slot_end,   // last cycle of a boundary slot
  input  logic [ID_BITS-1:0] tag_id,
  output logic               done,
  output logic               match,
  output logic [ID_BITS-1:0] addr
);
  localparam int unsigned THRESH = (SYMS_PER_BIT + 1) / 2;
  localparam int unsigned SW     = $clog2(AA_SYMS + 1);
  localparam int unsigned NW     = $clog2(SYMS_PER_BIT + 1);

  logic          seen;
  logic [SW-1:0] nslot;
  logic [NW-1:0] in_grp;   // slots done in this group
  logic [NW-1:0] hits;     // slots with an edge in this group
  logic [NW-1:0] hits_nx;
  logic          grp_ok, all_ok;
  localparam int unsigned BW = (ID_BITS > 1) ? $clog2(ID_BITS) : 1;
  logic [BW-1:0] bitn;

  initial begin
    assert (AA_SYMS % SYMS_PER_BIT == 0)
      else $error("SYMS_PER_BIT must divide the 32 Access Address symbols");
  end

  assign hits_nx = hits + NW'(seen | edge_pulse);
  assign grp_ok  = (hits_nx <= NW'(ERR_TOL)) || (hits_nx >= NW'(SYMS_PER_BIT - ERR_TOL));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen   <= 1'b0;
      nslot  <= '0;
      in_grp <= '0;
      hits   <= '0;
      bitn   <= '0;
      addr   <= '0;
      all_ok <= 1'b0;
      done   <= 1'b0;
      match  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        seen   <= 1'b0;
        nslot  <= '0;
        in_grp <= '0;
        hits   <= '0;
        bitn   <= '0;
        addr   <= '0;
        all_ok <= 1'b1;
        match  <= 1'b0;
      end else if (slot_end && nslot < SW'(AA_SYMS)) begin
        seen  <= 1'b0;
        nslot <= nslot + 1'b1;
        if (in_grp == NW'(SYMS_PER_BIT - 1)) begin
          logic [ID_BITS-1:0] a;
          a            = addr;
          a[bitn]      = (hits_nx >= NW'(THRESH));
          addr   <= a;
          all_ok <= all_ok && grp_ok;
          bitn   <= bitn + 1'b1;
          in_grp <= '0;
          hits   <= '0;
          if (nslot == SW'(AA_SYMS - 1)) begin
            done  <= 1'b1;
            match <= all_ok && grp_ok && (a == tag_id);
          end
        end else begin
          in_grp <= in_grp + 1'b1;
          hits   <= hits_nx;
        end
      end else if (edge_pulse) begin
        seen <= 1'b1;
      end
    end
  end

endmodule

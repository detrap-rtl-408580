// addr_compare -- address comparator of one trigger.
//
// Compares an address against the trigger's tdata2 value using the trigger's
// match type. DeTRAP's policy needs three of the RISC-V debug comparisons:
// its write-protection chain uses >= on the PC and < on the store address,
// and its overflow trigger uses = on the store address. Because the evaluated
// core implements the trigger specification in full, every address match of
// the specification is provided:
//   0  equal
//   1  NAPOT: the trailing ones of tdata2 select a naturally aligned range
//   2  greater or equal
//   3  less than
//   4  mask low:  (addr[W/2-1:0] & tdata2[W-1:W/2]) == tdata2[W/2-1:0]
//   5  mask high: (addr[W-1:W/2] & tdata2[W-1:W/2]) == tdata2[W/2-1:0]
//   8, 9, 12, 13: the negation of 0, 1, 4, 5
// Comparisons are unsigned, as in the specification. Purely combinational.
//
//   match  tdata1.match field (detrap_pkg::match_e); other codes never hit
//   tdata2 compare value
//   addr   PC or effective address of the instruction
//   hit    1 when addr satisfies the comparison
module addr_compare
  import detrap_pkg::*;
#(
  parameter int unsigned W = XLEN
) (
  input  logic [3:0]   match,
  input  logic [W-1:0] tdata2,
  input  logic [W-1:0] addr,
  output logic         hit
);

  localparam int unsigned H = W / 2;

  logic [W-1:0] napot_mask;
  logic [H-1:0] mask, value;
  logic         eq, napot, mask_lo, mask_hi;

  // Low bits ignored by a NAPOT match: the trailing ones of tdata2 and the
  // zero above them.
  assign napot_mask = tdata2 ^ (tdata2 + 1'b1);
  assign mask       = tdata2[W-1:H];
  assign value      = tdata2[H-1:0];

  assign eq      = (addr == tdata2);
  assign napot   = ((addr | napot_mask) == (tdata2 | napot_mask));
  assign mask_lo = ((addr[H-1:0] & mask) == value);
  assign mask_hi = ((addr[W-1:H] & mask) == value);

  always_comb begin
    unique case (match)
      MATCH_EQ:          hit = eq;
      MATCH_NAPOT:       hit = napot;
      MATCH_GE:          hit = (addr >= tdata2);
      MATCH_LT:          hit = (addr < tdata2);
      MATCH_MASK_LO:     hit = mask_lo;
      MATCH_MASK_HI:     hit = mask_hi;
      MATCH_NE:          hit = !eq;
      MATCH_NOT_NAPOT:   hit = !napot;
      MATCH_NOT_MASK_LO: hit = !mask_lo;
      MATCH_NOT_MASK_HI: hit = !mask_hi;
      default:           hit = 1'b0;
    endcase
  end

endmodule

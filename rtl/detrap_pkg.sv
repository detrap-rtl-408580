// detrap_pkg -- types, constants and shared functions of the DeTRAP trigger
// (breakpoint) hardware.
//
// The trigger hardware follows the RISC-V debug specification's address/data
// match trigger ("mcontrol", tdata1 type 2). Each trigger holds a control word
// (tdata1) and a compare value (tdata2). A trigger can be chained to the
// next-higher trigger; a chain fires only when every member matches the same
// instruction. DeTRAP uses a two-member chain (PC >= bottom of untrusted code,
// store address < bottom of untrusted stack) plus one lone trigger (store
// address == top of shadow stack) to write-protect its shadow stack.
//
// Following the evaluated system: a 32-bit core (rv32) with 8 triggers that
// match addresses only. The bit layout of mcontrol and the match encodings are
// those of the RISC-V debug specification. All the specification's address
// match types are supported (equal, NAPOT, >=, <, masked low and high half,
// and the negations of equal, NAPOT and the masked matches), since the
// evaluated core implements the trigger specification in full. The
// chain-length limit of two is this design's choice, matching what
// Rocket-class cores implement.
package detrap_pkg;

  parameter int unsigned XLEN  = 32;
  parameter int unsigned NTRIG = 8;

  // CSR addresses (RISC-V debug specification)
  parameter logic [11:0] CSR_TSELECT = 12'h7A0;
  parameter logic [11:0] CSR_TDATA1  = 12'h7A1;
  parameter logic [11:0] CSR_TDATA2  = 12'h7A2;
  parameter logic [11:0] CSR_TDATA3  = 12'h7A3;
  parameter logic [11:0] CSR_TINFO   = 12'h7A4;

  // tdata1.type value for an address/data match trigger
  parameter logic [3:0] TTYPE_MCONTROL = 4'd2;

  // tdata1.match encodings (all address matches of the specification);
  // bit 3 negates the match of encodings 0, 1, 4 and 5
  typedef enum logic [3:0] {
    MATCH_EQ          = 4'd0,
    MATCH_NAPOT       = 4'd1,
    MATCH_GE          = 4'd2,
    MATCH_LT          = 4'd3,
    MATCH_MASK_LO     = 4'd4,
    MATCH_MASK_HI     = 4'd5,
    MATCH_NE          = 4'd8,
    MATCH_NOT_NAPOT   = 4'd9,
    MATCH_NOT_MASK_LO = 4'd12,
    MATCH_NOT_MASK_HI = 4'd13
  } match_e;

  // Encodings that tdata1.match can hold; others are written as MATCH_EQ
  function automatic logic match_legal(logic [3:0] m);
    return m inside {MATCH_EQ, MATCH_NAPOT, MATCH_GE, MATCH_LT, MATCH_MASK_LO, MATCH_MASK_HI,
                     MATCH_NE, MATCH_NOT_NAPOT, MATCH_NOT_MASK_LO, MATCH_NOT_MASK_HI};
  endfunction

  // tdata1.action encodings that are implemented
  typedef enum logic [3:0] {
    ACT_BREAKPOINT = 4'd0,  // raise a breakpoint exception
    ACT_DEBUG      = 4'd1   // enter debug mode
  } action_e;

  // Privilege levels
  typedef enum logic [1:0] {
    PRV_U = 2'd0,
    PRV_S = 2'd1,
    PRV_M = 2'd3
  } priv_e;

  // mcontrol layout for XLEN = 32 (tdata1)
  typedef struct packed {
    logic [3:0] ttype;    // [31:28]
    logic       dmode;    // [27]    only debug mode may write this trigger
    logic [5:0] maskmax;  // [26:21]
    logic       hit;      // [20]
    logic       select;   // [19]    0: address, 1: data
    logic       timing;   // [18]    0: before the access
    logic [1:0] sizelo;   // [17:16]
    logic [3:0] action;   // [15:12]
    logic       chain;    // [11]    chain with the next trigger
    logic [3:0] match;    // [10:7]
    logic       m;        // [6]
    logic       rsvd;     // [5]
    logic       s;        // [4]
    logic       u;        // [3]
    logic       execute;  // [2]
    logic       store;    // [1]
    logic       load;     // [0]
  } mcontrol_t;

  // One trigger as seen by the breakpoint units
  typedef struct packed {
    mcontrol_t         ctl;
    logic [XLEN-1:0]   tdata2;
  } trig_t;

  // Trigger enabled in the current privilege mode (debug mode never matches)
  function automatic logic trig_enabled(mcontrol_t c, logic [1:0] priv, logic debug_mode);
    logic en;
    unique case (priv)
      PRV_M:   en = c.m;
      PRV_S:   en = c.s;
      PRV_U:   en = c.u;
      default: en = 1'b0;
    endcase
    return en && !debug_mode;
  endfunction

endpackage

// trigger_csr -- trigger control and status registers (tselect, tdata1,
// tdata2, tdata3, tinfo) with write-any-read-legal (WARL) filtering.
//
// Software selects a trigger by writing tselect, then reads or writes that
// trigger's control word (tdata1, in the mcontrol format) and its compare value
// (tdata2). Every write is filtered so that a read-back shows exactly what the
// hardware supports; the paper stresses that a read-back must reflect real
// support, which is why the breakpoint units of this design honour every
// chain the registers accept, including chains that mix a PC trigger with a
// load/store trigger. What is legal here:
//   * type is fixed to 2 (address/data match), select = 0 (address only),
//     timing = 0 (fire before the access), sizelo = 0, hit reads 0;
//   * match: every address match of the specification (0-5, 8, 9, 12, 13);
//     the unused codes 6, 7, 10, 11, 14, 15 read back as equal;
//   * action: 0 (breakpoint exception) or 1 (enter debug mode, only with dmode);
//   * privilege enables m and u; s reads 0 (no supervisor mode, as on an
//     rv32 microcontroller);
//   * chain: at most two triggers per chain (a trigger may not chain if the
//     one below or above already chains), the last trigger cannot chain, and a
//     trigger may not chain into a debug-mode-only (dmode) trigger unless it is
//     dmode itself;
//   * dmode can be set only from debug mode, and a dmode trigger ignores
//     writes from outside debug mode.
// The list above is this design's choice within the RISC-V debug
// specification; the paper gives only the trigger count (8) and the need for
// mixed chains.
//
// Timing: writes take effect at the next rising clock edge; reads are
// combinational on csr_addr. Reset (active low, synchronous) disables every
// trigger and selects trigger 0.
module trigger_csr
  import detrap_pkg::*;
#(
  parameter int unsigned N = NTRIG
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              debug_mode,          // hart is in debug mode
  input  logic [11:0]       csr_addr,
  input  logic              csr_wen,             // write csr_wdata to csr_addr
  input  logic [XLEN-1:0]   csr_wdata,
  output logic [XLEN-1:0]   csr_rdata,
  output logic              csr_hit,             // csr_addr is a trigger CSR
  output trig_t [N-1:0]     trig                 // configuration of every trigger
);

  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;

  mcontrol_t       ctl    [N];
  logic [XLEN-1:0] tdata2 [N];
  logic [SW-1:0]   tsel;

  mcontrol_t       wr_ctl;       // csr_wdata seen as mcontrol
  mcontrol_t       legal_ctl;    // legal value written to tdata1
  logic            sel_locked;   // selected trigger is dmode and hart is not in debug mode
  logic            prev_chain, next_chain, next_dmode;

  function automatic mcontrol_t ctl_reset();
    mcontrol_t c;
    c         = '0;
    c.ttype   = TTYPE_MCONTROL;
    c.maskmax = 6'd31;
    return c;
  endfunction

  assign wr_ctl     = mcontrol_t'(csr_wdata);
  assign sel_locked = ctl[tsel].dmode && !debug_mode;

  // Chain state of the neighbours of the selected trigger
  always_comb begin
    prev_chain = 1'b0;
    next_chain = 1'b0;
    next_dmode = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      if (i + 1 == int'(tsel)) prev_chain = ctl[i].chain;
      if (i == int'(tsel) + 1) begin
        next_chain = ctl[i].chain;
        next_dmode = ctl[i].dmode;
      end
    end
  end

  // WARL filtering of a tdata1 write
  always_comb begin
    legal_ctl         = ctl_reset();
    legal_ctl.dmode   = wr_ctl.dmode && debug_mode;
    legal_ctl.action  = (wr_ctl.action == 4'(ACT_DEBUG) && legal_ctl.dmode) ? 4'(ACT_DEBUG)
                                                                             : 4'(ACT_BREAKPOINT);
    legal_ctl.chain   = wr_ctl.chain
                        && (int'(tsel) < int'(N) - 1)
                        && !prev_chain && !next_chain
                        && (legal_ctl.dmode || !next_dmode);
    legal_ctl.match   = match_legal(wr_ctl.match) ? wr_ctl.match : 4'(MATCH_EQ);
    legal_ctl.m       = wr_ctl.m;
    legal_ctl.u       = wr_ctl.u;
    legal_ctl.execute = wr_ctl.execute;
    legal_ctl.store   = wr_ctl.store;
    legal_ctl.load    = wr_ctl.load;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tsel <= '0;
      for (int i = 0; i < int'(N); i++) begin
        ctl[i]    <= ctl_reset();
        tdata2[i] <= '0;
      end
    end else if (csr_wen) begin
      unique case (csr_addr)
        CSR_TSELECT: if (csr_wdata < XLEN'(N)) tsel <= SW'(csr_wdata);
        CSR_TDATA1:  if (!sel_locked) ctl[tsel] <= legal_ctl;
        CSR_TDATA2:  if (!sel_locked) tdata2[tsel] <= csr_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    csr_hit   = 1'b1;
    csr_rdata = '0;
    unique case (csr_addr)
      CSR_TSELECT: csr_rdata = XLEN'(tsel);
      CSR_TDATA1:  csr_rdata = XLEN'(ctl[tsel]);
      CSR_TDATA2:  csr_rdata = tdata2[tsel];
      CSR_TDATA3:  csr_rdata = '0;
      CSR_TINFO:   csr_rdata = XLEN'(1) << TTYPE_MCONTROL;
      default:     csr_hit   = 1'b0;
    endcase
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      trig[i].ctl    = ctl[i];
      trig[i].tdata2 = tdata2[i];
    end
  end

endmodule

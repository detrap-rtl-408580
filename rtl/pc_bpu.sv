// pc_bpu -- PC breakpoint unit.
//
// Looks at the instruction that is being handed to decode and compares its PC
// with every trigger whose execute bit is set and that is enabled in the
// current privilege mode. The per-trigger results (pretrig) are the
// "pretriggers" of the paper: they travel down the pipeline with the
// instruction (pretrigger_pipe) so that the memory-stage unit can combine
// them with load/store matches. Chains made only of execute triggers are
// resolved here and raise the fetch breakpoint (xcpt_if, or debug_if for
// action = enter debug mode).
//
// The paper places the PC check in the fetch stage and the first pretrigger
// register at the output of decode; in this design the PC compared is that of
// the fetched instruction entering decode (where a Rocket-class core raises
// its fetch breakpoint), so the pretriggers are valid during decode and are
// first registered at the decode output, as in the paper.
//
// Purely combinational.
module pc_bpu
  import detrap_pkg::*;
#(
  parameter int unsigned N = NTRIG
) (
  input  trig_t [N-1:0]    trig,
  input  logic [1:0]       priv,
  input  logic             debug_mode,
  input  logic             valid,      // an instruction is present
  input  logic [XLEN-1:0]  pc,
  output logic [N-1:0]     pretrig,    // trigger i's execute condition matched pc
  output logic             xcpt_if,    // breakpoint exception on fetch
  output logic             debug_if    // enter debug mode on fetch
);

  logic [N-1:0] addr_ok, chain, fire;

  for (genvar i = 0; i < int'(N); i++) begin : g_trig
    addr_compare u_cmp (
      .match  (trig[i].ctl.match),
      .tdata2 (trig[i].tdata2),
      .addr   (pc),
      .hit    (addr_ok[i])
    );
    assign pretrig[i] = valid && trig[i].ctl.execute && addr_ok[i]
                        && trig_enabled(trig[i].ctl, priv, debug_mode);
    assign chain[i]   = trig[i].ctl.chain;
  end

  chain_eval #(.N(N)) u_chain (
    .hit      (pretrig),
    .mem_hit  ('0),
    .chain    (chain),
    .need_mem (1'b0),
    .fire     (fire)
  );

  always_comb begin
    xcpt_if  = 1'b0;
    debug_if = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      if (fire[i] && trig[i].ctl.action == 4'(ACT_DEBUG)) debug_if = 1'b1;
      if (fire[i] && trig[i].ctl.action != 4'(ACT_DEBUG)) xcpt_if  = 1'b1;
    end
  end

endmodule

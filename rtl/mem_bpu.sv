// mem_bpu -- memory-stage breakpoint unit with mixed-chain support.
//
// Compares the effective address of the load or store at the input of the
// memory stage with every trigger whose load/store bit matches the access,
// and combines these matches with the instruction's pretriggers (its PC
// matches, carried down by pretrigger_pipe). A trigger therefore counts as
// matching the instruction if its execute condition matched when the
// instruction was fetched or its load/store condition matches now. A chain
// fires if all its members match and at least one of them matched on the
// memory address (chains of execute triggers only are handled by pc_bpu).
// This is the paper's fix for the upstream breakpoint module, which chained
// each access type separately and so could never fire a chain that mixes a
// PC trigger with a store-address trigger, which is exactly DeTRAP's
// write-protection chain (PC >= bottom of untrusted code AND store address <
// bottom of untrusted stack).
//
// The chain's last trigger selects the response: xcpt_ld / xcpt_st raise a
// breakpoint exception on the load / store, debug_ld / debug_st request debug
// mode. Purely combinational; the result belongs to the instruction in the
// memory stage, before its access is performed.
module mem_bpu
  import detrap_pkg::*;
#(
  parameter int unsigned N = NTRIG
) (
  input  trig_t [N-1:0]    trig,
  input  logic [1:0]       priv,
  input  logic             debug_mode,
  input  logic             valid,      // a memory instruction is present
  input  logic             is_load,
  input  logic             is_store,
  input  logic [XLEN-1:0]  addr,       // effective address
  input  logic [N-1:0]     pretrig,    // this instruction's PC matches
  output logic             xcpt_ld,
  output logic             xcpt_st,
  output logic             debug_ld,
  output logic             debug_st
);

  logic [N-1:0] addr_ok, mem_hit, hit, chain, fire;
  logic         any_xcpt, any_debug;

  for (genvar i = 0; i < int'(N); i++) begin : g_trig
    addr_compare u_cmp (
      .match  (trig[i].ctl.match),
      .tdata2 (trig[i].tdata2),
      .addr   (addr),
      .hit    (addr_ok[i])
    );
    assign mem_hit[i] = valid && addr_ok[i]
                        && ((trig[i].ctl.load && is_load) || (trig[i].ctl.store && is_store))
                        && trig_enabled(trig[i].ctl, priv, debug_mode);
    assign hit[i]     = mem_hit[i] || (valid && pretrig[i]);
    assign chain[i]   = trig[i].ctl.chain;
  end

  chain_eval #(.N(N)) u_chain (
    .hit      (hit),
    .mem_hit  (mem_hit),
    .chain    (chain),
    .need_mem (1'b1),
    .fire     (fire)
  );

  always_comb begin
    any_xcpt  = 1'b0;
    any_debug = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      if (fire[i] && trig[i].ctl.action == 4'(ACT_DEBUG)) any_debug = 1'b1;
      if (fire[i] && trig[i].ctl.action != 4'(ACT_DEBUG)) any_xcpt  = 1'b1;
    end
  end

  assign xcpt_ld  = any_xcpt  && is_load;
  assign xcpt_st  = any_xcpt  && is_store;
  assign debug_ld = any_debug && is_load;
  assign debug_st = any_debug && is_store;

endmodule

// chain_eval -- combines per-trigger matches of one instruction into chain
// results.
//
// Triggers are chained through the tdata1.chain bit: trigger i with chain = 1
// is joined to trigger i+1, and the chain ends at the first trigger whose
// chain bit is 0. A chain fires only when every member matched the same
// instruction (paper, Sec. 2 and 5.1: "all triggers in the chain must match").
// The result is reported on the chain's last trigger, whose action decides
// what happens. A trailing chain that never ends (the last trigger has
// chain = 1) never fires.
//
// need_mem selects the memory-stage rule: a chain then fires only if at least
// one member matched through a load/store address (mem_hit), so that chains
// made only of execute triggers are reported once, by the fetch-side unit, and
// not a second time when the instruction reaches the memory stage. This
// split is this design's choice; the paper only requires that mixed chains
// fire.
//
// Purely combinational.
//   hit[i]     trigger i matched this instruction (any of its conditions)
//   mem_hit[i] trigger i matched through the load/store address
//   chain[i]   tdata1.chain of trigger i
//   fire[i]    trigger i ends a chain all of whose members matched
module chain_eval #(
  parameter int unsigned N = detrap_pkg::NTRIG
) (
  input  logic [N-1:0] hit,
  input  logic [N-1:0] mem_hit,
  input  logic [N-1:0] chain,
  input  logic         need_mem,
  output logic [N-1:0] fire
);

  always_comb begin
    logic all_hit;   // every member so far matched
    logic any_mem;   // some member so far matched on a memory address
    all_hit = 1'b1;
    any_mem = 1'b0;
    fire    = '0;
    for (int i = 0; i < int'(N); i++) begin
      all_hit = all_hit && hit[i];
      any_mem = any_mem || mem_hit[i];
      if (!chain[i]) begin
        fire[i] = all_hit && (any_mem || !need_mem);
        all_hit = 1'b1;
        any_mem = 1'b0;
      end
    end
  end

endmodule

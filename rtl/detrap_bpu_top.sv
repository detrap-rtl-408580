// detrap_bpu_top -- breakpoint (debug trigger) module of an in-order RISC-V
// core, with the pipeline support DeTRAP needs for chains that mix a PC
// trigger and a load/store-address trigger.
//
// DeTRAP write-protects a shadow stack without memory-protection hardware: it
// places all write-limited data (MMIO, trusted code and data, rodata, shadow
// stack) low in the address space and the privileged (trusted) code at the
// very bottom, then programs three triggers:
//   trigger 0  execute, PC >= bottom of untrusted code, chained to trigger 1
//   trigger 1  store,   address < bottom of untrusted stack
//   trigger 2  store,   address == top (last entry) of the shadow stack
// so that any store by untrusted code into the write-limited region, and any
// store into the last shadow-stack slot, raises a breakpoint exception before
// the store is performed.
//
// Blocks:
//   trigger_csr      tselect/tdata1/tdata2 registers with WARL filtering
//   pc_bpu           per-trigger PC matches ("pretriggers"), fetch breakpoints
//   pretrigger_pipe  carries the pretriggers through the decode and execute
//                    output registers alongside the instruction
//   mem_bpu          load/store address matches combined with the
//                    instruction's pretriggers, load/store breakpoints
//
// Interface (all signals belong to the core's pipeline):
//   csr_*                 CSR access from the core's CSR unit; csr_wdata is the
//                         final value of the CSR instruction (read-modify-write
//                         done by the core); writes act at the clock edge.
//   dec_valid, dec_pc     instruction being handed to decode
//   xcpt_if, debug_if     fetch breakpoint for that instruction (combinational)
//   id_ex_load/kill,      advance / bubble controls of the ID/EX and EX/MEM
//   ex_mem_load/kill      pipeline registers (kill wins)
//   mem_valid, mem_load,  load or store at the input of the memory stage and
//   mem_store, mem_addr   its effective address
//   xcpt_ld/st, debug_ld/st  load/store breakpoint for that access
//                         (combinational, before the access is made)
// A store is flagged in the same cycle it sits in the memory stage; its
// pretriggers were taken when it was in decode, two pipeline advances earlier.
module detrap_bpu_top
  import detrap_pkg::*;
#(
  parameter int unsigned N = NTRIG
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       priv,
  input  logic             debug_mode,
  // CSR port
  input  logic [11:0]      csr_addr,
  input  logic             csr_wen,
  input  logic [XLEN-1:0]  csr_wdata,
  output logic [XLEN-1:0]  csr_rdata,
  output logic             csr_hit,
  // decode-side instruction
  input  logic             dec_valid,
  input  logic [XLEN-1:0]  dec_pc,
  output logic             xcpt_if,
  output logic             debug_if,
  // pipeline register control
  input  logic             id_ex_load,
  input  logic             id_ex_kill,
  input  logic             ex_mem_load,
  input  logic             ex_mem_kill,
  // memory-stage access
  input  logic             mem_valid,
  input  logic             mem_load,
  input  logic             mem_store,
  input  logic [XLEN-1:0]  mem_addr,
  output logic             xcpt_ld,
  output logic             xcpt_st,
  output logic             debug_ld,
  output logic             debug_st
);

  trig_t [N-1:0] trig;
  logic  [N-1:0] dec_pretrig, ex_pretrig, mem_pretrig;

  trigger_csr #(.N(N)) u_csr (
    .clk        (clk),
    .rst_n      (rst_n),
    .debug_mode (debug_mode),
    .csr_addr   (csr_addr),
    .csr_wen    (csr_wen),
    .csr_wdata  (csr_wdata),
    .csr_rdata  (csr_rdata),
    .csr_hit    (csr_hit),
    .trig       (trig)
  );

  pc_bpu #(.N(N)) u_pc_bpu (
    .trig       (trig),
    .priv       (priv),
    .debug_mode (debug_mode),
    .valid      (dec_valid),
    .pc         (dec_pc),
    .pretrig    (dec_pretrig),
    .xcpt_if    (xcpt_if),
    .debug_if   (debug_if)
  );

  pretrigger_pipe #(.N(N)) u_pipe (
    .clk         (clk),
    .rst_n       (rst_n),
    .dec_pretrig (dec_pretrig),
    .id_ex_load  (id_ex_load),
    .id_ex_kill  (id_ex_kill),
    .ex_mem_load (ex_mem_load),
    .ex_mem_kill (ex_mem_kill),
    .ex_pretrig  (ex_pretrig),
    .mem_pretrig (mem_pretrig)
  );

  mem_bpu #(.N(N)) u_mem_bpu (
    .trig       (trig),
    .priv       (priv),
    .debug_mode (debug_mode),
    .valid      (mem_valid),
    .is_load    (mem_load),
    .is_store   (mem_store),
    .addr       (mem_addr),
    .pretrig    (mem_pretrig),
    .xcpt_ld    (xcpt_ld),
    .xcpt_st    (xcpt_st),
    .debug_ld   (debug_ld),
    .debug_st   (debug_st)
  );

  // An access is a load or a store, never both.
  a_ld_xor_st: assert property (@(posedge clk) disable iff (!rst_n)
                                mem_valid |-> !(mem_load && mem_store));

endmodule

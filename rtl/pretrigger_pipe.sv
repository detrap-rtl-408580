// pretrigger_pipe -- pipeline registers that carry each instruction's
// per-trigger PC matches ("pretriggers") from decode to the memory stage.
//
// In an in-order pipeline the PC check and the load/store address check see
// different instructions in any one cycle. Following the paper, two registers
// are added, one at the output of decode (ex_pretrig, beside the ID/EX
// pipeline register) and one at the output of execute (mem_pretrig, beside
// the EX/MEM register), so that the pretriggers arrive at the memory stage
// together with the instruction they belong to.
//
// Each register follows its pipeline register's control:
//   *_kill  the stage receives a bubble or is flushed: clear the bits;
//   *_load  the instruction advances into the next stage: capture;
//   neither the stage stalls: hold.
// kill wins over load. Synchronous active-low reset clears both registers.
module pretrigger_pipe #(
  parameter int unsigned N = detrap_pkg::NTRIG
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] dec_pretrig,   // pretriggers of the instruction in decode
  input  logic         id_ex_load,    // decode -> execute advance
  input  logic         id_ex_kill,    // execute receives a bubble / flush
  input  logic         ex_mem_load,   // execute -> memory advance
  input  logic         ex_mem_kill,   // memory receives a bubble / flush
  output logic [N-1:0] ex_pretrig,    // pretriggers of the instruction in execute
  output logic [N-1:0] mem_pretrig    // pretriggers of the instruction in memory
);

  always_ff @(posedge clk) begin
    if (!rst_n || id_ex_kill) ex_pretrig <= '0;
    else if (id_ex_load)      ex_pretrig <= dec_pretrig;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || ex_mem_kill) mem_pretrig <= '0;
    else if (ex_mem_load)      mem_pretrig <= ex_pretrig;
  end

endmodule

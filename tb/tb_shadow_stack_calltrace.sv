// tb_shadow_stack_calltrace -- the DeTRAP store pattern of function calls and
// returns, run through the trigger module in its 4-trigger configuration.
//
// Each call of an instrumented (non-leaf) function is modelled by the stores
// and loads it makes:
//   trampoline (trusted code):  store ra to the shadow stack at ssp, ssp += 4
//   prologue (untrusted code):  store a copy of ra and a frame on the
//                               untrusted stack (sp -= FRAME)
//   body (untrusted code):      loads and stores to heap and own frame
//   epilogue (untrusted code):  load ra from ssp-4, ssp -= 4, sp += FRAME
// Instructions stream through the module with one instruction per cycle in
// decode, execute and memory. Three runs:
//   A  deep recursion with small frames: the first trap must be the store of
//      the trampoline into the last shadow-stack slot, at depth SS_SLOTS;
//   B  recursion with large frames: the first trap must be the untrusted stack
//      overflow, at the depth where sp drops below the stack's bottom;
//   C  a random call tree within both limits, with an attack store injected
//      at a random point by untrusted code into the shadow stack: no trap may
//      occur before the attack and the attack itself must trap.
// The trap depths are worked out from the sizes alone.
module tb_shadow_stack_calltrace;
  import detrap_pkg::*;

  localparam int unsigned N = 4;   // trigger count of the area-evaluation core

  localparam logic [31:0] TRUSTED_CODE   = 32'h8000_0000;
  localparam logic [31:0] UNTRUSTED_CODE = 32'h8000_4000;
  localparam logic [31:0] SHADOW_STACK   = 32'h8003_0000;
  localparam int          SS_SLOTS       = 64;
  localparam logic [31:0] SS_TOP_SLOT    = SHADOW_STACK + 32'(4 * (SS_SLOTS - 1));
  localparam logic [31:0] UNTRUSTED_STK  = 32'h8004_0000;   // bottom of untrusted stack
  localparam logic [31:0] SP0            = 32'h8004_0800;   // initial sp (2 KiB stack)
  localparam logic [31:0] HEAP           = 32'h8006_0000;

  logic        clk = 0, rst_n = 0;
  logic [1:0]  priv = 2'd3;
  logic        debug_mode = 0;
  logic [11:0] csr_addr = '0;
  logic        csr_wen = 0;
  logic [31:0] csr_wdata = '0, csr_rdata;
  logic        csr_hit;
  logic        dec_valid = 0;
  logic [31:0] dec_pc = '0;
  logic        xcpt_if, debug_if;
  logic        id_ex_load = 0, id_ex_kill = 0, ex_mem_load = 0, ex_mem_kill = 0;
  logic        mem_valid = 0, mem_load = 0, mem_store = 0;
  logic [31:0] mem_addr = '0;
  logic        xcpt_ld, xcpt_st, debug_ld, debug_st;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic        ld, st;
    logic [31:0] addr;
  } ins_t;

  ins_t q[$];                 // instructions of the current run, in order
  ins_t ex_i, mem_i;
  int   checks = 0, failures = 0;
  int   trap_index;           // index in q of the first trapping instruction, -1 if none
  logic [31:0] ssp, sp;

  detrap_bpu_top #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic csr_wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    csr_addr = a; csr_wdata = d; csr_wen = 1;
    @(negedge clk);
    csr_wen = 0;
  endtask

  function automatic logic [31:0] mc(logic chain, match_e match, logic x, logic st);
    mcontrol_t c;
    c = '0;
    c.ttype = TTYPE_MCONTROL; c.chain = chain; c.match = 4'(match); c.m = 1'b1;
    c.execute = x; c.store = st;
    return 32'(c);
  endfunction

  function automatic ins_t mk(logic [31:0] pc, logic ld, logic st, logic [31:0] a);
    ins_t i;
    i.valid = 1; i.pc = pc; i.ld = ld; i.st = st; i.addr = a;
    return i;
  endfunction

  function automatic logic [31:0] upc();
    return UNTRUSTED_CODE + 32'(($urandom % 32'h4000) << 2);
  endfunction

  // one call: trampoline, prologue with frame of `frame` bytes
  task automatic do_call(int frame);
    q.push_back(mk(TRUSTED_CODE + 32'h100, 0, 1, ssp));          // sw ra, 0(ssp)
    q.push_back(mk(TRUSTED_CODE + 32'h104, 0, 0, 0));            // addi ssp, ssp, 4
    ssp += 4;
    sp -= 32'(frame);
    q.push_back(mk(upc(), 0, 1, sp + 32'(frame) - 4));           // sw ra copy
    q.push_back(mk(upc(), 0, 1, sp));                            // frame store
  endtask

  task automatic do_body();
    repeat ($urandom % 4) begin
      if ($urandom % 2) q.push_back(mk(upc(), 1, 0, HEAP + 32'(($urandom % 1024) << 2)));
      else              q.push_back(mk(upc(), 0, 1, ($urandom % 2) ? HEAP + 32'(($urandom % 1024) << 2) : sp));
    end
  endtask

  task automatic do_return(int frame);
    q.push_back(mk(upc(), 1, 0, ssp - 4));                       // lw ra, -4(ssp)
    q.push_back(mk(upc(), 0, 0, 0));                             // addi ssp, ssp, -4
    ssp -= 4;
    sp += 32'(frame);
  endtask

  // stream q through the module; record the first trapping instruction
  task automatic run_stream();
    int n;
    n = q.size();
    ex_i = '0; mem_i = '0;
    trap_index = -1;
    for (int k = 0; k < n + 2; k++) begin
      ins_t d;
      d = (k < n) ? q[k] : '0;
      @(negedge clk);
      dec_valid = d.valid; dec_pc = d.pc;
      mem_valid = mem_i.valid; mem_load = mem_i.ld; mem_store = mem_i.st; mem_addr = mem_i.addr;
      id_ex_load = 1; ex_mem_load = 1;
      #1;
      checks++;
      if (xcpt_if || debug_if || debug_ld || debug_st || xcpt_ld) begin
        failures++; $display("FAIL unexpected breakpoint kind at %0d", k);
      end
      if (xcpt_st) begin
        trap_index = k - 2;
        break;
      end
      @(posedge clk);
      mem_i = ex_i;
      ex_i  = d;
    end
    // the trap handler ends the program: flush
    @(negedge clk);
    dec_valid = 0; mem_valid = 0; mem_load = 0; mem_store = 0;
    id_ex_kill = 1; ex_mem_kill = 1;
    @(negedge clk);
    id_ex_kill = 0; ex_mem_kill = 0;
  endtask

  initial begin
    int depth, exp_depth, attack_at;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the policy in four triggers
    csr_wr(CSR_TSELECT, 0);
    csr_wr(CSR_TDATA1, mc(1, MATCH_GE, 1, 0));
    csr_wr(CSR_TDATA2, UNTRUSTED_CODE);
    csr_wr(CSR_TSELECT, 1);
    csr_wr(CSR_TDATA1, mc(0, MATCH_LT, 0, 1));
    csr_wr(CSR_TDATA2, UNTRUSTED_STK);
    csr_wr(CSR_TSELECT, 2);
    csr_wr(CSR_TDATA1, mc(0, MATCH_EQ, 0, 1));
    csr_wr(CSR_TDATA2, SS_TOP_SLOT);

    // ---- A: shadow stack overflow ----
    q.delete(); ssp = SHADOW_STACK; sp = SP0;
    for (int d = 0; d < SS_SLOTS + 4; d++) begin do_call(8); do_body(); end
    run_stream();
    check(trap_index >= 0, "A: a trap occurred");
    // the trapping instruction must be the trampoline store into the last slot
    check(trap_index >= 0 && q[trap_index].pc == TRUSTED_CODE + 32'h100 &&
          q[trap_index].addr == SS_TOP_SLOT, "A: trap is the store into the last slot");
    depth = 0;
    for (int k = 0; k <= trap_index; k++) if (q[k].pc == TRUSTED_CODE + 32'h100) depth++;
    check(depth == SS_SLOTS, $sformatf("A: trap at call depth %0d, expected %0d", depth, SS_SLOTS));
    $display("A: shadow-stack overflow trapped at depth %0d", depth);

    // ---- B: untrusted stack overflow (frames of 64 bytes) ----
    q.delete(); ssp = SHADOW_STACK; sp = SP0;
    for (int d = 0; d < 40; d++) begin do_call(64); do_body(); end
    run_stream();
    // first store below the bottom: frame store of the call whose sp < bottom,
    // unless the ra copy (at sp + 60) of that call is already below it
    exp_depth = int'((SP0 - UNTRUSTED_STK) / 64) + 1;
    depth = 0;
    for (int k = 0; k <= trap_index; k++) if (q[k].pc == TRUSTED_CODE + 32'h100) depth++;
    check(trap_index >= 0 && q[trap_index].addr < UNTRUSTED_STK && q[trap_index].pc >= UNTRUSTED_CODE,
          "B: trap is an untrusted store below the stack");
    check(depth == exp_depth, $sformatf("B: trap at call depth %0d, expected %0d", depth, exp_depth));
    $display("B: untrusted stack overflow trapped at depth %0d", depth);

    // ---- C: random call tree with one attack ----
    for (int run = 0; run < 20; run++) begin
      q.delete(); ssp = SHADOW_STACK; sp = SP0;
      depth = 0;
      attack_at = -1;
      for (int step = 0; step < 300; step++) begin
        if (depth < 20 && (depth == 0 || $urandom % 2)) begin do_call(16); depth++; end
        else begin do_return(16); depth--; end
        do_body();
        if (attack_at < 0 && step > 100 && depth > 0 && $urandom % 50 == 0) begin
          attack_at = q.size();
          q.push_back(mk(upc(), 0, 1, ssp - 4));                  // overwrite saved ra
        end
      end
      if (attack_at < 0) begin attack_at = q.size(); q.push_back(mk(upc(), 0, 1, SHADOW_STACK)); end
      run_stream();
      check(trap_index == attack_at,
            $sformatf("C%0d: first trap at %0d, attack at %0d", run, trap_index, attack_at));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

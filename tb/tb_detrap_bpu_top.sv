// tb_detrap_bpu_top -- end-to-end test of the DeTRAP breakpoint module at its
// default size (32-bit, 8 triggers).
//
// The test plays the trusted runtime: through the CSR port it programs the
// DeTRAP policy for a memory map laid out as the design requires
//   0x0000_0000  MMIO                         \
//   0x8000_0000  trusted code (privileged)     |
//   0x8000_4000  untrusted code                | write-limited region
//   0x8002_0000  trusted data                  |
//   0x8003_0000  shadow stack (grows up),      |
//                last slot 0x8003_0FFC         |
//   0x8003_1000  untrusted rodata             /
//   0x8004_0000  untrusted stack (grows down), then untrusted data and heap
// with trigger 0 (execute, PC >= 0x8000_4000) chained to trigger 1 (store,
// address < 0x8004_0000) and trigger 2 (store, address == 0x8003_0FFC). It
// also sets an execute breakpoint (trigger 3), a masked load watch on the
// 64 KiB page 0x8003_xxxx (trigger 4, mask-high match) and, from debug mode, a
// debug-mode-only load trigger with the enter-debug action (trigger 5).
//
// A three-stage model of the core (decode, execute, memory) then streams
// random trusted and untrusted instructions through the module with random
// memory stalls, branch flushes and trap flushes. For every load/store that
// reaches the memory stage the expected breakpoint is worked out from the
// memory map alone (not from trigger semantics) and compared. Each mechanism
// is counted and must occur: the mixed PC/store chain firing, untrusted
// stack overflow, shadow-stack overflow, trusted stores to the write-limited
// region passing, untrusted stores outside it passing, fetch breakpoint,
// masked load match, debug-mode action, stall, flush, and WARL rejection of an illegal chain.
module tb_detrap_bpu_top;
  import detrap_pkg::*;

  localparam logic [31:0] TRUSTED_CODE   = 32'h8000_0000;
  localparam logic [31:0] UNTRUSTED_CODE = 32'h8000_4000;
  localparam logic [31:0] TRUSTED_DATA   = 32'h8002_0000;
  localparam logic [31:0] SHADOW_STACK   = 32'h8003_0000;
  localparam logic [31:0] SS_TOP_SLOT    = 32'h8003_0FFC;
  localparam logic [31:0] UNTRUSTED_RO   = 32'h8003_1000;
  localparam logic [31:0] UNTRUSTED_STK  = 32'h8004_0000;
  localparam logic [31:0] UNTRUSTED_DATA = 32'h8005_0000;
  localparam logic [31:0] BP_PC          = 32'h8000_6000;  // execute breakpoint
  localparam logic [31:0] DBG_ADDR       = 32'h0000_0100;  // debug-mode load watch
  localparam logic [15:0] WATCH_PAGE     = 16'h8003;       // masked load watch (upper half)

  typedef enum logic [1:0] {K_ALU, K_LOAD, K_STORE} kind_e;
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    kind_e       kind;
    logic [31:0] addr;
    logic        fetch_bp;   // took a fetch breakpoint: no memory access
  } instr_t;

  logic             clk = 0, rst_n = 0;
  logic [1:0]       priv = 2'd3;
  logic             debug_mode = 0;
  logic [11:0]      csr_addr = '0;
  logic             csr_wen = 0;
  logic [31:0]      csr_wdata = '0, csr_rdata;
  logic             csr_hit;
  logic             dec_valid = 0;
  logic [31:0]      dec_pc = '0;
  logic             xcpt_if, debug_if;
  logic             id_ex_load = 0, id_ex_kill = 0, ex_mem_load = 0, ex_mem_kill = 0;
  logic             mem_valid = 0, mem_load = 0, mem_store = 0;
  logic [31:0]      mem_addr = '0;
  logic             xcpt_ld, xcpt_st, debug_ld, debug_st;

  instr_t dec_i, ex_i, mem_i;
  int checks = 0, failures = 0;
  int n_wp = 0, n_stk_ovf = 0, n_ss_ovf = 0, n_trusted_ok = 0, n_untrusted_ok = 0;
  int n_fetch_bp = 0, n_debug = 0, n_mask = 0, n_stall = 0, n_flush = 0, n_warl = 0, n_loads_ok = 0;
  logic [31:0] ssp;   // trusted shadow stack pointer

  detrap_bpu_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic csr_rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    csr_addr = a;
    #1 d = csr_rdata;
  endtask

  function automatic logic [31:0] mc(logic dmode, logic [3:0] action, logic chain,
                                     match_e match, logic x, logic st, logic ld);
    mcontrol_t c;
    c = '0;
    c.ttype = TTYPE_MCONTROL; c.maskmax = 6'd31; c.dmode = dmode; c.action = action; c.chain = chain;
    c.match = 4'(match); c.m = 1'b1; c.execute = x; c.store = st; c.load = ld;
    return 32'(c);
  endfunction

  // Next instruction of the random program
  function automatic instr_t gen();
    instr_t i;
    int r;
    i = '0;
    i.valid = 1;
    r = $urandom % 100;
    if (r < 35) begin
      // trusted code: shadow-stack pushes, trusted data, MMIO
      i.pc = TRUSTED_CODE + 32'(($urandom % 32'h1000) << 2);
      i.kind = ($urandom % 3 == 0) ? K_LOAD : K_STORE;
      case ($urandom % 4)
        0, 1: begin
          i.addr = ssp;
          if (i.kind == K_STORE) ssp = (ssp >= SS_TOP_SLOT) ? SHADOW_STACK : ssp + 4;
        end
        2: i.addr = TRUSTED_DATA + 32'(($urandom % 32'h1000) << 2);
        default: i.addr = ($urandom % 2) ? DBG_ADDR : 32'(($urandom % 32'h400) << 2);
      endcase
    end else if (r < 95) begin
      // untrusted code
      i.pc = UNTRUSTED_CODE + 32'(($urandom % 32'h7000) << 2);
      if ($urandom % 16 == 0) i.pc = BP_PC;
      i.kind = kind_e'($urandom % 3);
      case ($urandom % 8)
        0: i.addr = SHADOW_STACK + 32'(($urandom % 32'h400) << 2);        // attack
        1: i.addr = TRUSTED_DATA + 32'(($urandom % 32'h1000) << 2);       // attack
        2: i.addr = 32'(($urandom % 32'h400) << 2);                       // MMIO
        3: i.addr = UNTRUSTED_STK - 32'(($urandom % 8 + 1) << 2);          // stack overflow
        4: i.addr = UNTRUSTED_STK + 32'(($urandom % 8) << 2);              // stack bottom
        5: i.addr = ($urandom % 2) ? SS_TOP_SLOT : UNTRUSTED_RO;
        default: i.addr = UNTRUSTED_DATA + 32'(($urandom % 32'h4000) << 2);
      endcase
    end else begin
      i.pc = TRUSTED_CODE + 32'(($urandom % 32'h1000) << 2);
      i.kind = K_ALU;
    end
    return i;
  endfunction

  // Expected response for the instruction in the memory stage, from the map
  task automatic check_mem(instr_t i);
    logic untrusted, exp_xst, exp_xld, exp_dld;
    untrusted = i.pc >= UNTRUSTED_CODE;
    exp_xst = i.valid && !i.fetch_bp && i.kind == K_STORE &&
              ((untrusted && i.addr < UNTRUSTED_STK) || i.addr == SS_TOP_SLOT);
    exp_xld = i.valid && !i.fetch_bp && i.kind == K_LOAD && i.addr[31:16] == WATCH_PAGE;
    exp_dld = i.valid && !i.fetch_bp && i.kind == K_LOAD && i.addr == DBG_ADDR;
    checks++;
    if (xcpt_st !== exp_xst || xcpt_ld !== exp_xld || debug_ld !== exp_dld || debug_st !== 1'b0) begin
      failures++;
      if (failures <= 20) $display("FAIL mem pc=%h kind=%0d addr=%h: xst=%b/%b xld=%b/%b dld=%b/%b dst=%b",
               i.pc, i.kind, i.addr, xcpt_st, exp_xst, xcpt_ld, exp_xld, debug_ld, exp_dld,
               debug_st);
    end
    if (exp_xld) n_mask++;
    if (i.valid && !i.fetch_bp && i.kind == K_STORE) begin
      if (i.addr == SS_TOP_SLOT) n_ss_ovf++;
      else if (untrusted && i.addr < UNTRUSTED_STK && i.addr >= UNTRUSTED_RO + 32'h1000) n_stk_ovf++;
      else if (untrusted && i.addr < UNTRUSTED_STK) n_wp++;
      else if (!untrusted && i.addr < UNTRUSTED_STK) n_trusted_ok++;
      else n_untrusted_ok++;
    end
    if (i.valid && !i.fetch_bp && i.kind == K_LOAD && !exp_dld && !exp_xld) n_loads_ok++;
    if (exp_dld) n_debug++;
  endtask

  initial begin
    logic [31:0] d;
    logic stall, bflush, trap;
    ssp = SHADOW_STACK;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- program the policy (trusted runtime start-up) ----
    csr_wr(CSR_TSELECT, 0);
    csr_wr(CSR_TDATA1, mc(0, 0, 1, MATCH_GE, 1, 0, 0));
    csr_wr(CSR_TDATA2, UNTRUSTED_CODE);
    csr_wr(CSR_TSELECT, 1);
    // try to extend the chain to three triggers: must read back unchained
    csr_wr(CSR_TDATA1, mc(0, 0, 1, MATCH_LT, 0, 1, 0));
    csr_rd(CSR_TDATA1, d);
    check(d == mc(0, 0, 0, MATCH_LT, 0, 1, 0), "WARL chain read-back");
    if (d == mc(0, 0, 0, MATCH_LT, 0, 1, 0)) n_warl++;
    csr_wr(CSR_TDATA2, UNTRUSTED_STK);
    csr_wr(CSR_TSELECT, 2);
    csr_wr(CSR_TDATA1, mc(0, 0, 0, MATCH_EQ, 0, 1, 0));
    csr_wr(CSR_TDATA2, SS_TOP_SLOT);
    csr_wr(CSR_TSELECT, 3);
    csr_wr(CSR_TDATA1, mc(0, 0, 0, MATCH_EQ, 1, 0, 0));
    csr_wr(CSR_TDATA2, BP_PC);
    csr_wr(CSR_TSELECT, 4);
    csr_wr(CSR_TDATA1, mc(0, 0, 0, MATCH_MASK_HI, 0, 0, 1));
    csr_wr(CSR_TDATA2, {16'hFFFF, WATCH_PAGE});
    // debug-mode-only trigger with the enter-debug action
    debug_mode = 1;
    csr_wr(CSR_TSELECT, 5);
    csr_wr(CSR_TDATA1, mc(1, 1, 0, MATCH_EQ, 0, 0, 1));
    csr_wr(CSR_TDATA2, DBG_ADDR);
    debug_mode = 0;
    // untrusted-style attempt to disable it from machine mode is ignored
    csr_wr(CSR_TDATA1, 32'h0);
    csr_rd(CSR_TDATA1, d);
    check(d == mc(1, 1, 0, MATCH_EQ, 0, 0, 1), "dmode trigger locked");
    csr_rd(CSR_TSELECT, d);
    check(d == 5, "tselect read-back");

    // ---- run the program through the pipeline model ----
    dec_i = gen(); ex_i = '0; mem_i = '0;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      dec_valid = dec_i.valid; dec_pc = dec_i.pc;
      mem_valid = mem_i.valid;
      mem_load  = mem_i.valid && !mem_i.fetch_bp && mem_i.kind == K_LOAD;
      mem_store = mem_i.valid && !mem_i.fetch_bp && mem_i.kind == K_STORE;
      mem_addr  = mem_i.addr;
      #1;
      // fetch breakpoint of the decoding instruction, from the map
      checks++;
      if (xcpt_if !== (dec_i.valid && dec_i.pc == BP_PC) || debug_if !== 1'b0) begin
        failures++;
        if (failures <= 20) $display("FAIL fetch pc=%h xcpt_if=%b", dec_i.pc, xcpt_if);
      end
      check_mem(mem_i);
      trap   = xcpt_st || xcpt_ld || debug_ld;
      stall  = !trap && ($urandom % 6 == 0);
      bflush = !trap && !stall && ($urandom % 12 == 0);
      id_ex_load  = !stall;
      ex_mem_load = !stall;
      id_ex_kill  = trap || bflush;
      ex_mem_kill = trap;
      if (stall && mem_i.valid) n_stall++;
      if (trap || bflush) n_flush++;
      @(posedge clk);
      // advance the model the same way
      if (trap) begin
        mem_i = '0; ex_i = '0;
        dec_i = gen();
      end else if (!stall) begin
        mem_i = ex_i;
        if (dec_i.valid && dec_i.pc == BP_PC) begin dec_i.fetch_bp = 1; n_fetch_bp++; end
        ex_i  = bflush ? '0 : dec_i;
        dec_i = gen();
      end
      #1 id_ex_kill = 0; ex_mem_kill = 0;
    end

    // every mechanism must have happened
    check(n_wp > 0,           "untrusted store into write-limited region trapped");
    check(n_stk_ovf > 0,      "untrusted stack overflow trapped");
    check(n_ss_ovf > 0,       "shadow stack overflow trapped");
    check(n_trusted_ok > 0,   "trusted stores to write-limited region passed");
    check(n_untrusted_ok > 0, "untrusted stores outside it passed");
    check(n_loads_ok > 0,     "loads passed");
    check(n_fetch_bp > 0,     "fetch breakpoint");
    check(n_debug > 0,        "debug-mode action");
    check(n_mask > 0,         "masked load match");
    check(n_stall > 0,        "stall");
    check(n_flush > 0,        "flush");
    check(n_warl > 0,         "WARL chain limit");
    $display("write-protect traps %0d, stack overflows %0d, shadow-stack overflows %0d",
             n_wp, n_stk_ovf, n_ss_ovf);
    $display("trusted WL stores %0d, other untrusted stores %0d, loads %0d",
             n_trusted_ok, n_untrusted_ok, n_loads_ok);
    $display("fetch bps %0d, masked loads %0d, debug %0d, stalls %0d, flushes %0d", n_fetch_bp,
             n_mask, n_debug, n_stall, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

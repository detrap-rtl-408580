// tb_mem_bpu -- self-checking test of the memory-stage breakpoint unit.
// First the DeTRAP write-protection chain (PC >= untrusted code AND store
// address < untrusted stack, given as a pretrigger plus a store trigger) and
// the lone shadow-stack overflow trigger, then random legal configurations
// against the reference model.
module tb_mem_bpu;
  import detrap_pkg::*;
  import detrap_ref_pkg::*;

  trig_t [NTRIG-1:0] trig;
  logic [1:0]        priv;
  logic              debug_mode, valid, is_load, is_store;
  logic [XLEN-1:0]   addr;
  logic [NTRIG-1:0]  pretrig;
  logic              xcpt_ld, xcpt_st, debug_ld, debug_st;
  ref_res_t          r;
  int checks = 0, failures = 0, fired = 0;

  mem_bpu dut (.trig(trig), .priv(priv), .debug_mode(debug_mode), .valid(valid),
               .is_load(is_load), .is_store(is_store), .addr(addr), .pretrig(pretrig),
               .xcpt_ld(xcpt_ld), .xcpt_st(xcpt_st), .debug_ld(debug_ld), .debug_st(debug_st));

  task automatic expect_out(logic xl, logic xs, logic dl, logic ds, string what);
    #1;
    checks++;
    if ({xcpt_ld, xcpt_st, debug_ld, debug_st} !== {xl, xs, dl, ds}) begin
      failures++;
      if (failures <= 20) $display("FAIL %s: got %b%b%b%b exp %b%b%b%b", what, xcpt_ld, xcpt_st, debug_ld,
               debug_st, xl, xs, dl, ds);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---- DeTRAP policy (untrusted code at 0x2000, untrusted stack bottom
    //      0x8000, shadow stack top slot 0x6FFC) ----
    trig = '0;
    for (int i = 0; i < NTRIG; i++) begin
      trig[i].ctl.ttype = 4'd2;
      trig[i].ctl.maskmax = 6'd31;
    end
    trig[0].ctl.execute = 1; trig[0].ctl.m = 1; trig[0].ctl.chain = 1;
    trig[0].ctl.match = 4'(MATCH_GE); trig[0].tdata2 = 32'h2000;
    trig[1].ctl.store = 1; trig[1].ctl.m = 1;
    trig[1].ctl.match = 4'(MATCH_LT); trig[1].tdata2 = 32'h8000;
    trig[2].ctl.store = 1; trig[2].ctl.m = 1;
    trig[2].ctl.match = 4'(MATCH_EQ); trig[2].tdata2 = 32'h6FFC;
    priv = 2'd3; debug_mode = 0; valid = 1; is_load = 0; is_store = 1;
    // untrusted store into the write-limited region
    pretrig = 8'b0000_0001; addr = 32'h5000; expect_out(0, 1, 0, 0, "untrusted store to WL");
    // untrusted store just below the untrusted stack (overflow)
    addr = 32'h7FFF; expect_out(0, 1, 0, 0, "untrusted stack overflow");
    // untrusted store to its own stack
    addr = 32'h8000; expect_out(0, 0, 0, 0, "untrusted store to stack");
    // untrusted load from the write-limited region is allowed
    is_load = 1; is_store = 0; addr = 32'h5000; expect_out(0, 0, 0, 0, "untrusted load WL");
    // trusted store into the write-limited region is allowed
    is_load = 0; is_store = 1; pretrig = '0; addr = 32'h5000;
    expect_out(0, 0, 0, 0, "trusted store to WL");
    // any store to the last shadow stack slot traps
    addr = 32'h6FFC; expect_out(0, 1, 0, 0, "shadow stack overflow");
    // no instruction in the stage
    valid = 0; pretrig = 8'b1; addr = 32'h5000; expect_out(0, 0, 0, 0, "invalid");

    // ---- random ----
    for (int it = 0; it < 5000; it++) begin
      logic [XLEN-1:0] pc;
      pc         = $urandom;
      addr       = $urandom;
      trig       = rand_trigs(pc, addr);
      priv       = ($urandom % 4 == 0) ? 2'd0 : 2'd3;
      debug_mode = ($urandom % 16 == 0);
      valid      = ($urandom % 8 != 0);
      is_load    = $urandom % 2;
      is_store   = !is_load && ($urandom % 4 != 0);
      pretrig    = ref_pc(trig, priv, debug_mode, 1'b1, pc).pretrig;
      #1;
      r = ref_mem(trig, priv, debug_mode, valid, is_load, is_store, addr, pretrig);
      checks++;
      if ({xcpt_ld, xcpt_st, debug_ld, debug_st} !==
          {r.xcpt && is_load, r.xcpt && is_store, r.debug && is_load, r.debug && is_store}) begin
        failures++;
        if (failures <= 20) $display("FAIL random it=%0d", it);
      end
      if (r.xcpt || r.debug) fired++;
    end
    checks++;
    if (fired < 100) begin failures++; $display("FAIL only %0d memory breakpoints", fired); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

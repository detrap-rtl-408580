// tb_pc_bpu -- self-checking test of the PC breakpoint unit. Random legal
// trigger configurations, privilege modes and PCs, compared with the
// reference model (per-trigger pretriggers and execute-only chain results).
module tb_pc_bpu;
  import detrap_pkg::*;
  import detrap_ref_pkg::*;

  trig_t [NTRIG-1:0] trig;
  logic [1:0]        priv;
  logic              debug_mode, valid;
  logic [XLEN-1:0]   pc;
  logic [NTRIG-1:0]  pretrig;
  logic              xcpt_if, debug_if;
  ref_res_t          r;
  int checks = 0, failures = 0, fired = 0;

  pc_bpu dut (.trig(trig), .priv(priv), .debug_mode(debug_mode), .valid(valid), .pc(pc),
              .pretrig(pretrig), .xcpt_if(xcpt_if), .debug_if(debug_if));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      pc         = $urandom & ~32'd1;
      trig       = rand_trigs(pc, $urandom);
      priv       = ($urandom % 4 == 0) ? 2'd0 : 2'd3;
      debug_mode = ($urandom % 16 == 0);
      valid      = ($urandom % 8 != 0);
      #1;
      r = ref_pc(trig, priv, debug_mode, valid, pc);
      checks++;
      if (pretrig !== r.pretrig || xcpt_if !== r.xcpt || debug_if !== r.debug) begin
        failures++;
        if (failures <= 20) $display("FAIL pc=%h pretrig=%b/%b xcpt=%b/%b dbg=%b/%b", pc, pretrig, r.pretrig,
                 xcpt_if, r.xcpt, debug_if, r.debug);
      end
      if (r.xcpt || r.debug) fired++;
    end
    // the check must have exercised firing chains
    checks++;
    if (fired < 100) begin failures++; $display("FAIL only %0d fetch breakpoints", fired); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_trigger_csr -- self-checking test of the trigger CSRs: tselect range,
// WARL filtering of tdata1 (fixed fields, match and action legality, the
// two-trigger chain limit, dmode), tdata2 storage, dmode write lock, and that
// the exported configuration equals what reads back.
module tb_trigger_csr;
  import detrap_pkg::*;

  logic              clk = 0, rst_n = 0, debug_mode = 0;
  logic [11:0]       csr_addr = '0;
  logic              csr_wen = 0;
  logic [XLEN-1:0]   csr_wdata = '0, csr_rdata;
  logic              csr_hit;
  trig_t [NTRIG-1:0] trig;
  int checks = 0, failures = 0;

  trigger_csr dut (.clk(clk), .rst_n(rst_n), .debug_mode(debug_mode), .csr_addr(csr_addr),
                   .csr_wen(csr_wen), .csr_wdata(csr_wdata), .csr_rdata(csr_rdata),
                   .csr_hit(csr_hit), .trig(trig));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [11:0] a, logic [XLEN-1:0] d);
    @(negedge clk);
    csr_addr = a; csr_wdata = d; csr_wen = 1;
    @(negedge clk);
    csr_wen = 0;
  endtask

  task automatic rd_check(logic [11:0] a, logic [XLEN-1:0] exp, string what);
    @(negedge clk);
    csr_addr = a;
    #1;
    checks++;
    if (csr_rdata !== exp || !csr_hit) begin
      failures++;
      $display("FAIL %s: read %h expected %h", what, csr_rdata, exp);
    end
  endtask

  // tdata1 word from fields
  function automatic logic [XLEN-1:0] mc(logic dmode, logic [3:0] action, logic chain,
                                         logic [3:0] match, logic m, logic s, logic u,
                                         logic x, logic st, logic ld);
    return {4'd2, dmode, 6'd31, 1'b0, 1'b0, 1'b0, 2'b00, action, chain, match,
            m, 1'b0, s, u, x, st, ld};
  endfunction

  localparam logic [XLEN-1:0] RESET_T1 = {4'd2, 1'b0, 6'd31, 21'd0};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    for (int i = 0; i < NTRIG; i++) begin
      wr(CSR_TSELECT, i);
      rd_check(CSR_TSELECT, i, "tselect");
      rd_check(CSR_TDATA1, RESET_T1, "tdata1 reset");
      rd_check(CSR_TDATA2, 0, "tdata2 reset");
    end
    // out-of-range tselect is ignored
    wr(CSR_TSELECT, 3);
    wr(CSR_TSELECT, NTRIG);
    rd_check(CSR_TSELECT, 3, "tselect out of range");
    rd_check(CSR_TINFO, 32'h4, "tinfo");
    rd_check(CSR_TDATA3, 0, "tdata3");
    // WARL: type, maskmax, hit, select, timing, sizelo, bit 5 and s are fixed;
    // illegal match -> equal; action 1 without dmode -> 0
    wr(CSR_TSELECT, 0);
    wr(CSR_TDATA1, 32'hF7FF_FFFF & ~(32'h1 << 11) & ~(32'hF << 7) | (32'd10 << 7));
    rd_check(CSR_TDATA1, mc(0, 4'd0, 0, 4'd0, 1, 0, 1, 1, 1, 1), "tdata1 WARL");
    wr(CSR_TDATA1, mc(0, 4'd1, 0, 4'd3, 1, 0, 0, 0, 1, 0));
    rd_check(CSR_TDATA1, mc(0, 4'd0, 0, 4'd3, 1, 0, 0, 0, 1, 0), "action needs dmode");
    // every legal match code is kept, every other one becomes equal
    for (int m = 0; m < 16; m++) begin
      wr(CSR_TDATA1, mc(0, 4'd0, 0, 4'(m), 1, 0, 0, 0, 1, 0));
      rd_check(CSR_TDATA1, mc(0, 4'd0, 0, (m inside {0, 1, 2, 3, 4, 5, 8, 9, 12, 13}) ? 4'(m) : 4'd0,
                              1, 0, 0, 0, 1, 0), "match legality");
    end
    wr(CSR_TDATA2, 32'hDEAD_BEEF);
    rd_check(CSR_TDATA2, 32'hDEAD_BEEF, "tdata2");
    // chain of two: 0 -> 1 allowed, then 1 cannot chain (would make three)
    wr(CSR_TDATA1, mc(0, 0, 1, 4'd2, 1, 0, 0, 1, 0, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 1, 4'd2, 1, 0, 0, 1, 0, 0), "chain 0");
    wr(CSR_TSELECT, 1);
    wr(CSR_TDATA1, mc(0, 0, 1, 4'd3, 1, 0, 0, 0, 1, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 0, 4'd3, 1, 0, 0, 0, 1, 0), "chain limit below");
    // trigger 2 chained to 3, then trigger 1 may still not chain (2 chains)
    wr(CSR_TSELECT, 2);
    wr(CSR_TDATA1, mc(0, 0, 1, 4'd0, 1, 0, 0, 0, 1, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 1, 4'd0, 1, 0, 0, 0, 1, 0), "chain 2");
    wr(CSR_TSELECT, 1);
    wr(CSR_TDATA1, mc(0, 0, 1, 4'd3, 1, 0, 0, 0, 1, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 0, 4'd3, 1, 0, 0, 0, 1, 0), "chain limit above");
    // last trigger cannot chain
    wr(CSR_TSELECT, NTRIG - 1);
    wr(CSR_TDATA1, mc(0, 0, 1, 4'd0, 1, 0, 0, 1, 0, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 0, 4'd0, 1, 0, 0, 1, 0, 0), "last no chain");
    // dmode only from debug mode
    wr(CSR_TSELECT, 5);
    wr(CSR_TDATA1, mc(1, 1, 0, 4'd0, 1, 0, 0, 1, 0, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 0, 4'd0, 1, 0, 0, 1, 0, 0), "dmode from M");
    debug_mode = 1;
    wr(CSR_TDATA1, mc(1, 1, 0, 4'd0, 1, 0, 0, 1, 0, 0));
    wr(CSR_TDATA2, 32'h1234);
    debug_mode = 0;
    rd_check(CSR_TDATA1, mc(1, 1, 0, 4'd0, 1, 0, 0, 1, 0, 0), "dmode set");
    // locked against writes outside debug mode
    wr(CSR_TDATA1, mc(0, 0, 0, 4'd0, 0, 0, 0, 0, 0, 0));
    wr(CSR_TDATA2, 32'h9999);
    rd_check(CSR_TDATA1, mc(1, 1, 0, 4'd0, 1, 0, 0, 1, 0, 0), "dmode lock tdata1");
    rd_check(CSR_TDATA2, 32'h1234, "dmode lock tdata2");
    // a non-dmode trigger may not chain into a dmode trigger
    wr(CSR_TSELECT, 4);
    wr(CSR_TDATA1, mc(0, 0, 1, 4'd0, 1, 0, 0, 1, 0, 0));
    rd_check(CSR_TDATA1, mc(0, 0, 0, 4'd0, 1, 0, 0, 1, 0, 0), "chain into dmode");
    // exported configuration equals read-back
    for (int i = 0; i < NTRIG; i++) begin
      wr(CSR_TSELECT, i);
      @(negedge clk);
      csr_addr = CSR_TDATA1; #1;
      checks++;
      if (XLEN'(trig[i].ctl) !== csr_rdata) begin failures++; $display("FAIL export ctl %0d", i); end
      csr_addr = CSR_TDATA2; #1;
      checks++;
      if (trig[i].tdata2 !== csr_rdata) begin failures++; $display("FAIL export t2 %0d", i); end
    end
    // non-trigger CSR
    csr_addr = 12'h300; #1;
    checks++;
    if (csr_hit) begin failures++; $display("FAIL csr_hit for 0x300"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

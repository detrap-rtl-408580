// tb_pretrigger_pipe -- self-checking test of the pretrigger pipeline
// registers. Random pretriggers with random advances (stalls) and kills
// (bubbles/flushes), compared each cycle with a two-register reference.
module tb_pretrigger_pipe;
  localparam int N = detrap_pkg::NTRIG;
  logic         clk = 0, rst_n = 0;
  logic [N-1:0] dec_pretrig = '0, ex_pretrig, mem_pretrig;
  logic         id_ex_load = 0, id_ex_kill = 0, ex_mem_load = 0, ex_mem_kill = 0;
  logic [N-1:0] r_ex, r_mem;
  int checks = 0, failures = 0, stalls = 0, kills = 0;

  pretrigger_pipe dut (.clk(clk), .rst_n(rst_n), .dec_pretrig(dec_pretrig),
                       .id_ex_load(id_ex_load), .id_ex_kill(id_ex_kill),
                       .ex_mem_load(ex_mem_load), .ex_mem_kill(ex_mem_kill),
                       .ex_pretrig(ex_pretrig), .mem_pretrig(mem_pretrig));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    r_ex = '0; r_mem = '0;
    checks++;
    if (ex_pretrig !== '0 || mem_pretrig !== '0) begin failures++; $display("FAIL reset"); end
    for (int c = 0; c < 5000; c++) begin
      dec_pretrig = N'($urandom);
      id_ex_load  = ($urandom % 4 != 0);
      id_ex_kill  = ($urandom % 10 == 0);
      ex_mem_load = ($urandom % 4 != 0);
      ex_mem_kill = ($urandom % 10 == 0);
      if (!ex_mem_load && !ex_mem_kill && r_ex != r_mem) stalls++;
      if (ex_mem_kill && r_ex != 0) kills++;
      @(posedge clk);
      // reference
      r_mem = ex_mem_kill ? '0 : (ex_mem_load ? r_ex : r_mem);
      r_ex  = id_ex_kill  ? '0 : (id_ex_load  ? dec_pretrig : r_ex);
      @(negedge clk);
      checks++;
      if (ex_pretrig !== r_ex || mem_pretrig !== r_mem) begin
        failures++;
        if (failures <= 20) $display("FAIL cycle %0d ex=%b/%b mem=%b/%b", c, ex_pretrig, r_ex, mem_pretrig, r_mem);
      end
    end
    checks++;
    if (stalls == 0 || kills == 0) begin failures++; $display("FAIL no stall or kill"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

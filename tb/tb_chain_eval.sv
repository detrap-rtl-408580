// tb_chain_eval -- self-checking test of chain evaluation. Random hit, memory
// hit and chain vectors, both modes, against a reference that walks back from
// each chain end.
module tb_chain_eval;
  localparam int N = detrap_pkg::NTRIG;
  logic [N-1:0] hit, mem_hit, chain, fire, exp_fire;
  logic         need_mem;
  int checks = 0, failures = 0;

  chain_eval dut (.hit(hit), .mem_hit(mem_hit), .chain(chain), .need_mem(need_mem), .fire(fire));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      hit      = N'($urandom);
      if (it % 2 == 0) hit = hit | N'($urandom);   // bias towards hits
      mem_hit  = hit & N'($urandom);
      chain    = N'($urandom) & N'($urandom);
      need_mem = $urandom % 2;
      if (it == 0) begin hit = '1; mem_hit = '1; chain = '1; end   // unterminated chain
      #1;
      for (int e = 0; e < N; e++) begin
        int s;
        logic all, anym;
        exp_fire[e] = 0;
        if (!chain[e]) begin
          s = e;
          while (s > 0 && chain[s-1]) s--;
          all = 1; anym = 0;
          for (int j = s; j <= e; j++) begin all &= hit[j]; anym |= mem_hit[j]; end
          exp_fire[e] = all && (anym || !need_mem);
        end
      end
      checks++;
      if (fire !== exp_fire) begin
        failures++;
        if (failures <= 20) $display("FAIL hit=%b mem=%b chain=%b need_mem=%b fire=%b exp=%b",
                 hit, mem_hit, chain, need_mem, fire, exp_fire);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

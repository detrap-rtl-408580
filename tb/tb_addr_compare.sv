// tb_addr_compare -- self-checking test of the trigger address comparator.
// Drives directed boundary cases and random values for every match type and
// compares with a reference written independently (NAPOT by counting the
// trailing ones of tdata2, masked matches bit by bit).
module tb_addr_compare;
  import detrap_pkg::*;

  logic [3:0]      match;
  logic [XLEN-1:0] tdata2, addr;
  logic            hit;
  int checks = 0, failures = 0;

  addr_compare dut (.match(match), .tdata2(tdata2), .addr(addr), .hit(hit));

  // comparison without the negation bit
  function automatic logic ref_hit_base(logic [2:0] m, logic [XLEN-1:0] t, logic [XLEN-1:0] a);
    int k, off;
    logic [XLEN-1:0] base;
    case (m)
      3'd0: return a == t;
      3'd2: return a >= t;
      3'd3: return a < t;
      3'd1: begin
        k = 0;
        while (k < XLEN && t[k]) k++;
        // range of 2^(k+1) bytes starting at t with its low k+1 bits cleared
        if (k + 1 >= XLEN) return 1'b1;
        base = (t >> (k + 1)) << (k + 1);
        return (a >= base) && ((a - base) < (XLEN'(1) << (k + 1)));
      end
      3'd4, 3'd5: begin
        off = (m == 3'd5) ? XLEN / 2 : 0;
        for (int b = 0; b < XLEN / 2; b++) begin
          // a masked bit must equal the value bit; an unmasked value bit must be 0
          if (t[XLEN/2 + b] && (a[off + b] != t[b])) return 1'b0;
          if (!t[XLEN/2 + b] && t[b]) return 1'b0;
        end
        return 1'b1;
      end
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic ref_hit(logic [3:0] m, logic [XLEN-1:0] t, logic [XLEN-1:0] a);
    case (m)
      4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5: return ref_hit_base(m[2:0], t, a);
      4'd8, 4'd9, 4'd12, 4'd13:           return !ref_hit_base(m[2:0], t, a);
      default:                            return 1'b0;
    endcase
  endfunction

  task automatic check(logic [3:0] m, logic [XLEN-1:0] t, logic [XLEN-1:0] a);
    match = m; tdata2 = t; addr = a;
    #1;
    checks++;
    if (hit !== ref_hit(m, t, a)) begin
      failures++;
      if (failures <= 20) $display("FAIL match=%0d tdata2=%h addr=%h hit=%b", m, t, a, hit);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] t;
    // boundaries of each comparison
    for (int m = 0; m < 16; m++) begin
      check(4'(m), 32'h0000_8000, 32'h0000_8000);
      check(4'(m), 32'h0000_8000, 32'h0000_7FFF);
      check(4'(m), 32'h0000_8000, 32'h0000_8001);
      check(4'(m), 32'h0000_0000, 32'h0000_0000);
      check(4'(m), 32'hFFFF_FFFF, 32'h0000_0000);
    end
    // NAPOT 16-byte range at 0x1000: tdata2 = 0x1007
    for (int a = 32'h0FF8; a < 32'h1018; a++) check(4'd1, 32'h0000_1007, 32'(a));
    // random
    for (int i = 0; i < 4000; i++) begin
      t = $urandom;
      if (i % 4 == 1) t = t | ((32'd1 << ($urandom % 12)) - 1);
      if (i % 5 == 2) begin
        // mask matches: value bits only inside the mask, address close to them
        t[15:0] = t[15:0] & t[31:16];
        check(4'(($urandom % 2) ? 4 : 12), t, {16'($urandom), t[15:0] ^ 16'($urandom % 4)});
        check(4'(($urandom % 2) ? 5 : 13), t, {t[15:0] ^ 16'($urandom % 4), 16'($urandom)});
      end
      check(4'($urandom % 16), t, (i % 3 == 0) ? t ^ 32'($urandom % 64) : $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

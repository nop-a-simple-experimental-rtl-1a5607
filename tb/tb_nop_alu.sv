// tb_nop_alu: self-checking test of the combinational ALU.
//
// Drives every ALU operation with random and corner-case operands and
// compares the result with a bit-by-bit reference written from the
// instruction definitions (loops over single bits rather than shifts).
module tb_nop_alu;
  import nop_pkg::*;

  alu_op_e     op;
  logic [31:0] a, b, c, y;
  int checks = 0, failures = 0;

  nop_alu dut (.op, .a, .b, .c, .y);

  function automatic logic [31:0] ref_model(alu_op_e o, logic [31:0] a, logic [31:0] b,
                                            logic [31:0] c);
    logic [31:0] r, t;
    int n;
    r = '0;
    n = int'(a[4:0]);
    case (o)
      ALU_ADD: r = b + a;
      ALU_SUB: r = b - a;
      ALU_MUL: r = 32'(longint'(b) * longint'(a));
      ALU_AND: r = b & a;
      ALU_OR:  r = b | a;
      ALU_XOR: r = b ^ a;
      ALU_SWAP: begin
        r = b;
        for (int i = 0; i < 5; i++)
          if (a[i]) begin
            for (int k = 0; k < 32; k++) t[k] = r[k ^ (1 << i)];
            r = t;
          end
      end
      ALU_LOG2: begin
        r = 32'hffff_ffff;
        for (int i = 31; i >= 0; i--) if (a[i] && r == 32'hffff_ffff) r = i;
      end
      ALU_LEFT: begin
        // c'[31..n] <- (a<32 ? c : b)[31-n..0]; c'[n-1..0] <- b[31..32-n]
        for (int k = 0; k < 32; k++)
          if (k >= n) r[k] = (a < 32) ? c[k - n] : b[k - n];
          else        r[k] = b[32 - n + k];
      end
      ALU_RIGHT: begin
        for (int k = 0; k < 32; k++)
          if (k <= 31 - n) r[k] = (a < 32) ? c[k + n] : b[k + n];
          else             r[k] = b[k - (32 - n)];
      end
      ALU_SIGN:  r = a[31] ? 32'hffff_ffff : 0;
      ALU_ZERO:  r = (a == 0) ? 32'hffff_ffff : 0;
      ALU_COUNT: for (int i = 0; i < 32; i++) r += a[i];
      ALU_ULESS: r = (b < a) ? 32'hffff_ffff : 0;
      ALU_SLESS: r = (int'(b) < int'(a)) ? 32'hffff_ffff : 0;
      ALU_COMBINE: r = 32'(longint'(b) * 192 + longint'(a));
      default: r = '0;
    endcase
    return r;
  endfunction

  task automatic check(alu_op_e o, logic [31:0] ta, logic [31:0] tb_, logic [31:0] tc);
    logic [31:0] e;
    op = o; a = ta; b = tb_; c = tc;
    #1;
    e = ref_model(o, ta, tb_, tc);
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h c=%h y=%h exp=%h", o.name(), ta, tb_, tc, y, e);
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
    // fixed cases from the instruction descriptions
    check(ALU_SWAP, 24, 32'h1122_3344, 0);      // byte swap
    check(ALU_SWAP, 31, 32'h0000_0001, 0);      // full reversal
    check(ALU_LOG2, 0, 0, 0);
    check(ALU_LOG2, 32'h8000_0000, 0, 0);
    check(ALU_LEFT, 4, 32'hA000_0000, 32'h0000_000F);
    check(ALU_LEFT, 36, 32'h1234_5678, 0);
    check(ALU_RIGHT, 0, 32'h1, 32'h2);
    check(ALU_RIGHT, 40, 32'h1234_5678, 0);
    check(ALU_SLESS, 1, 32'hffff_ffff, 0);
    check(ALU_ULESS, 1, 32'hffff_ffff, 0);
    if (dut.y !== 32'h0) begin failures++; end
    checks++;
    check(ALU_COMBINE, 5, 2, 0);
    for (int o = 0; o < 16; o++)
      for (int i = 0; i < 200; i++) begin
        logic [31:0] ra;
        ra = $urandom();
        if (i % 3 == 0) ra = ra % 40;
        check(alu_op_e'(o), ra, $urandom(), $urandom());
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_nop_divider: self-checking test of the UDIV/SDIV divider.
//
// Unsigned results are compared with the / and % operators; signed results
// with the Euclidean rule, checked as b = q*a + r with 0 <= r < |a|, and
// with worked examples. A zero divisor must raise div0.
module tb_nop_divider;
  logic        sgn;
  logic [31:0] a, b, q, r;
  logic        div0;
  int checks = 0, failures = 0;

  nop_divider dut (.sgn, .a, .b, .q, .r, .div0);

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s sgn=%0b a=%h b=%h q=%h r=%h", what, sgn, a, b, q, r);
    end
  endtask

  task automatic run(logic s, logic [31:0] ta, logic [31:0] tb_);
    sgn = s; a = ta; b = tb_;
    #1;
    if (ta == 0) begin
      chk(div0, "div0");
    end else if (!s) begin
      chk(!div0 && q == tb_ / ta && r == tb_ % ta, "udiv");
    end else begin
      longint la, lb, lq, lr, aa;
      la = longint'(int'(ta)); lb = longint'(int'(tb_));
      lq = longint'(int'(q)); lr = longint'(r);
      aa = la < 0 ? -la : la;
      if (!(tb_ == 32'h8000_0000 && ta == 32'hffff_ffff))
        chk(!div0 && lr >= 0 && lr < aa && lq * la + lr == lb, "sdiv euclid");
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
    // -7 / 2 = -4 rem 1 ; 7 / -2 = -3 rem 1 ; -7 / -2 = 4 rem 1
    sgn = 1; a = 2; b = -7; #1; chk(q == -4 && r == 1, "-7/2");
    a = -2; b = 7;  #1; chk(q == -3 && r == 1, "7/-2");
    a = -2; b = -7; #1; chk(q == 4 && r == 1, "-7/-2");
    a = 3; b = 9; #1; chk(q == 3 && r == 0, "9/3");
    sgn = 0; a = 2; b = 32'hffff_fff9; #1; chk(q == 32'h7fff_fffc && r == 1, "u");
    run(0, 0, 5);
    run(1, 0, 5);
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] ra;
      ra = $urandom();
      if (i % 2 == 0) ra = ra % 100 - 50;
      run(i[0], ra, $urandom());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_nop_boot_rom: checks the boot ROM words against the boot listing.
//
// The expected opcodes are assembled here from the listing (immediates as
// their sign-extended byte, instruction names by their opcode values),
// packed four to a word, least significant first.
module tb_nop_boot_rom;
  logic [5:0]  addr;
  logic [31:0] data;
  int checks = 0, failures = 0;
  logic [7:0] prog [20];

  nop_boot_rom dut (.addr, .data);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 0 IN | -64 | 0 INMORE | 10 FJP | DUP | 0 IN | EXCH ST | 1 ADD | -12 UJP | POP | 4 MUL JUMP
    prog = '{8'd0, 8'hA6, 8'(-64), 8'd0, 8'hA7, 8'd10, 8'h95, 8'h8A, 8'd0, 8'hA6,
             8'h8B, 8'h98, 8'd1, 8'h81, 8'(-12), 8'h94, 8'h89, 8'd4, 8'h83, 8'h9E};
    for (int w = 0; w < 64; w++) begin
      logic [31:0] e;
      e = '0;
      if (w < 5) e = {prog[4*w+3], prog[4*w+2], prog[4*w+1], prog[4*w]};
      addr = 6'(w);
      #1;
      checks++;
      if (data !== e) begin
        failures++;
        $display("FAIL word %0d = %h, expected %h", w, data, e);
      end
    end
    // the jump targets in the listing: FJP at opcode 6 + 10 = POP at 16,
    // UJP at opcode 15 - 12 = the "0" before INMORE at 3
    checks++;
    if (prog[6 + 10] !== 8'h89 || prog[15 - 12 + 1] !== 8'hA7) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_nop_pu: self-checking test of one processing unit with its memory.
//
// The testbench plays the switch. After reset it sends the boot message
// to thread 0, port 0: the start position 0, then a program image, then
// END; the boot ROM loads the image from word 0 and jumps into it. The
// program, assembled below from opcode names, runs every instruction
// group and sends each result through port 1 (OUT). Messages whose HEAD
// names this processor are looped back into the unit; all other DATA
// words are compared, in order, with values worked out here.
//
// The program also starts two more threads with START: one sends a word
// and stops, one divides by zero. Their exception messages go to port 3
// of thread 0, which reads and reports them. Further parts check IN and
// INMORE on a message the testbench sends late (so IN blocks), the event
// instructions with WAIT, WAITTMO, CALL/JUMP, LDC and the stack limits.
// The testbench counts blocked instructions, faults and thread starts and
// requires each to have happened.
module tb_nop_pu;
  import nop_pkg::*;

  localparam logic [21:0] PID = 22'd8;

  logic clk = 0, rst_n = 0;
  logic mem_en, mem_we;
  logic [13:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic tx_valid, rx_valid, rx_ready;
  logic tx_ready = 1;
  token_t tx_tok, rx_tok;

  int checks = 0, failures = 0;
  int n_block = 0, n_fault = 0, n_start = 0, n_exc = 0;

  nop_memory u_mem (.clk, .en(mem_en), .we(mem_we), .addr(mem_addr),
                    .wdata(mem_wdata), .rdata(mem_rdata));
  nop_pu #(.UNIT(0)) dut (.clk, .rst_n, .proc_id(PID), .debug_mode(1'b0),
                          .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
                          .tx_valid, .tx_tok, .tx_ready, .rx_valid, .rx_tok, .rx_ready);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ assembler
  logic [7:0] prog [$];
  function automatic void op(opcode_e o); prog.push_back(o); endfunction
  function automatic void imm(int v); prog.push_back(8'(v)); endfunction
  // push any non-negative constant using immediates and COMBINE (b*192+a)
  function automatic void pushc(int v);
    if (v <= 127) begin imm(v); return; end
    pushc(v / 192);
    if (v % 192 <= 127) begin imm(v % 192); op(OP_COMBINE); end
    else begin imm(127); op(OP_COMBINE); imm(v % 192 - 127); op(OP_ADD); end
  endfunction
  function automatic void out1(); imm(1); op(OP_OUT); endfunction
  function automatic void align(); while (prog.size() % 4 != 0) op(OP_NOP); endfunction

  // ------------------------------------------------------------ switch model
  token_t rxq [$];
  int     outs [$];          // DATA words leaving the unit
  int     heads [$];
  logic   loop_msg = 0;
  int     t_last_out = 0;
  int     cyc = 0;

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      if (tx_tok.kind == TK_HEAD) loop_msg = (tx_tok.data[31:10] == PID);
      if (loop_msg) rxq.push_back(tx_tok);
      else begin
        if (tx_tok.kind == TK_HEAD) heads.push_back(int'(tx_tok.data));
        if (tx_tok.kind == TK_DATA) begin outs.push_back(int'(tx_tok.data)); t_last_out = cyc; end
      end
    end
  end

  // deliver queued tokens to the unit
  always @(posedge clk) begin
    if (rst_n && rx_valid && rx_ready) void'(rxq.pop_front());
  end
  always @(negedge clk) begin
    rx_valid = rxq.size() != 0;
    rx_tok   = (rxq.size() != 0) ? rxq[0] : '0;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.st == dut.S_EXEC && !dut.x_fault && dut.x_stall) n_block++;
    if (dut.st == dut.S_EXEC && dut.x_fault) n_fault++;
    if (dut.st == dut.S_EXEC && !dut.x_fault && !dut.x_stall && dut.opc == OP_START) n_start++;
    if (dut.st == dut.S_EXC && dut.oacc && dut.oreq_exc) n_exc++;
  end

  // ------------------------------------------------------------ program
  int expv [$];
  int w1, w2, ip_stop1, ip_div2, w_const;

  task automatic build();
    int p_call, p_fjp;
    // dest[1] = 1025
    pushc(1025); imm(1); op(OP_SETPORT);
    imm(7); imm(5); op(OP_ADD); out1();              expv.push_back(12);
    imm(7); imm(5); op(OP_SUB); out1();              expv.push_back(2);
    imm(-3); imm(5); op(OP_MUL); out1();             expv.push_back(-15);
    imm(-7); imm(2); op(OP_SDIV); out1(); out1();    expv.push_back(1); expv.push_back(-4);
    imm(100); imm(7); op(OP_UDIV); out1(); out1();   expv.push_back(2); expv.push_back(14);
    imm(12); imm(10); op(OP_AND); out1();            expv.push_back(8);
    imm(12); imm(10); op(OP_OR); out1();             expv.push_back(14);
    imm(12); imm(10); op(OP_XOR); out1();            expv.push_back(6);
    imm(1); imm(31); op(OP_SWAP); out1();            expv.push_back(32'h8000_0000);
    imm(100); op(OP_LOG2); out1();                   expv.push_back(6);
    imm(9); op(OP_DUP); op(OP_ADD); out1();          expv.push_back(18);
    imm(3); imm(4); op(OP_EXCH); op(OP_SUB); out1(); expv.push_back(1);
    imm(77); pushc(200); op(OP_ST); pushc(200); op(OP_LD); out1();  expv.push_back(77);
    pushc(200); op(OP_LDINC); out1(); pushc(200); op(OP_LD); out1(); expv.push_back(77); expv.push_back(78);
    pushc(200); op(OP_DECLD); out1();                expv.push_back(77);
    imm(11); imm(22); imm(1); op(OP_LDX); out1(); op(OP_POP); op(OP_POP); expv.push_back(11);
    imm(5); imm(33); imm(0); op(OP_STX); out1();     expv.push_back(33);
    imm(1); imm(-64); imm(4); op(OP_LEFT); out1();   expv.push_back(32'h1F);
    imm(16); imm(1); imm(4); op(OP_RIGHT); out1();   expv.push_back(32'h1000_0001);
    imm(-5); op(OP_SIGN); out1();                    expv.push_back(-1);
    imm(5); op(OP_SIGN); out1();                     expv.push_back(0);
    imm(0); op(OP_ZERO); out1();                     expv.push_back(-1);
    imm(7); op(OP_COUNT); out1();                    expv.push_back(3);
    imm(-1); imm(1); op(OP_ULESS); out1();           expv.push_back(0);
    imm(-1); imm(1); op(OP_SLESS); out1();           expv.push_back(-1);
    imm(2); imm(3); op(OP_COMBINE); out1();          expv.push_back(387);
    imm(3); op(OP_PORT); out1();                     expv.push_back({PID, 2'd0, 3'd0, 5'd3});
    // FJP taken, FJP not taken, UJP
    imm(42); imm(0); imm(2); op(OP_FJP); imm(99); out1();              expv.push_back(42);
    imm(55); imm(-1); imm(2); op(OP_FJP); imm(99); out1(); out1();     expv.push_back(99); expv.push_back(55);
    imm(66); imm(2); op(OP_UJP); imm(99); out1();                      expv.push_back(66);
    // CALL x+4: JUMP back to x+1; x+1: 77 2 UJP -> x+5
    imm(4); op(OP_CALL); imm(77); imm(2); op(OP_UJP); op(OP_JUMP); out1(); expv.push_back(77);
    // LDC: constant pool word cp+100 = word 164
    imm(100); op(OP_LDC); out1();                    expv.push_back(32'hDEAD_BEEF);
    // LDAX on an empty stack: sp - dp
    imm(0); op(OP_LDAX); out1();                     expv.push_back(16'h3fc0 - 64);
    imm(1); imm(2); imm(3); imm(2); op(OP_POPN); out1(); expv.push_back(1);
    imm(1); op(OP_GETPORT); out1();                  expv.push_back(1025);
    op(OP_BREAK); op(OP_NOP);
    // EVOUT on port 1, WAIT jumps over "99 1 OUT"
    op(OP_EVCLEAR); imm(5); imm(1); op(OP_EVOUT); op(OP_WAIT); imm(99); imm(1); op(OP_OUT);
    imm(44); out1();                                 expv.push_back(44);
    // EVIN on port 3; the message arrives late, so WAIT blocks
    op(OP_EVCLEAR); imm(5); imm(3); op(OP_EVIN); op(OP_WAIT); imm(99); imm(1); op(OP_OUT);
    imm(3); op(OP_IN); out1();                       expv.push_back(1234);
    imm(3); op(OP_INMORE); out1();                   expv.push_back(0);
    op(OP_EVCLEAR);
    imm(1); op(OP_OUTEND);
    // START thread 1 (sends 88, stops) and thread 2 (divides by zero)
    for (int k = 0; k < 2; k++) begin
      imm(0); pushc(16'h3f00); prog.push_back(8'hEE); prog.push_back(8'hEE); // b placeholder
      pushc(16'h2000); pushc(16'h3000); imm(3); op(OP_PORT); op(OP_START);
      imm(3); op(OP_IN); imm(3); op(OP_INMORE); op(OP_POP); out1(); out1();
      imm(1); op(OP_OUTEND);
    end
    op(OP_THREADS); out1();                          // 7
    op(OP_THRCYC); out1(); op(OP_CYCLES); out1();
    op(OP_NOW); op(OP_NOW); op(OP_EXCH); op(OP_SUB); out1();
    op(OP_NOW); imm(100); op(OP_ADD); op(OP_WAITTMO); imm(7); out1();
    imm(1); op(OP_OUTEND); op(OP_STOP);
    align();
    // thread 1
    w1 = prog.size() / 4;
    pushc(1025); imm(0); op(OP_SETPORT); imm(88); imm(0); op(OP_OUT); imm(0); op(OP_OUTEND);
    ip_stop1 = prog.size(); op(OP_STOP);
    align();
    // thread 2
    w2 = prog.size() / 4;
    imm(0); imm(0); ip_div2 = prog.size(); op(OP_UDIV); op(OP_STOP);
    align();
    // patch the two START "b" placeholders with 2-byte word positions
    begin
      int n; n = 0;
      for (int i = 0; i + 1 < prog.size(); i++)
        if (prog[i] == 8'hEE && prog[i+1] == 8'hEE) begin
          int w; w = (n == 0) ? w1 : w2;
          prog[i] = 8'(w); prog[i+1] = OP_NOP;
          n++;
        end
    end
    while (prog.size() < 164 * 4) op(OP_NOP);
    w_const = 164;
    prog.push_back(8'hEF); prog.push_back(8'hBE); prog.push_back(8'hAD); prog.push_back(8'hDE);
  endtask

  // ------------------------------------------------------------ run
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired, outs=%0d", outs.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int n_main;
    build();
    chk(w1 < 128 && w2 < 128 && prog.size() / 4 < 200, "program fits");
    // boot message
    rxq.push_back('{TK_HEAD, {22'd0, 2'd0, 3'd0, 5'd0}});
    rxq.push_back('{TK_DATA, 32'd0});
    for (int i = 0; i < prog.size(); i += 4)
      rxq.push_back('{TK_DATA, {prog[i+3], prog[i+2], prog[i+1], prog[i]}});
    rxq.push_back('{TK_END, 32'd0});
    repeat (3) @(negedge clk);
    rst_n = 1;
    n_main = expv.size();
    // after the EVOUT result (44) send the late message for IN
    // (waits are bounded, so that a broken design still reaches the checks)
    fork
      wait (outs.size() >= n_main - 2);
      repeat (100000) @(posedge clk);
    join_any
    disable fork;
    repeat (300) @(posedge clk);
    rxq.push_back('{TK_HEAD, {PID, 2'd0, 3'd0, 5'd3}});
    rxq.push_back('{TK_DATA, 32'd1234});
    repeat (50) @(posedge clk);
    rxq.push_back('{TK_END, 32'd0});
    // remaining outputs: 88, exc1, port, exc2, port, threads, thrcyc, cycles, now-diff, 7, stop exc
    fork
      wait (outs.size() >= n_main + 11);
      repeat (100000) @(posedge clk);
    join_any
    disable fork;
    repeat (20) @(posedge clk);
    chk(outs.size() == n_main + 11, $sformatf("%0d results, expected %0d", outs.size(), n_main + 11));
    while (outs.size() < n_main + 11) outs.push_back('0);
    for (int i = 0; i < n_main; i++)
      chk(outs[i] == expv[i], $sformatf("result %0d = %h, expected %h", i, outs[i], expv[i]));
    chk(outs[n_main] == 88, "thread 1 output");
    chk(outs[n_main + 1] == (ip_stop1 + 0), $sformatf("thread 1 stop message %h", outs[n_main+1]));
    chk(outs[n_main + 2] == {PID, 2'd0, 3'd1, 5'd0}, "START result");
    chk(outs[n_main + 3] == (32'h8000_0000 | ip_div2), $sformatf("thread 2 fault message %h", outs[n_main+3]));
    chk(outs[n_main + 4] == {PID, 2'd0, 3'd1, 5'd0}, "START result 2");
    chk(outs[n_main + 5] == 7, "THREADS");
    chk(outs[n_main + 6] > 0 && outs[n_main + 6] <= outs[n_main + 7], "THRCYC <= CYCLES");
    chk(outs[n_main + 8] > 0 && outs[n_main + 8] < 100, "NOW difference");
    chk(outs[n_main + 9] == 7, "after WAITTMO");
    chk(outs[n_main + 10] >= 0 && outs[n_main + 10] < 32'h10000, "stop message of thread 0");
    chk(heads[heads.size() - 1] == {22'd1, 10'd1}, "exception port after reset");
    chk(dut.tstate[0] == dut.T_FREE, "thread 0 free after STOP");
    $display("blocked=%0d faults=%0d starts=%0d exceptions=%0d", n_block, n_fault, n_start, n_exc);
    chk(n_block > 0, "a blocked instruction was seen");
    chk(n_fault == 1, "exactly one fault");
    chk(n_start == 2, "two STARTs");
    chk(n_exc == 3, "three exception messages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

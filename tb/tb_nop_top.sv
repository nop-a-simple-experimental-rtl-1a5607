// tb_nop_top: end-to-end test of the whole processor at its default size.
//
// Four units, 16K-word memories, the switch with 4 external links and 8
// peripheral lines, all at the reference configuration. The testbench
// boots units 0..2 through external link 0 and unit 3 through peripheral
// line 2, each with a program assembled below. Then:
//   unit 0  writes routing table entry 10 (= link 3) through the router
//           configuration block, sends a word to peripheral line 5, a word
//           to processor id 10 (routed by the table to link 3), a word to
//           neighbour unit 1/thread 2/port 3 through link 1 (routing
//           command 5), and a message "111 PAUSE 222 END" to unit 1;
//   unit 2  sends "1000 2000 END" to unit 1, then divides by zero;
//   unit 3  starts a second thread with START, which sends "3 4 END" to
//           unit 1 and stops (its exception port is peripheral line 6);
//           thread 0 meanwhile waits 60 cycles with WAITTMO;
//   unit 1  waits 2000 cycles, then adds all words arriving on its port 2 until three messages
//           have ended, and sends the sum to peripheral line 1.
// The three senders compete for the switch output to unit 1. Every unit
// stops at the end, so its exception message (after reset: peripheral
// line 1) arrives too; unit 2's carries the fault bit.
// Checked: every token leaving on the external links and peripheral
// lines, the sum, the exception messages; and that each mechanism
// happened: boot load, path contention in the switch, PAUSE, table
// routing, header removal, neighbour routing, configuration write, a
// blocked instruction, a fault,
// START and a timer wait.
module tb_nop_top;
  import nop_pkg::*;

  logic clk = 0, rst_n = 0;
  logic   [3:0] ext_in_valid = 0, ext_in_ready, ext_out_valid, ext_out_ready;
  token_t [3:0] ext_in_tok, ext_out_tok;
  logic   [7:0] per_in_valid = 0, per_in_ready, per_out_valid, per_out_ready;
  token_t [7:0] per_in_tok, per_out_tok;

  int checks = 0, failures = 0;

  nop_top dut (.clk, .rst_n, .debug_mode(1'b0),
               .ext_in_valid, .ext_in_tok, .ext_in_ready,
               .ext_out_valid, .ext_out_tok, .ext_out_ready,
               .per_in_valid, .per_in_tok, .per_in_ready,
               .per_out_valid, .per_out_tok, .per_out_ready);

  always #5 clk = ~clk;
  always @(negedge clk) begin
    ext_out_ready <= 4'($urandom()) | 4'b0101;
    per_out_ready <= 8'($urandom()) | 8'h0f;
  end

  // ------------------------------------------------------------ assembler
  logic [7:0] prog [$];
  function automatic void op(opcode_e o); prog.push_back(o); endfunction
  function automatic void imm(int v); prog.push_back(8'(v)); endfunction
  function automatic void pushc(longint v);
    if (v <= 127) begin imm(int'(v)); return; end
    pushc(v / 192);
    if (v % 192 <= 127) begin imm(int'(v % 192)); op(OP_COMBINE); end
    else begin imm(127); op(OP_COMBINE); imm(int'(v % 192 - 127)); op(OP_ADD); end
  endfunction
  // dest[port] = global port number
  function automatic void setport(int port, longint g); pushc(g); imm(port); op(OP_SETPORT); endfunction
  function automatic void out(int port, longint v); pushc(v); imm(port); op(OP_OUT); endfunction
  function automatic void outend(int port); imm(port); op(OP_OUTEND); endfunction
  function automatic void outpause(int port); imm(port); op(OP_OUTPAUSE); endfunction
  function automatic int here(); return prog.size(); endfunction

  typedef logic [31:0] word_q [$];
  function automatic word_q image();
    word_q w;
    while (prog.size() % 4 != 0) op(OP_NOP);
    for (int i = 0; i < prog.size(); i += 4)
      w.push_back({prog[i+3], prog[i+2], prog[i+1], prog[i]});
    prog.delete();
    return w;
  endfunction

  function automatic longint gp(int route, int unit, int thread, int port);
    return longint'({22'(route), 2'(unit), 3'(thread), 5'(port)});
  endfunction

  word_q img [4];
  int ip_fault2;

  task automatic build();
    int l_loop, p_fjp1, p_end, p_fjp2, p_ujp1, p_ujp2, p_b;
    // ---- unit 0
    setport(1, gp(2, 0, 0, 0));              // router configuration block
    out(1, 32'h2000_0A03); outend(1);        // entry 10 -> link 3
    setport(2, gp(1, 0, 0, 5));              // peripheral line 5
    out(2, 32'h55); outend(2);
    setport(3, gp(10, 0, 0, 7));             // processor 10: by the table
    out(3, 32'h77); outend(3);
    setport(4, gp(5, 1, 2, 3));              // routing command 5: link 1
    out(4, 32'h66); outend(4);
    setport(5, gp(8, 1, 0, 2));              // own id 8: unit 1, port 2
    out(5, 111); outpause(5); out(5, 222); outend(5);
    op(OP_STOP);
    img[0] = image();
    // ---- unit 1: acc on the stack, count of ENDs in data word 0
    // wait 2000 cycles first, so that the senders queue up in the switch
    op(OP_NOW); pushc(2000); op(OP_ADD); op(OP_WAITTMO);
    setport(1, gp(1, 0, 0, 1));
    imm(0); imm(0); op(OP_ST);
    imm(0);
    l_loop = here();
    imm(2); op(OP_INMORE); imm(0); p_fjp1 = here(); op(OP_FJP);   // offset patched
    imm(2); op(OP_IN); op(OP_ADD);
    imm(0); p_ujp1 = here(); op(OP_UJP);
    p_end = here();
    imm(0); op(OP_LDINC); imm(2); op(OP_SUB); imm(0); p_fjp2 = here(); op(OP_FJP);
    imm(0); p_ujp2 = here(); op(OP_UJP);
    prog[p_fjp1 - 1] = 8'(p_end - p_fjp1);
    prog[p_ujp1 - 1] = 8'(l_loop - p_ujp1);
    prog[p_fjp2 - 1] = 8'(here() - p_fjp2);
    prog[p_ujp2 - 1] = 8'(l_loop - p_ujp2);
    imm(1); op(OP_OUT); outend(1);
    op(OP_STOP);
    img[1] = image();
    // ---- unit 2
    setport(0, gp(0, 1, 0, 2));
    out(0, 1000); out(0, 2000); outend(0);
    imm(0); imm(0); ip_fault2 = here(); op(OP_UDIV);
    op(OP_STOP);
    img[2] = image();
    // ---- unit 3: thread 0 starts a thread that sends, then waits 60 cycles
    imm(0); pushc(16'h3fff); p_b = here(); imm(0);
    pushc(16'h1000); pushc(16'h2000); pushc(gp(1, 0, 0, 6)); op(OP_START); op(OP_POP);
    op(OP_NOW); imm(60); op(OP_ADD); op(OP_WAITTMO);
    op(OP_STOP);
    while (prog.size() % 4 != 0) op(OP_NOP);
    prog[p_b] = 8'(here() / 4);
    setport(7, gp(8, 1, 0, 2));
    out(7, 3); out(7, 4); outend(7);
    op(OP_STOP);
    img[3] = image();
  endtask

  // ------------------------------------------------------------ link drivers
  task automatic send_ext(int l, token_t t);
    ext_in_tok[l] = t; ext_in_valid[l] = 1;
    @(posedge clk); while (!ext_in_ready[l]) @(posedge clk);
    #1 ext_in_valid[l] = 0;
  endtask
  task automatic send_per(int l, token_t t);
    per_in_tok[l] = t; per_in_valid[l] = 1;
    @(posedge clk); while (!per_in_ready[l]) @(posedge clk);
    #1 per_in_valid[l] = 0;
  endtask

  token_t ext_got [4][$];
  token_t per_got [8][$];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 4; l++) if (ext_out_valid[l] && ext_out_ready[l]) ext_got[l].push_back(ext_out_tok[l]);
    for (int l = 0; l < 8; l++) if (per_out_valid[l] && per_out_ready[l]) per_got[l].push_back(per_out_tok[l]);
  end

  // ------------------------------------------------------------ mechanisms
  int n_contend = 0, n_pause = 0, n_table = 0, n_strip = 0, n_rewrite = 0, n_cfg = 0;
  int n_block = 0, n_fault = 0, n_boot = 0, n_start = 0, n_timer = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 16; i++) begin
      if (dut.u_sw.in_valid[i] && dut.u_sw.in_tok[i].kind == TK_HEAD && !dut.u_sw.conn[i]
          && dut.u_sw.busy[dut.u_sw.tgt[i]]) n_contend++;
      if (dut.u_sw.in_valid[i] && dut.u_sw.in_ready[i] && dut.u_sw.conn[i]
          && dut.u_sw.in_tok[i].kind == TK_PAUSE) n_pause++;
      if (dut.u_sw.in_valid[i] && dut.u_sw.in_ready[i] && dut.u_sw.conn[i]
          && dut.u_sw.in_tok[i].kind == TK_HEAD) begin
        if (dut.u_sw.c_strip[i]) n_strip++;
        if (dut.u_sw.c_rw[i]) n_rewrite++;
        if (dut.u_sw.in_tok[i].data[31:10] >= 8 && dut.u_sw.in_tok[i].data[31:10] != 8) n_table++;
      end
    end
    if (dut.u_cfg.cmd) n_cfg++;
  end
  for (genvar u = 0; u < 4; u++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_unit[u].u_pu.st == dut.g_unit[u].u_pu.S_EXEC) begin
        if (dut.g_unit[u].u_pu.x_fault) n_fault++;
        else if (dut.g_unit[u].u_pu.x_stall) n_block++;
        else if (dut.g_unit[u].u_pu.opc == OP_START) n_start++;
        else if (dut.g_unit[u].u_pu.opc == OP_WAITTMO) n_timer++;
        else if (dut.g_unit[u].u_pu.opc == OP_JUMP && dut.g_unit[u].u_pu.c_ip[15:2] >= 14'h3fc0) n_boot++;
      end
    end
  end

  // ------------------------------------------------------------ run
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic same(token_t got [$], token_t exp [$]);
    if (got.size() != exp.size()) return 0;
    // the word of an END or PAUSE token carries no meaning
    foreach (got[i])
      if (got[i].kind !== exp[i].kind ||
          (exp[i].kind inside {TK_DATA, TK_HEAD} && got[i].data !== exp[i].data)) return 0;
    return 1;
  endfunction

  initial begin
    ext_in_tok = '0; per_in_tok = '0;
    build();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      for (int u = 0; u < 3; u++) begin
        // unit 1 first, so that it is ready when the others send
        int uu; uu = (u == 0) ? 1 : (u == 1) ? 0 : 2;
        send_ext(0, '{TK_HEAD, {22'd0, 2'(uu), 3'd0, 5'd0}});
        send_ext(0, '{TK_DATA, 32'd0});
        foreach (img[uu][i]) send_ext(0, '{TK_DATA, img[uu][i]});
        send_ext(0, '{TK_END, 32'd0});
      end
      begin
        send_per(2, '{TK_HEAD, {22'd0, 2'd3, 3'd0, 5'd0}});
        send_per(2, '{TK_DATA, 32'd0});
        foreach (img[3][i]) send_per(2, '{TK_DATA, img[3][i]});
        send_per(2, '{TK_END, 32'd0});
      end
    join
    // wait for the four exception messages and the sum on line 1
    // (bounded, so that a broken design still reaches the checks below)
    fork
      wait (per_got[1].size() >= 2 * 5 && per_got[6].size() >= 2);
      repeat (150000) @(posedge clk);
    join_any
    disable fork;
    repeat (200) @(posedge clk);

    chk(same(per_got[5], '{'{TK_DATA, 32'h55}, '{TK_END, 32'h0}}), "peripheral line 5");
    chk(same(ext_got[3], '{'{TK_HEAD, 32'(gp(10, 0, 0, 7))}, '{TK_DATA, 32'h77}, '{TK_END, 32'h0}}),
        "table routed to link 3");
    chk(same(ext_got[1], '{'{TK_HEAD, 32'(gp(0, 1, 2, 3))}, '{TK_DATA, 32'h66}, '{TK_END, 32'h0}}),
        "neighbour routed to link 1");
    chk(ext_got[0].size() == 0 && ext_got[2].size() == 0, "nothing on links 0 and 2");
    chk(dut.u_cfg.table_link[10] == 2'd3, "routing table written");
    begin
      int sum_seen, n_fault_msgs, n_words;
      sum_seen = 0; n_fault_msgs = 0; n_words = 0;
      foreach (per_got[1][i]) if (per_got[1][i].kind == TK_DATA) begin
        n_words++;
        if (per_got[1][i].data == 32'd3340) sum_seen++;
        else if (per_got[1][i].data == (32'h8000_0000 | 32'(ip_fault2))) n_fault_msgs++;
        else chk(per_got[1][i].data[31:16] == 0, $sformatf("stop message %h", per_got[1][i].data));
      end
      chk(sum_seen == 1, "unit 1 sum of 3 messages = 3340");
      chk(n_fault_msgs == 1, "unit 2 fault message");
      chk(n_words == 5, "five words on line 1");
    end
    chk(dut.g_unit[0].u_pu.tstate[0] == dut.g_unit[0].u_pu.T_FREE, "unit 0 thread stopped");
    chk(dut.g_unit[1].u_pu.tstate[0] == dut.g_unit[1].u_pu.T_FREE, "unit 1 thread stopped");
    chk(dut.g_unit[2].u_pu.tstate[0] == dut.g_unit[2].u_pu.T_FREE, "unit 2 thread stopped");
    chk(dut.g_unit[3].u_pu.tstate[0] == dut.g_unit[3].u_pu.T_FREE, "unit 3 thread stopped");
    $display("boot=%0d contend=%0d pause=%0d table=%0d strip=%0d rewrite=%0d cfg=%0d block=%0d fault=%0d start=%0d timer=%0d",
             n_boot, n_contend, n_pause, n_table, n_strip, n_rewrite, n_cfg, n_block, n_fault, n_start, n_timer);
    chk(n_boot == 4, "four boot loads");
    chk(n_contend > 0, "path contention");
    chk(n_pause > 0, "PAUSE");
    chk(n_table > 0, "table routing");
    chk(n_strip > 0, "header removal");
    chk(n_rewrite > 0, "neighbour routing");
    chk(n_cfg > 0, "configuration write");
    chk(n_block > 0, "blocked instruction");
    chk(n_start == 1, "one START");
    chk(n_timer == 2, "two timer waits ended");
    chk(per_got[6].size() == 2 && per_got[6][0].kind == TK_DATA && per_got[6][0].data[31] == 1'b0,
        "started thread's stop message on line 6");
    chk(n_fault == 1, "one fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

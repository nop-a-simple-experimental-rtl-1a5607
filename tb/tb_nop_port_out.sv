// tb_nop_port_out: self-checking test of the sending channel ports.
//
// Checks the token sequences for OUT, OUTEND and OUTPAUSE requests: HEAD
// with the destination before the first word of a message, nothing but
// the word while the port owns the path, refusal of other ports while it
// is owned, release on END and PAUSE, and the exception message
// HEAD/DATA/END. A receiver that is sometimes not ready checks that the
// queue holds tokens in order.
module tb_nop_port_out;
  import nop_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req = 0, req_exc = 0, accept;
  logic [2:0] req_thread = 0, q_thread = 0, own_thread;
  logic [4:0] req_port = 0, own_port;
  tok_kind_e req_kind = TK_DATA;
  logic [31:0] req_data = 0, req_dest = 0, avail;
  logic own_valid, tx_valid, tx_ready = 1;
  token_t tx_tok;
  int checks = 0, failures = 0;
  token_t expq [$];

  nop_port_out dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // receiver: compare every token taken with the expected queue
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      checks++;
      if (expq.size() == 0 || tx_tok !== expq[0]) begin
        failures++;
        $display("FAIL token %p", tx_tok);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end
  always @(negedge clk) tx_ready <= ($urandom_range(0, 3) != 0);

  // issue one request, retrying until accepted; returns the tries
  task automatic ask(logic [2:0] t, logic [4:0] p, tok_kind_e k, logic [31:0] d,
                     logic [31:0] dst, logic exc, output int tries);
    req = !exc; req_exc = exc; req_thread = t; req_port = p; req_kind = k;
    req_data = d; req_dest = dst;
    tries = 1;
    #1;
    while (!accept) begin @(negedge clk); tries++; #1; end
    @(negedge clk);
    req = 0; req_exc = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      logic [31:0] dst, w1, w2;
      logic [2:0] t; logic [4:0] p;
      t = 3'($urandom()); p = 5'($urandom()); dst = $urandom(); w1 = $urandom(); w2 = $urandom();
      expq.push_back('{TK_HEAD, dst}); expq.push_back('{TK_DATA, w1});
      ask(t, p, TK_DATA, w1, dst, 0, n);
      chk(own_valid && own_thread == t && own_port == p, "owner set");
      // another port is refused while the path is owned
      req = 1; req_thread = t; req_port = p + 1; req_kind = TK_DATA; #1;
      chk(!accept, "other port refused");
      q_thread = t; #1;
      chk(avail[p + 5'd1] == 0, "other port not available");
      req = 0;
      expq.push_back('{TK_DATA, w2});
      ask(t, p, TK_DATA, w2, dst, 0, n);
      if (i % 2 == 0) begin
        expq.push_back('{TK_END, 32'd0});
        ask(t, p, TK_END, 0, dst, 0, n);
      end else begin
        expq.push_back('{TK_PAUSE, 32'd0});
        ask(t, p, TK_PAUSE, 0, dst, 0, n);
      end
      chk(!own_valid, "released");
      // END without an open message: HEAD then END
      expq.push_back('{TK_HEAD, dst + 1}); expq.push_back('{TK_END, 32'd7});
      ask(t, p, TK_END, 7, dst + 1, 0, n);
      // PAUSE without an open message sends nothing
      ask(t, p, TK_PAUSE, 0, dst, 0, n);
      // exception message
      expq.push_back('{TK_HEAD, dst + 2}); expq.push_back('{TK_DATA, w1});
      expq.push_back('{TK_END, 32'd0});
      ask(t, p, TK_DATA, w1, dst + 2, 1, n);
    end
    repeat (30) @(negedge clk);
    chk(expq.size() == 0, "all tokens sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

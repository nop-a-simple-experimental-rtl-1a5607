// tb_nop_port_in: self-checking test of the receiving channel ports.
//
// Sends messages (HEAD, DATA..., END, and HEAD, DATA, PAUSE) to random
// thread ports and checks that the tokens land in the addressed one-token
// buffers, that the stream stalls while a buffer is full, that END is
// stored and PAUSE is not, and that consuming frees a buffer.
module tb_nop_port_in;
  import nop_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready;
  token_t rx_tok;
  logic [2:0] rd_thread = 0, cons_thread = 0;
  logic [4:0] cons_port = 0;
  logic consume = 0;
  logic [31:0] full, is_end;
  logic [31:0][31:0] data;
  int checks = 0, failures = 0;

  nop_port_in dut (.clk, .rst_n, .rx_valid, .rx_tok, .rx_ready, .rd_thread,
                   .full, .is_end, .data, .consume, .cons_thread, .cons_port);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // offer a token and wait until it is taken; returns the cycles it waited
  task automatic send(tok_kind_e k, logic [31:0] d, output int waited);
    rx_valid = 1; rx_tok = '{kind: k, data: d};
    waited = 0;
    #1;
    while (!rx_ready) begin @(negedge clk); waited++; end
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic take(logic [2:0] t, logic [4:0] p);
    consume = 1; cons_thread = t; cons_port = p;
    @(negedge clk);
    consume = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w;
    rx_tok = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      logic [2:0] t; logic [4:0] p; logic [31:0] d1, d2;
      t = 3'($urandom()); p = 5'($urandom()); d1 = $urandom(); d2 = $urandom();
      rd_thread = t;
      send(TK_HEAD, {22'd0, 2'd1, t, p}, w);
      send(TK_DATA, d1, w);
      #1;
      chk(full[p] && !is_end[p] && data[p] == d1, "first data stored");
      // second word must wait until the thread takes the first
      fork
        send(TK_DATA, d2, w);
        begin repeat (3) @(negedge clk); take(t, p); end
      join
      chk(w >= 3, "stall while buffer full");
      #1;
      chk(full[p] && data[p] == d2, "second data stored");
      take(t, p);
      send(TK_END, 0, w);
      #1;
      chk(full[p] && is_end[p], "END stored");
      take(t, p);
      // PAUSE is dropped: buffer stays empty
      send(TK_HEAD, {22'd0, 2'd1, t, p}, w);
      send(TK_PAUSE, 0, w);
      #1;
      chk(!full[p], "PAUSE not delivered");
      // a stray DATA outside a message is dropped
      send(TK_DATA, 32'h1234, w);
      #1;
      chk(!full[p], "stray data dropped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_nop_switch: self-checking test of the communication switch.
//
// Each input sends messages to destinations chosen at random among all
// routing commands (local unit, peripheral line, configuration block,
// external link by command 4..7, and processor ids routed by the table or
// matching the own id). Random readiness at the outputs and two inputs
// aiming at the same output exercise the path reservation. The checker
// keeps, per output, the messages expected in order of grant: each
// delivered message must equal what its sender sent, with the HEAD
// removed or rewritten as the routing rule says, and PAUSE must end a
// path without the next message being lost.
module tb_nop_switch;
  import nop_pkg::*;
  localparam int NI = 16, NO = 17;
  logic clk = 0, rst_n = 0;
  logic [21:0] proc_id = 22'd100;
  logic [255:0][1:0] table_link;
  logic   [NI-1:0] in_valid = 0, in_ready;
  token_t [NI-1:0] in_tok;
  logic   [NO-1:0] out_valid, out_ready;
  token_t [NO-1:0] out_tok;
  int checks = 0, failures = 0;
  int msgs_done = 0, conflicts = 0;
  token_t got [NO][$];     // tokens seen at each output
  token_t want [NO][$];    // tokens expected, per output, as a multiset per message
  int sent_tokens [NO];

  nop_switch dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) out_ready <= NO'($urandom()) | NO'($urandom());

  always @(posedge clk)
    for (int o = 0; o < NO; o++)
      if (rst_n && out_valid[o] && out_ready[o]) got[o].push_back(out_tok[o]);

  // expected output index and HEAD for a destination
  function automatic int route(logic [31:0] h, output logic keep, output logic [31:0] nh);
    logic [21:0] rc;
    rc = h[31:10]; keep = 1; nh = h;
    if (rc == 0) return int'(h[9:8]);
    if (rc == 1) begin keep = 0; return 8 + int'(h[2:0]); end
    if (rc == 2) begin keep = 0; return 16; end
    if (rc >= 4 && rc <= 7) begin nh[31:10] = 0; return 4 + int'(rc - 4); end
    if (rc == proc_id) return int'(h[9:8]);
    return 4 + int'(table_link[rc[7:0]]);
  endfunction

  // Messages of all inputs that target one output arrive whole, one after
  // the other; record each sender's message and compare later per output.
  token_t msgs [NO][$][$];

  task automatic send_msg(int i, logic [31:0] h, int len, logic pause);
    token_t m [$];
    logic keep; logic [31:0] nh; int o;
    o = route(h, keep, nh);
    if (keep) m.push_back('{TK_HEAD, nh});
    for (int k = 0; k < len; k++) m.push_back('{TK_DATA, $urandom()});
    if (pause) m.push_back('{TK_PAUSE, 32'd0});
    else       m.push_back('{TK_END, 32'd0});
    msgs[o].push_back(m);
    // drive: HEAD first (always), then the rest
    in_tok[i] = '{TK_HEAD, h}; in_valid[i] = 1;
    @(posedge clk); while (!in_ready[i]) @(posedge clk);
    #1;
    for (int k = keep ? 1 : 0; k < m.size(); k++) begin
      in_tok[i] = m[k];
      @(posedge clk); while (!in_ready[i]) @(posedge clk);
      #1;
    end
    in_valid[i] = 0;
  endtask

  function automatic logic [31:0] rand_dest();
    logic [31:0] h;
    h = $urandom();
    case ($urandom_range(0, 5))
      0: h[31:10] = 0;
      1: h[31:10] = 1;
      2: h[31:10] = 2;
      3: h[31:10] = 22'($urandom_range(4, 7));
      4: h[31:10] = proc_id;
      default: h[31:10] = 22'($urandom_range(8, 300));
    endcase
    return h;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 256; e++) table_link[e] = 2'($urandom());
    in_tok = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // all 16 inputs, 20 messages each; inputs 0 and 1 always aim at unit 3
    for (int i = 0; i < NI; i++) begin
      fork
        automatic int ii = i;
        begin
          for (int n = 0; n < 20; n++) begin
            logic [31:0] h;
            h = (ii < 2) ? {22'd0, 2'd3, 8'(n)} : rand_dest();
            send_msg(ii, h, $urandom_range(0, 4), $urandom_range(0, 3) == 0);
            repeat ($urandom_range(0, 3)) @(posedge clk);
          end
        end
      join_none
    end
    wait fork;
    repeat (50) @(posedge clk);
    // Each output's token stream must be the concatenation of its messages
    // in some order: match greedily by the first token.
    for (int o = 0; o < NO; o++) begin
      while (msgs[o].size() > 0) begin
        int found; found = -1;
        foreach (msgs[o][k])
          if (found < 0 && got[o].size() >= msgs[o][k].size()) begin
            logic same; same = 1;
            foreach (msgs[o][k][j]) if (got[o][j] !== msgs[o][k][j]) same = 0;
            if (same) found = k;
          end
        checks++;
        if (found < 0) begin
          failures++;
          $display("FAIL output %0d: no message matches, %0d left", o, msgs[o].size());
          break;
        end
        for (int j = 0; j < msgs[o][found].size(); j++) void'(got[o].pop_front());
        msgs[o].delete(found);
        msgs_done++;
      end
      checks++;
      if (got[o].size() != 0) begin
        failures++;
        $display("FAIL output %0d: %0d extra tokens", o, got[o].size());
      end
    end
    checks++;
    if (msgs_done != NI * 20) failures++;
    $display("messages delivered: %0d", msgs_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

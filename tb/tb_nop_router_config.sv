// tb_nop_router_config: self-checking test of the router configuration block.
//
// Sends command words (set processor id, set routing table entry) and
// other tokens; checks the processor id and every table entry against a
// reference copy.
module tb_nop_router_config;
  import nop_pkg::*;
  logic clk = 0, rst_n = 0, rx_valid = 0, rx_ready;
  token_t rx_tok;
  logic [21:0] proc_id;
  logic [255:0][1:0] table_link;
  logic [1:0] model [256];
  logic [21:0] mid;
  int checks = 0, failures = 0;

  nop_router_config #(.PROC_ID(22'd9)) dut (.*);

  always #5 clk = ~clk;

  task automatic put(tok_kind_e k, logic [31:0] d);
    rx_valid = 1; rx_tok = '{k, d};
    @(negedge clk);
    rx_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx_tok = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (proc_id != 22'd9) failures++;
    foreach (model[i]) model[i] = 0;
    mid = 9;
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] w;
      int kind;
      w = $urandom();
      kind = $urandom_range(0, 9);
      if (kind < 6) begin
        w[31:28] = 4'd2;
        model[w[15:8]] = w[1:0];
        put(TK_DATA, w);
      end else if (kind == 6) begin
        w[31:28] = 4'd1;
        mid = w[21:0];
        put(TK_DATA, w);
      end else if (kind == 7) begin
        w[31:28] = 4'd2;
        put(TK_END, w);      // not a command
      end else begin
        w[31:28] = 4'd7;     // unknown command
        put(TK_DATA, w);
      end
      checks++;
      if (proc_id != mid || !rx_ready) failures++;
    end
    foreach (model[i]) begin
      checks++;
      if (table_link[i] != model[i]) begin
        failures++;
        $display("FAIL entry %0d = %0d exp %0d", i, table_link[i], model[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

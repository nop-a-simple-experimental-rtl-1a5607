// tb_nop_memory: self-checking test of the local memory.
//
// Writes random words to random addresses across the full 16K-word range,
// keeps a reference copy in an associative array and checks every read,
// including the one-cycle read latency.
module tb_nop_memory;
  logic        clk = 0, en = 0, we = 0;
  logic [13:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  logic [31:0] model [int];

  nop_memory dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < 2000; i++) begin
      en = 1; we = 1; addr = 14'($urandom()); wdata = $urandom();
      if (i < 2) addr = (i == 0) ? 14'h0000 : 14'h3fff;
      model[int'(addr)] = wdata;
      @(negedge clk);
    end
    foreach (model[k]) begin
      en = 1; we = 0; addr = 14'(k);
      @(negedge clk);          // data available one clock after the request
      en = 0;
      checks++;
      if (rdata !== model[k]) begin
        failures++;
        $display("FAIL addr=%h rdata=%h exp=%h", k, rdata, model[k]);
      end
    end
    // rdata holds while en is low
    @(negedge clk);
    checks++;
    if (rdata !== model[16383]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

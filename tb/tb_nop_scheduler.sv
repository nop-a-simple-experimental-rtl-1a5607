// tb_nop_scheduler: self-checking test of the round-robin thread choice.
//
// Random ready masks; the expected pick is the first ready thread after
// the one taken last, found by a reference search. Also checks that each
// of the always-ready threads gets exactly one turn per round.
module tb_nop_scheduler;
  logic       clk = 0, rst_n = 0, take = 0, valid;
  logic [7:0] ready = 0;
  logic [2:0] pick;
  int checks = 0, failures = 0;
  int last = 7;
  int turns [8];

  nop_scheduler #(.N(8)) dut (.clk, .rst_n, .ready, .take, .pick, .valid);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // all ready: 0,1,...,7,0,...
    ready = 8'hff; take = 1;
    for (int i = 0; i < 16; i++) begin
      #1;
      checks++;
      if (!valid || pick != 3'(i % 8)) begin
        failures++;
        $display("FAIL round robin step %0d pick=%0d", i, pick);
      end
      turns[pick]++;
      @(negedge clk);
    end
    last = 7;
    foreach (turns[i]) begin
      checks++;
      if (turns[i] != 2) failures++;
    end
    // random masks
    for (int i = 0; i < 1000; i++) begin
      int exp_t;
      ready = 8'($urandom());
      take  = $urandom_range(0, 1);
      #1;
      exp_t = -1;
      for (int k = 1; k <= 8; k++)
        if (exp_t < 0 && ready[(last + k) % 8]) exp_t = (last + k) % 8;
      checks++;
      if ((exp_t < 0) ? valid : (!valid || pick != 3'(exp_t))) begin
        failures++;
        $display("FAIL ready=%b last=%0d pick=%0d valid=%0b exp=%0d", ready, last, pick, valid, exp_t);
      end
      if (take && exp_t >= 0) last = exp_t;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// nop_scheduler: round-robin choice of the next hardware thread.
//
// ready[i] is high for each thread that has work (running, or stopping and
// still owing its exception message). pick is the first ready thread after
// the one taken last, in the order last+1, last+2, ..., last, wrapping
// around; valid is low when no thread is ready. A high take accepts pick:
// it becomes the new "last" at the clock edge. After reset the search
// starts at thread 0.
//
// Round robin among active threads follows the processor description; the
// one-instruction turn and the take handshake are this design's choice.
module nop_scheduler #(
  parameter int unsigned N = 8,
  localparam int unsigned W = $clog2(N)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] ready,
  input  logic         take,
  output logic [W-1:0] pick,
  output logic         valid
);

  logic [W-1:0] last;

  always_comb begin
    pick  = last;
    valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      logic [W-1:0] idx;
      idx = W'((int'(last) + k) % N);
      if (!valid && ready[idx]) begin
        pick  = idx;
        valid = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last <= W'(N - 1);
    else if (take && valid)  last <= pick;
  end

endmodule

// nop_memory: the local memory of one processing unit.
//
// A single-port synchronous RAM of WORDS words of WIDTH bits, word
// addressed (the processor has no byte addressing). A read returns the
// addressed word on rdata one clock after en is high with we low; a write
// stores wdata at the clock edge where en and we are high. The memory has no
// reset; its contents are undefined until written.
//
// Size (16384 words of 32 bits, 14-bit address, 32-bit data) follows the
// processor's reference configuration; the single port and the one-cycle
// read latency are this design's choice, fitting a standard SRAM macro.
module nop_memory #(
  parameter int unsigned WORDS = 16384,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule

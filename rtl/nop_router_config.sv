// nop_router_config: router configuration block of the switch.
//
// Holds the processor id and the routing table. Messages routed to
// routing command 2 reach this block with their header removed; every
// DATA word is a command, END and PAUSE are ignored:
//
//   bits 31..28 = 1   processor id <= bits 21..0
//   bits 31..28 = 2   routing table entry bits 15..8 <= link bits 1..0
//   other values      ignored
//
// The routing table maps a processor id, by its low 8 bits, to one of the
// four external links. The switch reads the processor id and the whole
// table continuously. The block always accepts tokens (rx_ready high).
// After reset the processor id is PROC_ID and every entry names link 0.
//
// That routing is table driven, that processor ids start at 8 and that a
// configuration block is reachable as a routing destination follows the
// processor description. The command words, the table size and its
// indexing by the low id bits are this design's choices: the description
// gives neither the table's format nor how it is written.
module nop_router_config
  import nop_pkg::*;
#(
  parameter logic [21:0] PROC_ID  = 22'd8,
  parameter int unsigned ENTRIES  = 256,
  localparam int unsigned EW = $clog2(ENTRIES)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       rx_valid,
  input  token_t                     rx_tok,
  output logic                       rx_ready,
  output logic [21:0]                proc_id,
  output logic [ENTRIES-1:0][1:0]    table_link
);

  logic cmd;
  assign rx_ready = 1'b1;
  assign cmd      = rx_valid && rx_tok.kind == TK_DATA;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      proc_id    <= PROC_ID;
      table_link <= '0;
    end else if (cmd) begin
      unique case (rx_tok.data[31:28])
        4'd1:    proc_id <= rx_tok.data[21:0];
        4'd2:    table_link[rx_tok.data[8 +: EW]] <= rx_tok.data[1:0];
        default: ;
      endcase
    end
  end

endmodule

// nop_port_in: receiving side of a processing unit's channel ports.
//
// The switch delivers one message at a time to the unit, as a token stream
// with a valid/ready handshake. A HEAD token names the receiving thread
// (bits 7..5) and port (bits 4..0) for the tokens that follow. Every
// thread port has a one-token input buffer; DATA and END tokens are written
// into the buffer of the addressed port, and the stream is held (rx_ready
// low) while that buffer is full, which blocks the path back to the sender.
// END closes the message. PAUSE closes the path too but is dropped here,
// so the receiving thread never sees it. Tokens that arrive outside a
// message are dropped.
//
// The processing unit looks at the buffers of one thread at a time
// (rd_thread): full, is_end and data per port, combinationally. A high
// consume empties the buffer of (cons_thread, cons_port) at the clock
// edge. A token is accepted in the cycle it is offered when its buffer is
// empty.
//
// The port layout of the global port number, the blocking path and the
// PAUSE rule follow the processor description. The one-token buffer per
// port and the HEAD token are this design's own choices.
module nop_port_in
  import nop_pkg::*;
#(
  parameter int unsigned THREADS = 8,
  parameter int unsigned PORTS   = 32,
  localparam int unsigned TW = $clog2(THREADS),
  localparam int unsigned PW = $clog2(PORTS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the switch
  input  logic               rx_valid,
  input  token_t             rx_tok,
  output logic               rx_ready,
  // buffer view of one thread
  input  logic [TW-1:0]      rd_thread,
  output logic [PORTS-1:0]   full,
  output logic [PORTS-1:0]   is_end,
  output logic [PORTS-1:0][31:0] data,
  // take the token of one port
  input  logic               consume,
  input  logic [TW-1:0]      cons_thread,
  input  logic [PW-1:0]      cons_port
);

  logic [THREADS-1:0][PORTS-1:0]       b_full;
  logic [THREADS-1:0][PORTS-1:0]       b_end;
  logic [31:0]                         b_data [THREADS][PORTS];
  logic                                open;
  logic [TW-1:0]                       tgt_t;
  logic [PW-1:0]                       tgt_p;
  logic                                store;

  assign store    = rx_valid && open && (rx_tok.kind == TK_DATA || rx_tok.kind == TK_END)
                    && !b_full[tgt_t][tgt_p];
  assign rx_ready = !(open && (rx_tok.kind == TK_DATA || rx_tok.kind == TK_END))
                    || !b_full[tgt_t][tgt_p];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_full <= '0;
      b_end  <= '0;
      open   <= 1'b0;
      tgt_t  <= '0;
      tgt_p  <= '0;
    end else begin
      if (consume) b_full[cons_thread][cons_port] <= 1'b0;
      if (rx_valid && rx_ready) begin
        unique case (rx_tok.kind)
          TK_HEAD: begin
            open  <= 1'b1;
            tgt_t <= rx_tok.data[PW +: TW];
            tgt_p <= rx_tok.data[PW-1:0];
          end
          TK_PAUSE: open <= 1'b0;
          TK_END:   open <= 1'b0;
          default:  ;
        endcase
      end
      if (store) begin
        b_full[tgt_t][tgt_p] <= 1'b1;
        b_end[tgt_t][tgt_p]  <= (rx_tok.kind == TK_END);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (store) b_data[tgt_t][tgt_p] <= rx_tok.data;
  end

  always_comb begin
    for (int p = 0; p < PORTS; p++) begin
      full[p]   = b_full[rd_thread][p];
      is_end[p] = b_end[rd_thread][p];
      data[p]   = b_data[rd_thread][p];
    end
  end

  // A buffer is only consumed when it holds a token.
  assert property (@(posedge clk) disable iff (!rst_n)
                   consume |-> b_full[cons_thread][cons_port]);

endmodule

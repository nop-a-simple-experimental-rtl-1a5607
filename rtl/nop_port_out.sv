// nop_port_out: sending side of a processing unit's channel ports.
//
// All threads of a unit share one token stream to the switch. A message
// owns that stream from its first token until it sends END or PAUSE: the
// path from the sending port to its destination stays reserved for it, and
// any other port that wants to send is refused (the instruction blocks and
// is retried on the thread's next turn).
//
// A request (req high) comes from the executing thread's port
// (req_thread, req_port) with a kind and a word:
//   DATA   if the port owns the stream: DATA word; if the stream is free:
//          HEAD(req_dest) then DATA word, and the port now owns it
//   END    owner: END, stream freed; stream free: HEAD(req_dest), END
//   PAUSE  owner: PAUSE, stream freed; anyone else: nothing to send
//   req_exc  exception message of a stopped thread: HEAD(req_dest),
//          DATA word, END; needs the stream free
// accept says, in the same cycle, whether the request is taken; the tokens
// enter a 4-token queue that drains one token per cycle when tx_ready is
// high. avail[p] tells whether port p of thread q_thread could send now.
//
// The reserved path, END and PAUSE follow the processor description. The
// single stream per unit (one 32-bit port per unit in the block diagram),
// the queue depth and the exception message format are this design's own.
module nop_port_out
  import nop_pkg::*;
#(
  parameter int unsigned THREADS = 8,
  parameter int unsigned PORTS   = 32,
  localparam int unsigned TW = $clog2(THREADS),
  localparam int unsigned PW = $clog2(PORTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // request of the executing thread
  input  logic              req,
  input  logic              req_exc,
  input  logic [TW-1:0]     req_thread,
  input  logic [PW-1:0]     req_port,
  input  tok_kind_e         req_kind,
  input  logic [31:0]       req_data,
  input  logic [31:0]       req_dest,
  output logic              accept,
  // stream ownership, for the exception sequence and WAIT
  output logic              own_valid,
  output logic [TW-1:0]     own_thread,
  output logic [PW-1:0]     own_port,
  input  logic [TW-1:0]     q_thread,
  output logic [PORTS-1:0]  avail,
  // to the switch
  output logic              tx_valid,
  output token_t            tx_tok,
  input  logic              tx_ready
);

  localparam int unsigned DEPTH = 4;

  token_t      q [DEPTH];
  logic [1:0]  rd_ptr, wr_ptr;
  logic [2:0]  count;
  logic [2:0]  space;
  logic        mine;
  token_t      p0, p1, p2;
  logic [1:0]  npush;
  logic        pop;
  logic        own_set, own_clr;

  assign space    = 3'(DEPTH) - count;
  assign mine     = own_valid && own_thread == req_thread && own_port == req_port;
  assign tx_valid = count != 0;
  assign tx_tok   = q[rd_ptr];
  assign pop      = tx_valid && tx_ready;

  always_comb begin
    accept  = 1'b0;
    npush   = 2'd0;
    own_set = 1'b0;
    own_clr = 1'b0;
    p0      = '{kind: TK_HEAD, data: req_dest};
    p1      = '{kind: req_kind, data: req_data};
    p2      = '{kind: TK_END, data: '0};
    if (req_exc) begin
      if (!own_valid && space >= 3) begin
        accept = 1'b1;
        npush  = 2'd3;
        p1     = '{kind: TK_DATA, data: req_data};
      end
    end else if (req) begin
      if (mine) begin
        if (space >= 1) begin
          accept  = 1'b1;
          npush   = 2'd1;
          p0      = '{kind: req_kind, data: req_data};
          own_clr = (req_kind != TK_DATA);
        end
      end else if (req_kind == TK_PAUSE) begin
        accept = 1'b1;   // no open path: nothing to release
      end else if (!own_valid && space >= 2) begin
        accept  = 1'b1;
        npush   = 2'd2;
        own_set = (req_kind == TK_DATA);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr     <= '0;
      wr_ptr     <= '0;
      count      <= '0;
      own_valid  <= 1'b0;
      own_thread <= '0;
      own_port   <= '0;
    end else begin
      if (pop) rd_ptr <= rd_ptr + 1;
      wr_ptr <= wr_ptr + npush;
      count  <= count + 3'(npush) - 3'(pop);
      if (own_set) begin
        own_valid  <= 1'b1;
        own_thread <= req_thread;
        own_port   <= req_port;
      end else if (own_clr) begin
        own_valid  <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (npush >= 1) q[wr_ptr]      <= p0;
    if (npush >= 2) q[wr_ptr + 2'd1] <= p1;
    if (npush >= 3) q[wr_ptr + 2'd2] <= p2;
  end

  always_comb begin
    for (int p = 0; p < PORTS; p++)
      avail[p] = (!own_valid || (own_thread == q_thread && own_port == PW'(p)))
                 && space >= 2;
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= 3'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n)
                   tx_valid && !tx_ready |=> tx_valid && $stable(tx_tok));

endmodule

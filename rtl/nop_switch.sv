// nop_switch: the communication switch of a NOP processor.
//
// A circuit switch between token streams. Its inputs are the send streams
// of the processing units, the incoming external links and the incoming
// peripheral lines; its outputs are the receive streams of the units, the
// outgoing external links, the outgoing peripheral lines and the router
// configuration block. Index order on both sides: units, then external
// links, then peripheral lines (then, on the output side only, the
// configuration block).
//
// A message starts with a HEAD token that carries a 32-bit global port
// number. Its upper 22 bits select the route:
//   0        local unit, bits 9..8 name it
//   1        peripheral line, bits 2..0 name it; the HEAD is removed
//   2        router configuration block; the HEAD is removed
//   4..7     external link 0..3; the HEAD is forwarded with its upper
//            22 bits cleared, so it names a unit of the neighbour
//   >= 8     processor id: this processor's own id goes to the local unit,
//            any other id to the external link its routing table entry
//            (indexed by the id's low 8 bits) names; the HEAD is forwarded
//            unchanged
//   3        no route: the message is discarded up to its END or PAUSE
// The input waits with its HEAD until the output is free; a free output
// goes to the lowest-numbered input asking for it. From then on the
// path is reserved, and tokens pass with the output's valid/ready
// handshake combinationally, one per cycle, until END or PAUSE has passed,
// which frees the output. Tokens other than HEAD that arrive at an input
// with no open path are dropped.
//
// The route table of global port numbers, the reserved path and the END
// and PAUSE rules follow the processor description. The HEAD token, the
// neighbour addressing of routing commands 4..7, the peripheral line
// number in bits 2..0, the fixed-priority arbitration and the discarding
// of unroutable messages are this design's own choices.
module nop_switch
  import nop_pkg::*;
#(
  parameter int unsigned UNITS   = 4,
  parameter int unsigned EXT     = 4,
  parameter int unsigned PERIPH  = 8,
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned NI  = UNITS + EXT + PERIPH,
  localparam int unsigned NO  = NI + 1,
  localparam int unsigned OW  = $clog2(NO),
  localparam int unsigned IW  = $clog2(NI),
  localparam int unsigned EW  = $clog2(ENTRIES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [21:0]              proc_id,
  input  logic [ENTRIES-1:0][1:0]  table_link,
  input  logic   [NI-1:0]          in_valid,
  input  token_t [NI-1:0]          in_tok,
  output logic   [NI-1:0]          in_ready,
  output logic   [NO-1:0]          out_valid,
  output token_t [NO-1:0]          out_tok,
  input  logic   [NO-1:0]          out_ready
);

  localparam int unsigned O_EXT    = UNITS;
  localparam int unsigned O_PERIPH = UNITS + EXT;
  localparam int unsigned O_CONFIG = UNITS + EXT + PERIPH;

  // route of the HEAD waiting at each input
  logic [NI-1:0][OW-1:0] tgt;
  logic [NI-1:0]         strip, rewrite, bad;
  // connection state of each input
  logic [NI-1:0]         conn, drop, c_strip, c_rw;
  logic [NI-1:0][OW-1:0] dst;
  // ownership of each output
  logic [NO-1:0]         busy;
  logic [NO-1:0][IW-1:0] owner;
  logic [NO-1:0]         grant;
  logic [NO-1:0][IW-1:0] grant_in;

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      logic [21:0] rc;
      rc         = in_tok[i].data[31:10];
      tgt[i]     = '0;
      strip[i]   = 1'b0;
      rewrite[i] = 1'b0;
      bad[i]     = 1'b0;
      if (rc == RC_LOCAL) begin
        tgt[i] = OW'(in_tok[i].data[9:8]);
      end else if (rc == RC_PERIPH) begin
        tgt[i]   = OW'(O_PERIPH + int'(in_tok[i].data[2:0]) % PERIPH);
        strip[i] = 1'b1;
      end else if (rc == RC_CONFIG) begin
        tgt[i]   = OW'(O_CONFIG);
        strip[i] = 1'b1;
      end else if (rc >= 22'd4 && rc <= 22'd7) begin
        tgt[i]     = OW'(O_EXT + int'(rc[1:0]) % EXT);
        rewrite[i] = 1'b1;
      end else if (rc >= RC_FIRST_ID) begin
        if (rc == proc_id) tgt[i] = OW'(in_tok[i].data[9:8]);
        else               tgt[i] = OW'(O_EXT + int'(table_link[rc[EW-1:0]]) % EXT);
      end else begin
        bad[i] = 1'b1;
      end
    end
  end

  // Free outputs go to the lowest-numbered input whose HEAD asks for them.
  always_comb begin
    for (int o = 0; o < NO; o++) begin
      grant[o]    = 1'b0;
      grant_in[o] = '0;
      for (int i = NI - 1; i >= 0; i--) begin
        if (!busy[o] && !conn[i] && !drop[i] && in_valid[i] &&
            in_tok[i].kind == TK_HEAD && !bad[i] && tgt[i] == OW'(o)) begin
          grant[o]    = 1'b1;
          grant_in[o] = IW'(i);
        end
      end
    end
  end

  // Data path: each busy output shows its owner's token.
  always_comb begin
    for (int o = 0; o < NO; o++) begin
      token_t t;
      t = in_tok[owner[o]];
      if (t.kind == TK_HEAD && c_rw[owner[o]]) t.data[31:10] = '0;
      out_tok[o]   = t;
      out_valid[o] = busy[o] && in_valid[owner[o]] &&
                     !(t.kind == TK_HEAD && c_strip[owner[o]]);
    end
    for (int i = 0; i < NI; i++) begin
      if (conn[i])
        in_ready[i] = (in_tok[i].kind == TK_HEAD && c_strip[i]) || out_ready[dst[i]];
      else if (drop[i])
        in_ready[i] = 1'b1;
      else
        in_ready[i] = in_tok[i].kind != TK_HEAD || bad[i];
    end
  end

  // the last token of a message (END or PAUSE) passes on input i
  logic [NI-1:0] fin;
  always_comb
    for (int i = 0; i < NI; i++)
      fin[i] = in_valid[i] && in_ready[i] &&
               (in_tok[i].kind == TK_END || in_tok[i].kind == TK_PAUSE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conn    <= '0;
      drop    <= '0;
      c_strip <= '0;
      c_rw    <= '0;
      dst     <= '0;
      busy    <= '0;
      owner   <= '0;
    end else begin
      for (int i = 0; i < NI; i++) begin
        if (conn[i] && fin[i]) begin
          conn[i]      <= 1'b0;
          busy[dst[i]] <= 1'b0;
        end
        if (drop[i] && fin[i]) drop[i] <= 1'b0;
        if (!conn[i] && !drop[i] && in_valid[i] && in_tok[i].kind == TK_HEAD && bad[i])
          drop[i] <= 1'b1;
      end
      for (int o = 0; o < NO; o++) begin
        if (grant[o]) begin
          busy[o]               <= 1'b1;
          owner[o]              <= grant_in[o];
          conn[grant_in[o]]     <= 1'b1;
          dst[grant_in[o]]      <= OW'(o);
          c_strip[grant_in[o]]  <= strip[grant_in[o]];
          c_rw[grant_in[o]]     <= rewrite[grant_in[o]];
        end
      end
    end
  end

  // An output carries tokens only while a path owns it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid != 0 |-> (out_valid & ~busy) == 0);

endmodule

// nop_top: a complete NOP processor.
//
// UNITS processing units, each with its own local memory of MEM_WORDS
// words, all joined by one communication switch. The switch also serves
// EXT external links, to other NOP processors, and PERIPH peripheral
// lines, and it holds the router configuration block (processor id and
// routing table). External links and peripheral lines are token streams
// (32-bit word plus 2-bit kind, valid/ready) in each direction; every
// message entering on one starts with a HEAD token naming its destination
// port, and a HEAD routed out to a peripheral line is removed.
//
// After reset, thread 0 of every unit runs the boot ROM: it waits for a
// message on its port 0 whose first word is the start position and whose
// further words are loaded from word 0 of the unit's memory; END starts
// the loaded code. A host can deliver such a message through an external
// link with HEAD = global port number {22'd0, unit, 3'd0, 5'd0}.
//
// The block structure (four units with 16K-word memories, a 14-bit address
// and 32-bit data path between unit and memory, one switch with internal,
// external and peripheral sides) follows the processor's block diagram and
// numbers table; the link signalling is this design's own choice.
// debug_mode makes BREAK stall its thread while it is high.
module nop_top
  import nop_pkg::*;
#(
  parameter int unsigned UNITS     = 4,
  parameter int unsigned THREADS   = 8,
  parameter int unsigned PORTS     = 32,
  parameter int unsigned MEM_WORDS = 16384,
  parameter int unsigned EXT       = 4,
  parameter int unsigned PERIPH    = 8,
  parameter logic [21:0] PROC_ID   = 22'd8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                debug_mode,
  // external links
  input  logic   [EXT-1:0]    ext_in_valid,
  input  token_t [EXT-1:0]    ext_in_tok,
  output logic   [EXT-1:0]    ext_in_ready,
  output logic   [EXT-1:0]    ext_out_valid,
  output token_t [EXT-1:0]    ext_out_tok,
  input  logic   [EXT-1:0]    ext_out_ready,
  // peripheral lines
  input  logic   [PERIPH-1:0] per_in_valid,
  input  token_t [PERIPH-1:0] per_in_tok,
  output logic   [PERIPH-1:0] per_in_ready,
  output logic   [PERIPH-1:0] per_out_valid,
  output token_t [PERIPH-1:0] per_out_tok,
  input  logic   [PERIPH-1:0] per_out_ready
);

  localparam int unsigned NI      = UNITS + EXT + PERIPH;
  localparam int unsigned NO      = NI + 1;
  localparam int unsigned ENTRIES = 256;

  logic   [NI-1:0] sw_in_valid, sw_in_ready;
  token_t [NI-1:0] sw_in_tok;
  logic   [NO-1:0] sw_out_valid, sw_out_ready;
  token_t [NO-1:0] sw_out_tok;

  logic [21:0]             proc_id;
  logic [ENTRIES-1:0][1:0] table_link;

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    logic        mem_en, mem_we;
    logic [13:0] mem_addr;
    logic [31:0] mem_wdata, mem_rdata;

    nop_memory #(.WORDS(MEM_WORDS), .WIDTH(32)) u_mem (
      .clk, .en(mem_en), .we(mem_we), .addr(mem_addr[$clog2(MEM_WORDS)-1:0]),
      .wdata(mem_wdata), .rdata(mem_rdata)
    );

    nop_pu #(.UNIT(u), .THREADS(THREADS), .PORTS(PORTS)) u_pu (
      .clk, .rst_n, .proc_id, .debug_mode,
      .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
      .tx_valid(sw_in_valid[u]), .tx_tok(sw_in_tok[u]), .tx_ready(sw_in_ready[u]),
      .rx_valid(sw_out_valid[u]), .rx_tok(sw_out_tok[u]), .rx_ready(sw_out_ready[u])
    );
  end

  for (genvar e = 0; e < EXT; e++) begin : g_ext
    assign sw_in_valid[UNITS + e]   = ext_in_valid[e];
    assign sw_in_tok[UNITS + e]     = ext_in_tok[e];
    assign ext_in_ready[e]          = sw_in_ready[UNITS + e];
    assign ext_out_valid[e]         = sw_out_valid[UNITS + e];
    assign ext_out_tok[e]           = sw_out_tok[UNITS + e];
    assign sw_out_ready[UNITS + e]  = ext_out_ready[e];
  end

  for (genvar p = 0; p < PERIPH; p++) begin : g_per
    assign sw_in_valid[UNITS + EXT + p]  = per_in_valid[p];
    assign sw_in_tok[UNITS + EXT + p]    = per_in_tok[p];
    assign per_in_ready[p]               = sw_in_ready[UNITS + EXT + p];
    assign per_out_valid[p]              = sw_out_valid[UNITS + EXT + p];
    assign per_out_tok[p]                = sw_out_tok[UNITS + EXT + p];
    assign sw_out_ready[UNITS + EXT + p] = per_out_ready[p];
  end

  nop_router_config #(.PROC_ID(PROC_ID), .ENTRIES(ENTRIES)) u_cfg (
    .clk, .rst_n, .rx_valid(sw_out_valid[NI]), .rx_tok(sw_out_tok[NI]),
    .rx_ready(sw_out_ready[NI]), .proc_id, .table_link
  );

  nop_switch #(.UNITS(UNITS), .EXT(EXT), .PERIPH(PERIPH), .ENTRIES(ENTRIES)) u_sw (
    .clk, .rst_n, .proc_id, .table_link,
    .in_valid(sw_in_valid), .in_tok(sw_in_tok), .in_ready(sw_in_ready),
    .out_valid(sw_out_valid), .out_tok(sw_out_tok), .out_ready(sw_out_ready)
  );

endmodule

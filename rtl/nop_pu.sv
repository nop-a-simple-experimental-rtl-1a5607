// nop_pu: one processing unit of the NOP processor.
//
// A multithreaded stack machine. Each of the THREADS hardware threads has
// its own register set: ip (16 bits, word address and opcode index in the
// low 2 bits), sp (growing downwards) and the limits ld0/ld1 (data) and
// lc0/lc1 (code and constants), all 14 bits, plus the exception port exc.
// The constants pointer cp = lc0+64 and the data pointer dp = ld0+64 are
// derived. Threads that are running or stopping take turns round robin,
// one instruction per turn.
//
// Every instruction is an 8-bit opcode with no operand; it works on the
// thread's stack in the local memory. An instruction runs as a fixed
// sequence of single-port memory steps:
//   PICK    next thread; check ip against [lc0, lc1); read the code word
//   FETCH   select the opcode; read the top of stack
//   POP     one cycle per popped word (the next read overlaps)
//   MEMA/D  one more read for LD, LDC, LDX, DECLD, LDINC
//   EXEC    compute, decide fault or block, commit registers
//   WRITE   one cycle per pushed or stored word (at most 3)
// Nothing is written before EXEC, so an instruction that must wait (IN on
// an empty port, OUT on a busy path, WAIT, WAITTMO, BREAK in debug mode)
// is simply dropped and executed again on the thread's next turn.
//
// A thread is stopped, faulty, when ip leaves [lc0, lc1), when a stack or
// data access leaves [ld0, ld1), when sp leaves [ld0, ld1], on a zero
// divisor, on an END token read by IN, on START with no free thread and on
// an undefined opcode (0xB8..0xBF); STOP stops it without fault. A stopped
// thread first ends any message it is sending (END), then sends its
// exception message HEAD(exc), DATA({faulty, 15'b0, ip}), END, and is
// free again. After reset thread 0 runs the boot ROM at word 0x3fc0 with
// lc = [0, 0x3fff), ld = [0, 0x3fc0), sp = 0x3fc0 and exc naming
// peripheral line 1; the other threads are free.
//
// Memory: single port, one-cycle read latency (nop_memory); reads of word
// 0x3fc0 and above return the boot ROM. Switch side: a send stream
// (nop_port_out) and a receive stream (nop_port_in), valid/ready.
//
// The registers, their widths, the limits and derived pointers, the boot
// state, round robin, every opcode's effect and the faults named for UDIV,
// SDIV, IN, START follow the processor description. This design's own
// choices are: the step sequence; retrying a blocked instruction; range
// checks on every data access (the description names ld as "lower and
// upper bound for memory data access" but only says sp and ip are
// checked); lc0 counted in words and scaled by 4 where it meets ip in
// CALL and JUMP (START computes ip' = (b + lc0') * 4); the exception
// message format; cycles_t counting completed instructions; the event
// scan order (lowest port first, output before end before input).
module nop_pu
  import nop_pkg::*;
#(
  parameter int unsigned UNIT    = 0,
  parameter int unsigned THREADS = 8,
  parameter int unsigned PORTS   = 32,
  localparam int unsigned TW = $clog2(THREADS),
  localparam int unsigned PW = $clog2(PORTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [21:0]       proc_id,
  input  logic              debug_mode,
  // local memory
  output logic              mem_en,
  output logic              mem_we,
  output logic [13:0]       mem_addr,
  output logic [31:0]       mem_wdata,
  input  logic [31:0]       mem_rdata,
  // to the switch
  output logic              tx_valid,
  output token_t            tx_tok,
  input  logic              tx_ready,
  // from the switch
  input  logic              rx_valid,
  input  token_t            rx_tok,
  output logic              rx_ready
);

  typedef enum logic [1:0] {T_FREE, T_RUN, T_STOP} tstate_e;
  typedef enum logic [2:0] {S_PICK, S_FETCH, S_POP, S_MEMA, S_MEMD, S_EXEC, S_WRITE, S_EXC}
    state_e;
  typedef enum logic [1:0] {EV_OUT = 2'd0, EV_END = 2'd1, EV_IN = 2'd2} ev_e;

  // ---------------------------------------------------------------- thread state
  tstate_e      tstate [THREADS];
  logic         faulty [THREADS];
  logic [15:0]  ip     [THREADS];
  logic [13:0]  sp     [THREADS];
  logic [13:0]  ld0    [THREADS];
  logic [13:0]  ld1    [THREADS];
  logic [13:0]  lc0    [THREADS];
  logic [13:0]  lc1    [THREADS];
  logic [31:0]  exc    [THREADS];
  logic [31:0]  cycles [THREADS];
  logic [31:0]  dest   [THREADS][PORTS];
  logic [15:0]  ev_vec [THREADS][PORTS][3];
  logic [THREADS-1:0][PORTS-1:0][2:0] ev_on;
  logic [31:0]  now;

  // ---------------------------------------------------------------- control
  state_e       st;
  logic [TW-1:0] t;
  logic [7:0]   opc;
  logic [31:0]  opnd [6];
  logic [2:0]   npop, popcnt;
  logic [31:0]  tsp;
  logic [31:0]  mdata;
  logic [31:0]  maddr;
  logic [13:0]  w_addr [3];
  logic [31:0]  w_data [3];
  logic [1:0]   w_n, w_i;
  logic         rom_sel;
  logic [31:0]  rom_q, rom_d;
  logic [31:0]  rdata;

  // registers of the current thread, widened for 32-bit address arithmetic
  logic [31:0]  c_ld0, c_ld1, c_lc0, c_lc1, c_dp, c_cp, c_sp;
  logic [15:0]  c_ip;
  assign c_ld0 = 32'(ld0[t]);
  assign c_ld1 = 32'(ld1[t]);
  assign c_lc0 = 32'(lc0[t]);
  assign c_lc1 = 32'(lc1[t]);
  assign c_dp  = c_ld0 + 32'(BASE_OFFSET);
  assign c_cp  = c_lc0 + 32'(BASE_OFFSET);
  assign c_sp  = 32'(sp[t]);
  assign c_ip  = ip[t];

  function automatic logic in_data(logic [31:0] ad, logic [31:0] lo, logic [31:0] hi);
    return ad >= lo && ad < hi;
  endfunction

  // ---------------------------------------------------------------- scheduler
  logic [THREADS-1:0] ready;
  logic [TW-1:0]      pick;
  logic               pick_valid, take;
  always_comb for (int i = 0; i < THREADS; i++) ready[i] = tstate[i] != T_FREE;

  nop_scheduler #(.N(THREADS)) u_sched (
    .clk, .rst_n, .ready, .take, .pick, .valid(pick_valid)
  );

  // ---------------------------------------------------------------- boot ROM
  nop_boot_rom u_rom (.addr(mem_addr[5:0]), .data(rom_d));
  assign rdata = rom_sel ? rom_q : mem_rdata;

  // ---------------------------------------------------------------- channel ports
  logic [PORTS-1:0]       in_full, in_end, out_avail;
  logic [PORTS-1:0][31:0] in_data_w;
  logic                   consume;
  logic [PW-1:0]          cons_port;
  logic                   oreq, oreq_exc, oacc;
  logic [PW-1:0]          oport;
  tok_kind_e              okind;
  logic [31:0]            odata, odest;
  logic                   own_valid;
  logic [TW-1:0]          own_thread;
  logic [PW-1:0]          own_port;

  nop_port_in #(.THREADS(THREADS), .PORTS(PORTS)) u_in (
    .clk, .rst_n, .rx_valid, .rx_tok, .rx_ready,
    .rd_thread(t), .full(in_full), .is_end(in_end), .data(in_data_w),
    .consume, .cons_thread(t), .cons_port
  );

  nop_port_out #(.THREADS(THREADS), .PORTS(PORTS)) u_out (
    .clk, .rst_n, .req(oreq), .req_exc(oreq_exc), .req_thread(t), .req_port(oport),
    .req_kind(okind), .req_data(odata), .req_dest(odest), .accept(oacc),
    .own_valid, .own_thread, .own_port, .q_thread(t), .avail(out_avail),
    .tx_valid, .tx_tok, .tx_ready
  );

  // ---------------------------------------------------------------- ALU, divider
  alu_op_e     alu_op;
  logic [31:0] alu_y, dq, dr;
  logic        d0;
  nop_alu u_alu (.op(alu_op), .a(opnd[0]), .b(opnd[1]), .c(opnd[2]), .y(alu_y));
  nop_divider u_div (.sgn(opc == OP_SDIV), .a(opnd[0]), .b(opnd[1]), .q(dq), .r(dr), .div0(d0));

  always_comb begin
    unique case (opc)
      OP_ADD:     alu_op = ALU_ADD;
      OP_SUB:     alu_op = ALU_SUB;
      OP_MUL:     alu_op = ALU_MUL;
      OP_AND:     alu_op = ALU_AND;
      OP_OR:      alu_op = ALU_OR;
      OP_XOR:     alu_op = ALU_XOR;
      OP_SWAP:    alu_op = ALU_SWAP;
      OP_LOG2:    alu_op = ALU_LOG2;
      OP_LEFT:    alu_op = ALU_LEFT;
      OP_RIGHT:   alu_op = ALU_RIGHT;
      OP_SIGN:    alu_op = ALU_SIGN;
      OP_ZERO:    alu_op = ALU_ZERO;
      OP_COUNT:   alu_op = ALU_COUNT;
      OP_ULESS:   alu_op = ALU_ULESS;
      OP_SLESS:   alu_op = ALU_SLESS;
      OP_COMBINE: alu_op = ALU_COMBINE;
      default:    alu_op = ALU_ADD;
    endcase
  end

  // ---------------------------------------------------------------- decode
  // words popped, and whether one more memory read follows the pops
  function automatic logic [2:0] pops(logic [7:0] op);
    if (is_immediate(op)) return 3'd0;
    unique case (op)
      OP_NOP, OP_STOP, OP_BREAK, OP_EVCLEAR, OP_WAIT, OP_NOW, OP_THREADS,
      OP_THRCYC, OP_CYCLES:                                   return 3'd0;
      OP_ADD, OP_SUB, OP_MUL, OP_UDIV, OP_SDIV, OP_AND, OP_OR, OP_XOR,
      OP_EXCH, OP_SWAP, OP_FJP, OP_ST, OP_STX, OP_SETPORT, OP_OUT,
      OP_EVOUT, OP_EVIN, OP_EVEND, OP_ULESS, OP_SLESS, OP_COMBINE: return 3'd2;
      OP_LEFT, OP_RIGHT:                                      return 3'd3;
      OP_START:                                               return 3'd6;
      default:                                                return 3'd1;
    endcase
  endfunction

  function automatic logic mem_read_op(logic [7:0] op);
    return op == OP_LDX || op == OP_DECLD || op == OP_LDC || op == OP_LD || op == OP_LDINC;
  endfunction

  // address of the extra read, and whether it lies in range
  logic [31:0] ra;
  logic        ra_ok;
  always_comb begin
    logic [31:0] a;
    a     = opnd[0];
    ra    = a + c_dp;
    ra_ok = in_data(ra, c_ld0, c_ld1);
    if (opc == OP_LDX) begin
      ra    = tsp + a;
      ra_ok = in_data(ra, c_ld0, c_ld1);
    end else if (opc == OP_LDC) begin
      if (a + c_cp >= c_lc1) begin
        ra    = a - (c_lc1 - c_lc0) + c_dp;
        ra_ok = in_data(ra, c_ld0, c_ld1);
      end else begin
        ra    = a + c_cp;
        ra_ok = in_data(ra, c_lc0, c_lc1);
      end
    end
  end

  // ---------------------------------------------------------------- events (WAIT)
  logic        ev_hit;
  logic [15:0] ev_ip;
  always_comb begin
    ev_hit = 1'b0;
    ev_ip  = '0;
    for (int p = 0; p < PORTS; p++) begin
      if (!ev_hit) begin
        if (ev_on[t][p][EV_OUT] && out_avail[p]) begin
          ev_hit = 1'b1; ev_ip = ev_vec[t][p][EV_OUT];
        end else if (ev_on[t][p][EV_END] && in_full[p] && in_end[p]) begin
          ev_hit = 1'b1; ev_ip = ev_vec[t][p][EV_END];
        end else if (ev_on[t][p][EV_IN] && in_full[p]) begin
          ev_hit = 1'b1; ev_ip = ev_vec[t][p][EV_IN];
        end
      end
    end
  end

  // lowest free thread, for START; number of free threads, for THREADS
  logic [TW-1:0] free_t;
  logic          free_any;
  logic [31:0]   free_cnt, cyc_sum;
  always_comb begin
    free_t   = '0;
    free_any = 1'b0;
    free_cnt = '0;
    cyc_sum  = '0;
    for (int i = THREADS - 1; i >= 0; i--) begin
      if (tstate[i] == T_FREE) begin
        free_t   = TW'(i);
        free_any = 1'b1;
        free_cnt = free_cnt + 1;
      end
      cyc_sum = cyc_sum + cycles[i];
    end
  end

  // ---------------------------------------------------------------- execute
  // Outcome of the instruction in EXEC: fault, block, or commit with a new
  // ip and sp, up to two pushes and one store.
  logic        x_fault, x_block, x_stall;
  logic [15:0] x_ip;
  logic [31:0] x_sp;
  logic [1:0]  x_npush;
  logic [31:0] x_push0, x_push1;
  logic        x_store;
  logic [31:0] x_saddr, x_sdata;

  always_comb begin
    logic [31:0] a, b;
    a         = opnd[0];
    b         = opnd[1];
    x_fault   = 1'b0;
    x_block   = 1'b0;
    x_ip      = c_ip + 16'd1;
    x_npush   = 2'd0;
    x_push0   = '0;
    x_push1   = '0;
    x_store   = 1'b0;
    x_saddr   = '0;
    x_sdata   = '0;
    consume   = 1'b0;
    cons_port = a[PW-1:0];
    oreq      = 1'b0;
    oreq_exc  = 1'b0;
    oport     = a[PW-1:0];
    okind     = TK_DATA;
    odata     = b;
    odest     = dest[t][a[PW-1:0]];

    if (st == S_EXEC) begin
      if (is_immediate(opc)) begin
        x_npush = 2'd1;
        x_push0 = {{24{opc[7]}}, opc};
      end else begin
        unique case (opc)
          OP_NOP: ;
          OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR, OP_XOR, OP_SWAP, OP_LOG2, OP_LEFT,
          OP_RIGHT, OP_SIGN, OP_ZERO, OP_COUNT, OP_ULESS, OP_SLESS, OP_COMBINE: begin
            x_npush = 2'd1;
            x_push0 = alu_y;
          end
          OP_UDIV, OP_SDIV: begin
            x_fault = d0;
            x_npush = 2'd2;
            x_push0 = dq;
            x_push1 = dr;
          end
          OP_POP: ;
          OP_DUP: begin
            x_npush = 2'd2;
            x_push0 = a;
            x_push1 = a;
          end
          OP_EXCH: begin
            x_npush = 2'd2;
            x_push0 = a;
            x_push1 = b;
          end
          OP_LDX, OP_LDC, OP_LD: begin
            x_npush = 2'd1;
            x_push0 = mdata;
          end
          OP_DECLD: begin
            x_npush = 2'd1;
            x_push0 = mdata - 1;
            x_store = 1'b1;
            x_saddr = maddr;
            x_sdata = mdata - 1;
          end
          OP_LDINC: begin
            x_npush = 2'd1;
            x_push0 = mdata;
            x_store = 1'b1;
            x_saddr = maddr;
            x_sdata = mdata + 1;
          end
          OP_UJP:  x_ip = c_ip + a[15:0];
          OP_FJP:  x_ip = (b == 0) ? c_ip + a[15:0] : c_ip + 16'd1;
          OP_ST: begin
            x_store = 1'b1;
            x_saddr = a + c_dp;
            x_sdata = b;
            x_fault = !in_data(x_saddr, c_ld0, c_ld1);
          end
          OP_STX: begin
            x_store = 1'b1;
            x_saddr = tsp + a;
            x_sdata = b;
            x_fault = !in_data(x_saddr, c_ld0, c_ld1);
          end
          OP_STOP: ;   // handled below
          OP_BREAK: x_block = debug_mode;
          OP_START: begin
            // opnd: 0 exc, 1 ld1', 2 ld0', 3 b, 4 lc1', 5 lc0'
            x_fault = !free_any;
            x_npush = 2'd1;
            x_push0 = {proc_id, 2'(UNIT), 3'(free_t), 5'd0};
          end
          OP_CALL: begin
            x_npush = 2'd1;
            x_push0 = 32'(16'(c_ip + 16'd1 - {lc0[t], 2'b00}));
            x_ip    = c_ip + a[15:0];
          end
          OP_JUMP: x_ip = a[15:0] + {lc0[t], 2'b00};
          OP_GETPORT: begin
            x_npush = 2'd1;
            x_push0 = dest[t][a[PW-1:0]];
          end
          OP_SETPORT: ;  // register write below
          OP_OUT, OP_OUTEND, OP_OUTPAUSE: begin
            oreq    = 1'b1;
            okind   = (opc == OP_OUT) ? TK_DATA : (opc == OP_OUTEND) ? TK_END : TK_PAUSE;
          end
          OP_IN: begin
            x_block = !in_full[a[PW-1:0]];
            x_fault = in_full[a[PW-1:0]] && in_end[a[PW-1:0]];
            consume = in_full[a[PW-1:0]];
            x_npush = 2'd1;
            x_push0 = in_data_w[a[PW-1:0]];
          end
          OP_INMORE: begin
            x_block = !in_full[a[PW-1:0]];
            consume = in_full[a[PW-1:0]] && in_end[a[PW-1:0]];
            x_npush = 2'd1;
            x_push0 = in_end[a[PW-1:0]] ? 32'd0 : '1;
          end
          OP_EVCLEAR, OP_EVOUT, OP_EVIN, OP_EVEND: ;  // register writes below
          OP_WAIT: begin
            x_block = !ev_hit;
            x_ip    = ev_ip;
          end
          OP_NOW: begin
            x_npush = 2'd1;
            x_push0 = now;
          end
          OP_WAITTMO: begin
            if ($signed(now - a) >= 0) x_ip = c_ip + 16'd1;
            else if (ev_hit)           x_ip = ev_ip;
            else                       x_block = 1'b1;
          end
          OP_POPN: ;  // sp below
          OP_PORT: begin
            x_npush = 2'd1;
            x_push0 = {proc_id, 2'(UNIT), 3'(t), a[4:0]};
          end
          OP_LDAX: begin
            x_npush = 2'd1;
            x_push0 = a + tsp - c_dp;
          end
          OP_THREADS: begin
            x_npush = 2'd1;
            x_push0 = free_cnt;
          end
          OP_THRCYC: begin
            x_npush = 2'd1;
            x_push0 = cycles[t];
          end
          OP_CYCLES: begin
            x_npush = 2'd1;
            x_push0 = cyc_sum;
          end
          default: x_fault = 1'b1;  // undefined opcode
        endcase
      end
      x_sp = (opc == OP_POPN) ? tsp + a : tsp - 32'(x_npush);
      // stack bounds: pushes stay in [ld0, ld1), sp in [ld0, ld1]
      if (x_sp < c_ld0 || x_sp > c_ld1) x_fault = 1'b1;
      // side effects towards the ports only when the instruction goes ahead
      if (x_fault) begin
        oreq    = 1'b0;
        consume = consume && in_end[a[PW-1:0]] && opc == OP_IN;
      end
    end else begin
      x_sp = tsp;
    end

    // exception sequence of a stopped thread
    if (st == S_EXC) begin
      if (own_valid && own_thread == t) begin
        oreq  = 1'b1;
        oport = own_port;
        okind = TK_END;
      end else begin
        oreq_exc = 1'b1;
        odest    = exc[t];
        odata    = {faulty[t], 15'd0, c_ip};
      end
    end
  end

  // a send that the port refuses blocks the instruction
  assign x_stall = x_block || (oreq && !oacc);

  // ---------------------------------------------------------------- memory port
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = '0;
    unique case (st)
      S_PICK: begin
        mem_en   = pick_valid && tstate[pick] == T_RUN;
        mem_addr = ip[pick][15:2];
      end
      S_FETCH: begin
        mem_en   = 1'b1;
        mem_addr = sp[t];
      end
      S_POP: begin
        mem_en   = 1'b1;
        mem_addr = 14'(tsp + 1);
      end
      S_MEMA: begin
        mem_en   = 1'b1;
        mem_addr = ra[13:0];
      end
      S_WRITE: begin
        mem_en    = 1'b1;
        mem_we    = 1'b1;
        mem_addr  = w_addr[w_i];
        mem_wdata = w_data[w_i];
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- sequencer
  assign take = (st == S_PICK);

  logic [7:0] fetch_op;
  assign fetch_op = rdata[8 * c_ip[1:0] +: 8];

  // stop the current thread
  task automatic stop_thread(input logic flt);
    tstate[t] <= T_STOP;
    faulty[t] <= flt;
    st        <= S_PICK;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_PICK;
      t       <= '0;
      opc     <= '0;
      npop    <= '0;
      popcnt  <= '0;
      tsp     <= '0;
      mdata   <= '0;
      maddr   <= '0;
      w_n     <= '0;
      w_i     <= '0;
      rom_sel <= 1'b0;
      rom_q   <= '0;
      now     <= '0;
      ev_on   <= '0;
      for (int i = 0; i < 6; i++) opnd[i] <= '0;
      for (int i = 0; i < 3; i++) begin
        w_addr[i] <= '0;
        w_data[i] <= '0;
      end
      for (int i = 0; i < THREADS; i++) begin
        tstate[i] <= (i == 0) ? T_RUN : T_FREE;
        faulty[i] <= 1'b0;
        ip[i]     <= (i == 0) ? {BOOT_ADDR, 2'b00} : '0;
        sp[i]     <= (i == 0) ? BOOT_ADDR : '0;
        ld0[i]    <= '0;
        ld1[i]    <= (i == 0) ? BOOT_ADDR : '0;
        lc0[i]    <= '0;
        lc1[i]    <= (i == 0) ? 14'h3fff : '0;
        exc[i]    <= {RC_PERIPH, 10'd1};
        cycles[i] <= '0;
        for (int p = 0; p < PORTS; p++) dest[i][p] <= '0;
      end
    end else begin
      now <= now + 1;
      // read data from the ROM rather than the RAM at 0x3fc0 and above
      rom_sel <= mem_en && !mem_we && mem_addr >= BOOT_ADDR;
      rom_q   <= rom_d;

      unique case (st)
        S_PICK: begin
          if (pick_valid) begin
            t <= pick;
            if (tstate[pick] == T_STOP) begin
              st <= S_EXC;
            end else if (ip[pick][15:2] < lc0[pick] || ip[pick][15:2] >= lc1[pick]) begin
              tstate[pick] <= T_STOP;
              faulty[pick] <= 1'b1;
            end else begin
              st <= S_FETCH;
            end
          end
        end

        S_FETCH: begin
          opc    <= fetch_op;
          npop   <= pops(fetch_op);
          popcnt <= '0;
          tsp    <= c_sp;
          if (pops(fetch_op) == 0) st <= S_EXEC;
          else if (!in_data(c_sp, c_ld0, c_ld1)) stop_thread(1'b1);
          else st <= S_POP;
        end

        S_POP: begin
          opnd[popcnt] <= rdata;
          popcnt       <= popcnt + 1;
          tsp          <= tsp + 1;
          if (popcnt + 1 < npop) begin
            if (!in_data(tsp + 1, c_ld0, c_ld1)) stop_thread(1'b1);
          end else if (mem_read_op(opc)) begin
            st <= S_MEMA;
          end else begin
            st <= S_EXEC;
          end
        end

        S_MEMA: begin
          maddr <= ra;
          if (!ra_ok) stop_thread(1'b1);
          else        st <= S_MEMD;
        end

        S_MEMD: begin
          mdata <= rdata;
          st    <= S_EXEC;
        end

        S_EXEC: begin
          if (x_fault) begin
            stop_thread(1'b1);
          end else if (x_stall) begin
            st <= S_PICK;
          end else if (opc == OP_STOP) begin
            stop_thread(1'b0);
          end else begin
            ip[t]     <= x_ip;
            sp[t]     <= x_sp[13:0];
            cycles[t] <= cycles[t] + 1;
            unique case (opc)
              OP_START: begin
                tstate[free_t] <= T_RUN;
                faulty[free_t] <= 1'b0;
                exc[free_t]    <= opnd[0];
                ld1[free_t]    <= opnd[1][13:0];
                ld0[free_t]    <= opnd[2][13:0];
                lc1[free_t]    <= opnd[4][13:0];
                lc0[free_t]    <= opnd[5][13:0];
                ip[free_t]     <= 16'((opnd[3] + opnd[5]) * 4);
                sp[free_t]     <= opnd[1][13:0];
                cycles[free_t] <= '0;
                ev_on[free_t]  <= '0;
              end
              OP_SETPORT: dest[t][opnd[0][PW-1:0]] <= opnd[1];
              OP_EVCLEAR: ev_on[t] <= '0;
              OP_EVOUT: begin
                ev_on[t][opnd[0][PW-1:0]][EV_OUT]  <= 1'b1;
                ev_vec[t][opnd[0][PW-1:0]][EV_OUT] <= opnd[1][15:0] + c_ip;
              end
              OP_EVIN: begin
                ev_on[t][opnd[0][PW-1:0]][EV_IN]   <= 1'b1;
                ev_on[t][opnd[0][PW-1:0]][EV_END]  <= 1'b1;
                ev_vec[t][opnd[0][PW-1:0]][EV_IN]  <= opnd[1][15:0] + c_ip;
                ev_vec[t][opnd[0][PW-1:0]][EV_END] <= opnd[1][15:0] + c_ip;
              end
              OP_EVEND: begin
                ev_on[t][opnd[0][PW-1:0]][EV_END]  <= 1'b1;
                ev_vec[t][opnd[0][PW-1:0]][EV_END] <= opnd[1][15:0] + c_ip;
              end
              default: ;
            endcase
            // memory writes: pushes at tsp-1, tsp-2, then the store
            w_addr[0] <= (x_npush != 0) ? 14'(tsp - 1) : x_saddr[13:0];
            w_data[0] <= (x_npush != 0) ? x_push0      : x_sdata;
            w_addr[1] <= (x_npush == 2) ? 14'(tsp - 2) : x_saddr[13:0];
            w_data[1] <= (x_npush == 2) ? x_push1      : x_sdata;
            w_addr[2] <= x_saddr[13:0];
            w_data[2] <= x_sdata;
            w_n       <= x_npush + 2'(x_store);
            w_i       <= '0;
            st        <= (x_npush + 2'(x_store) != 0) ? S_WRITE : S_PICK;
          end
        end

        S_WRITE: begin
          w_i <= w_i + 1;
          if (w_i + 1 == w_n) st <= S_PICK;
        end

        S_EXC: begin
          if (oacc && oreq_exc) tstate[t] <= T_FREE;
          st <= S_PICK;
        end

        default: st <= S_PICK;
      endcase
    end
  end

  // A write sequence always has at least one word to write.
  assert property (@(posedge clk) disable iff (!rst_n)
                   st == S_WRITE |-> w_n != 0);

endmodule

// nop_alu: combinational arithmetic and logic of the NOP instruction set.
//
// Operands follow the instruction descriptions: a is the word popped first
// (top of stack), b the one popped second, c the third (shifter word of
// LEFT and RIGHT). y is the word the instruction pushes. Booleans are
// pushed as -1 for true and 0 for false.
//
//   ADD b+a, SUB b-a, MUL b*a (low 32 bits), AND/OR/XOR b op a,
//   SWAP    for each set bit i of a[4:0], exchange every bit k of b with
//           bit k xor 2^i (mask 24 swaps bytes, 31 reverses the word)
//   LOG2    index of the highest set bit of a, -1 for a = 0
//   LEFT    shift c left by a[4:0], filling from the top of b; for a >= 32
//           the result is b rotated left by a[4:0]
//   RIGHT   mirror image of LEFT
//   SIGN    -1 if a is negative, else 0
//   ZERO    -1 if a is zero, else 0
//   COUNT   number of set bits of a
//   ULESS / SLESS  -1 if b < a, unsigned / signed
//   COMBINE b*192 + a
//
// All functions follow the instruction descriptions. SIGN's formula copies
// bit 0 while its text says "true if it is negative"; the text is
// followed (bit 31 is copied). LOG2 and COUNT show no push in their
// formulas; their result is pushed like every other result.
module nop_alu
  import nop_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic [31:0] y
);

  logic [4:0]  sh;
  logic [31:0] swp;
  logic [31:0] lg;
  logic [31:0] cnt;
  logic [63:0] lwide, rwide;

  assign sh = a[4:0];

  // Bit-field swap: stages for 1, 2, 4, 8 and 16 bit distances.
  always_comb begin
    logic [31:0] t, n;
    t = b;
    for (int i = 0; i < 5; i++) begin
      for (int k = 0; k < 32; k++) n[k] = t[k ^ (1 << i)];
      if (sh[i]) t = n;
    end
    swp = t;
  end

  always_comb begin
    lg = '1;
    for (int i = 0; i < 32; i++) if (a[i]) lg = 32'(i);
  end

  always_comb begin
    cnt = '0;
    for (int i = 0; i < 32; i++) cnt = cnt + 32'(a[i]);
  end

  // {high, low} shifted; LEFT takes the top word, RIGHT the bottom word.
  assign lwide = {(a < 32) ? c : b, b} << sh;
  assign rwide = {b, (a < 32) ? c : b} >> sh;

  always_comb begin
    unique case (op)
      ALU_ADD:     y = b + a;
      ALU_SUB:     y = b - a;
      ALU_MUL:     y = b * a;
      ALU_AND:     y = b & a;
      ALU_OR:      y = b | a;
      ALU_XOR:     y = b ^ a;
      ALU_SWAP:    y = swp;
      ALU_LOG2:    y = lg;
      ALU_LEFT:    y = lwide[63:32];
      ALU_RIGHT:   y = rwide[31:0];
      ALU_SIGN:    y = {32{a[31]}};
      ALU_ZERO:    y = (a == 0) ? '1 : '0;
      ALU_COUNT:   y = cnt;
      ALU_ULESS:   y = (b < a) ? '1 : '0;
      ALU_SLESS:   y = ($signed(b) < $signed(a)) ? '1 : '0;
      ALU_COMBINE: y = b * 32'd192 + a;
      default:     y = '0;
    endcase
  end

endmodule

// nop_divider: quotient and remainder for UDIV and SDIV.
//
// b is the dividend, a the divisor (the word popped first). With sgn low
// both are unsigned and q = b / a, r = b - q*a. With sgn high both are
// two's complement and the division is Euclidean: the remainder is never
// negative (0 <= r < |a|) and b = q*a + r. div0 flags a zero divisor, on
// which the processing unit stops the thread as faulty; q and r are then
// zero. The one overflowing case, -2^31 / -1, wraps to q = -2^31, r = 0.
//
// The operations, the Euclidean rule and the fault on a zero divisor
// follow the instruction descriptions. The divider is combinational, a
// choice of this design that keeps every instruction a fixed sequence of
// memory steps; a multi-cycle divider would be the smaller circuit.
module nop_divider (
  input  logic        sgn,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] q,
  output logic [31:0] r,
  output logic        div0
);

  logic [31:0] abs_a, abs_b, uq, ur, tq, tr;

  assign div0  = (a == 0);
  assign abs_a = (sgn && a[31]) ? -a : a;
  assign abs_b = (sgn && b[31]) ? -b : b;
  assign uq    = div0 ? '0 : abs_b / abs_a;
  assign ur    = div0 ? '0 : abs_b % abs_a;
  // truncated quotient and remainder; the remainder has the sign of b
  assign tq    = (a[31] ^ b[31]) ? -uq : uq;
  assign tr    = b[31] ? -ur : ur;

  always_comb begin
    if (!sgn) begin
      q = uq;
      r = ur;
    end else if (b[31] && ur != 0) begin
      // negative remainder: move it into 0..|a|-1
      q = a[31] ? tq + 1 : tq - 1;
      r = a[31] ? tr - a : tr + a;
    end else begin
      q = tq;
      r = tr;
    end
  end

endmodule

// barrett_const_modmul: pipelined modular multiplication r = b * w mod Q by
// one of two design-time constants, with Barrett reduction (the butterfly datapath of the publication).
//
// Datapath, with n = ceil(log2 Q) and R = floor(4^n / Q):
//   Mult1   p  = b * (sel ? C1 : C0)         constant multipliers (MCM pair)
//   ---- register 1 ----
//   Shift1  p >> (n-1);  Mult2  m = (p >> (n-1)) * R   constant multiplier
//   ---- register 2 ----
//   Shift2  qh = m >> (n+1);  Mult3  qh * Q (low n+2 bits) constant multiplier
//   ---- register 3 ----
//   Sub1    t = p - qh*Q  (in [0, 3Q), computed on n+2 bits);  %Q  t mod Q
//   ---- register 4 ----  -> r
// qh underestimates floor(p / Q) by at most 2, so %Q is two conditional
// subtractions of Q. All three multipliers are shift_add_mult instances;
// both twiddle choices are multiplied and a mux picks one, which is the
// "multiple-constant multiplication" view of Mult1.
//
// Interface: b (n bits, b < Q), sel (0: C0, 1: C1); r (n bits) appears
// LATENCY = 4 clock cycles later. One new operand every cycle; no stall.
// Pipeline registers hold data only and have no reset (a valid bit travels
// beside them in the enclosing design).
//
// From the paper: the operator order, the shifts n-1 and n+1, R, the mux in
// front of Mult1 and the four pipeline cuts of the published
// butterfly diagram. This design's
// choices: the register after %Q being the fourth cut, the internal widths,
// the low-bit truncation of Mult3 and Sub1, and the form of %Q.
module barrett_const_modmul #(
  parameter longint unsigned Q  = 64'd8380417,
  parameter longint unsigned C0 = 64'd1753,
  parameter longint unsigned C1 = 64'd1
) (
  input  logic                                  clk,
  input  logic [ntt_pkg::mod_bits(Q)-1:0]       b,
  input  logic                                  sel,
  output logic [ntt_pkg::mod_bits(Q)-1:0]       r
);
  localparam int unsigned     NB = ntt_pkg::mod_bits(Q);   // n
  localparam longint unsigned RB = ntt_pkg::barrett_r(Q);  // R
  localparam int unsigned     PW = 2 * NB;                 // width of b*w
  localparam int unsigned     TW = NB + 2;                 // holds [0, 4Q)

  initial begin
    assert (C0 < Q && C1 < Q) else $error("constants must be below Q");
  end

  // ---- Mult1 (two constants, mux) ----
  logic [PW-1:0] p0, p1, p_d;
  shift_add_mult #(.IN_W(NB), .OUT_W(PW), .C(C0)) u_mult1_c0 (.x(b), .p(p0));
  shift_add_mult #(.IN_W(NB), .OUT_W(PW), .C(C1)) u_mult1_c1 (.x(b), .p(p1));
  assign p_d = sel ? p1 : p0;

  logic [PW-1:0] p_q1;
  always_ff @(posedge clk) p_q1 <= p_d;

  // ---- Shift1, Mult2 ----
  logic [NB:0]     s1;
  logic [PW+1:0]   m2;
  assign s1 = p_q1[PW-1:NB-1];
  shift_add_mult #(.IN_W(NB+1), .OUT_W(PW+2), .C(RB)) u_mult2 (.x(s1), .p(m2));

  // only the bits that survive Shift2 are kept in register 2
  logic [NB:0]   m2_q2;
  logic [TW-1:0] p_q2;
  always_ff @(posedge clk) begin
    m2_q2 <= m2[PW+1:NB+1];
    p_q2  <= p_q1[TW-1:0];
  end

  // ---- Shift2, Mult3 (low TW bits are enough: the difference is < 4Q) ----
  logic [NB:0]   s2;
  logic [TW-1:0] m3;
  assign s2 = m2_q2;
  shift_add_mult #(.IN_W(NB+1), .OUT_W(TW), .C(Q)) u_mult3 (.x(s2), .p(m3));

  logic [TW-1:0] m3_q3, p_q3;
  always_ff @(posedge clk) begin
    m3_q3 <= m3;
    p_q3  <= p_q2;
  end

  // ---- Sub1, %Q ----
  localparam logic [TW-1:0] Q1 = TW'(Q);
  localparam logic [TW-1:0] Q2 = TW'(2 * Q);
  logic [TW-1:0] t;
  logic [NB-1:0] t_red;
  always_comb begin
    t = p_q3 - m3_q3;
    if (t >= Q2)      t_red = NB'(t - Q2);
    else if (t >= Q1) t_red = NB'(t - Q1);
    else              t_red = NB'(t);
  end

  always_ff @(posedge clk) r <= t_red;
endmodule

// shift_add_mult: multiplication of a variable by a design-time constant,
// built only from wired shifts and adders/subtractors.
//
// The constant C is recoded at elaboration into canonical signed digits
// (ntt_pkg::csd_pos / csd_neg). Each non-zero digit i contributes +/-(x << i)
// to a running sum, so the circuit is (number of non-zero digits - 1)
// adders/subtractors and no multiplier; shifts are wires. Example:
// 13 = 16 - 4 + 1 gives (x<<4) - (x<<2) + x.
//
// Interface: x (IN_W bits, unsigned) -> p = (x * C) mod 2^OUT_W. Purely
// combinational. Choose OUT_W >= IN_W + bits(C) for the exact product; a
// narrower OUT_W yields the low bits only (used where only the low bits of a
// product are needed).
//
// The shift-add idea is the paper's; the signed-digit recoding is this
// design's choice. The paper's generator searches for adder graphs with
// fewer adders (and shares them between constants); CSD is a simple,
// always-correct decomposition that needs no external tool.
module shift_add_mult #(
  parameter int unsigned     IN_W  = 23,
  parameter int unsigned     OUT_W = 46,
  parameter longint unsigned C     = 64'd1753
) (
  input  logic [IN_W-1:0]  x,
  output logic [OUT_W-1:0] p
);
  localparam longint unsigned POS = ntt_pkg::csd_pos(C);
  localparam longint unsigned NEG = ntt_pkg::csd_neg(C);

  logic [OUT_W-1:0] xe;
  assign xe = OUT_W'(x);

  always_comb begin
    p = '0;
    for (int i = 0; i < 64; i++) begin
      if (i < OUT_W) begin
        if (POS[i])      p = p + (xe << i);
        else if (NEG[i]) p = p - (xe << i);
      end
    end
  end
endmodule

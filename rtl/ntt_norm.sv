// ntt_norm: the iNTT normalization, one constant modular multiplier per
// element.
//
// In iNTT mode every element is multiplied by NINV = (2^STAGES)^-1 mod Q
// (N^-1 for a transform with log2 N stages); in forward mode by 1, so both
// modes see the same latency and the mode may change from one vector to
// the next. Each element uses a barrett_const_modmul with C0 = 1 and
// C1 = NINV; the C0 = 1 multiplier is a wire.
//
// Interface: din (N words < Q), in_valid, in_intt; dout, out_valid,
// out_intt follow LATENCY = 4 cycles later, dout registered. Only the valid
// bit is reset (rst_n, active low, synchronous).
//
// From the paper: a constant multiplier per element by N^-1 mod Q in iNTT
// mode, placed on the outputs (the paper allows inputs or outputs). This
// design's choices: the output side, the forward-mode bypass through the
// same pipeline, and 2^-STAGES in place of N^-1 for a transform with fewer
// than log2 N stages (Kyber).
module ntt_norm #(
  parameter longint unsigned Q      = ntt_pkg::DILITHIUM_Q,
  parameter int unsigned     N      = ntt_pkg::DILITHIUM_N,
  parameter int unsigned     STAGES = ntt_pkg::DILITHIUM_S
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic                            in_intt,
  input  logic [ntt_pkg::mod_bits(Q)-1:0] din  [N],
  output logic                            out_valid,
  output logic                            out_intt,
  output logic [ntt_pkg::mod_bits(Q)-1:0] dout [N]
);
  localparam int unsigned     LATENCY = 4;
  localparam longint unsigned NINV    = ntt_pkg::invmod((64'd1 << STAGES) % Q, Q);

  for (genvar i = 0; i < N; i++) begin : g_mul
    barrett_const_modmul #(.Q(Q), .C0(64'd1), .C1(NINV)) u_mul (
      .clk(clk), .b(din[i]), .sel(in_intt), .r(dout[i])
    );
  end

  logic [LATENCY-1:0] vld_sr, intt_sr;
  always_ff @(posedge clk) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LATENCY-2:0], in_valid};
    intt_sr <= {intt_sr[LATENCY-2:0], in_intt};
  end
  assign out_valid = vld_sr[LATENCY-1];
  assign out_intt  = intt_sr[LATENCY-1];
endmodule

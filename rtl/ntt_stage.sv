// ntt_stage: one stage of the fully unrolled N-point NTT, i.e. N/2
// ntt_butterfly instances whose pairing and twiddles are fixed at design
// time.
//
// In stage STAGE (0-based) the distance between paired elements is
// len = N >> (STAGE+1). Butterfly i (0 <= i < N/2) belongs to group
// g = i / len and takes element top = 2*len*g + (i mod len) as A and
// top + len as B; its outputs X and Y return to the same two positions.
// Its forward twiddle is zeta[k] = PSI^brv_STAGES(k) mod Q with
// k = 2^STAGE + g (the w1, w2, w3, ... numbering of the published 8-point flow), its iNTT twiddle
// the modular inverse of that value. All constants come from ntt_pkg at
// elaboration; nothing is stored.
//
// Interface: din (N words), with in_valid and in_intt describing that
// vector; dout, out_valid and out_intt follow LATENCY = 4 cycles later. A new
// vector may enter every cycle. Only the valid bit is reset (rst_n, active
// low, synchronous); data registers are not.
//
// From the paper: the stage structure, pairing and twiddle numbering of the
// published 8-point flow. This design's choice: carrying valid and mode bits beside the data.
module ntt_stage #(
  parameter longint unsigned Q      = ntt_pkg::DILITHIUM_Q,
  parameter int unsigned     N      = ntt_pkg::DILITHIUM_N,
  parameter int unsigned     STAGES = ntt_pkg::DILITHIUM_S,
  parameter longint unsigned PSI    = ntt_pkg::DILITHIUM_PSI,
  parameter int unsigned     STAGE  = 0
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
  localparam int unsigned LATENCY = 4;
  localparam int unsigned LEN     = N >> (STAGE + 1);

  initial begin
    assert (STAGE < STAGES && LEN >= 1) else $error("stage index out of range");
  end

  for (genvar i = 0; i < N / 2; i++) begin : g_bfly
    localparam int unsigned     GRP = i / LEN;
    localparam int unsigned     TOP = 2 * LEN * GRP + (i % LEN);
    localparam int unsigned     BOT = TOP + LEN;
    localparam int unsigned     K   = (1 << STAGE) + GRP;
    localparam longint unsigned WF  = ntt_pkg::twiddle(Q, PSI, STAGES, K);
    localparam longint unsigned WI  = ntt_pkg::invmod(WF, Q);

    ntt_butterfly #(.Q(Q), .W_FWD(WF), .W_INV(WI)) u_bfly (
      .clk (clk),
      .intt(in_intt),
      .a   (din[TOP]),
      .b   (din[BOT]),
      .x   (dout[TOP]),
      .y   (dout[BOT])
    );
  end

  // mode bit follows the data; valid bit likewise, with reset
  logic [LATENCY-1:0] vld_sr, intt_sr;
  always_ff @(posedge clk) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LATENCY-2:0], in_valid};
    intt_sr <= {intt_sr[LATENCY-2:0], in_intt};
  end
  assign out_valid = vld_sr[LATENCY-1];
  assign out_intt  = intt_sr[LATENCY-1];
endmodule

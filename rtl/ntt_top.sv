// ntt_top: fully pipelined N-point NTT / iNTT with every constant fixed at
// design time. One complete polynomial enters and, LATENCY cycles later,
// one complete transform leaves, every clock cycle.
//
// Structure: input register -> STAGES x ntt_stage (N/2 constant-twiddle
// Barrett butterflies each, 4 cycles) -> ntt_norm (N constant multipliers
// by 1 or N^-1, 4 cycles, registered outputs).
//   LATENCY = 1 + 4*STAGES + 4   (37 cycles for the default 8-stage ring)
//
// Forward mode (in_intt = 0): coefficients in natural order, results in the
// bit-reversed order of the Cooley-Tukey flow; with the default
// parameters result i is the polynomial evaluated at PSI^(2*brv(i)+1).
// iNTT mode (in_intt = 1), as the paper describes it: the input vector is
// loaded in bit-reversed order (element j is taken from position
// brv_log2N(j), a wiring permutation in front of the input register), every
// butterfly uses the inverse of its forward twiddle, and the outputs are
// multiplied by 2^-STAGES mod Q. The mode travels with each vector, so
// forward and inverse transforms may alternate cycle by cycle.
//
// Interface: in_valid/in_intt/in_coef are sampled on every rising clk
// edge (no back-pressure: the pipeline never stalls); out_valid/out_intt/
// out_coef describe the vector that entered LATENCY cycles before. rst_n
// (active low, synchronous) clears only the valid bits. Coefficients must be
// below Q.
//
// Default parameters: ML-DSA (Dilithium), Q = 8380417, N = 256, 8 stages,
// PSI = 1753. ML-KEM (Kyber) is Q = 3329, N = 256, STAGES = 7, PSI = 17.
// From the paper: the unrolled flow, the butterfly and the iNTT procedure.
// This design's choices: the input register, the valid/mode side band and
// the position of the normalization.
module ntt_top #(
  parameter longint unsigned Q      = ntt_pkg::DILITHIUM_Q,
  parameter int unsigned     N      = ntt_pkg::DILITHIUM_N,
  parameter int unsigned     STAGES = ntt_pkg::DILITHIUM_S,
  parameter longint unsigned PSI    = ntt_pkg::DILITHIUM_PSI
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic                            in_intt,
  input  logic [ntt_pkg::mod_bits(Q)-1:0] in_coef  [N],
  output logic                            out_valid,
  output logic                            out_intt,
  output logic [ntt_pkg::mod_bits(Q)-1:0] out_coef [N]
);
  localparam int unsigned NB      = ntt_pkg::mod_bits(Q);
  localparam int unsigned LOGN    = $clog2(N);

  initial begin
    assert (N == (1 << LOGN) && STAGES >= 1 && STAGES <= LOGN)
      else $error("N must be a power of two and 1 <= STAGES <= log2 N");
  end

  // ---- iNTT input permutation and input register ----
  logic [NB-1:0] perm [N];
  for (genvar j = 0; j < N; j++) begin : g_perm
    localparam int unsigned JR = ntt_pkg::bitrev(j, LOGN);
    assign perm[j] = in_intt ? in_coef[JR] : in_coef[j];
  end

  logic [NB-1:0] x_in [N];
  logic          v_in, m_in;
  always_ff @(posedge clk) begin
    if (!rst_n) v_in <= 1'b0;
    else        v_in <= in_valid;
    m_in <= in_intt;
    x_in <= perm;
  end

  // ---- the stages ----
  logic [NB-1:0] sd [STAGES+1][N];
  logic          sv [STAGES+1];
  logic          sm [STAGES+1];
  assign sd[0] = x_in;
  assign sv[0] = v_in;
  assign sm[0] = m_in;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    ntt_stage #(.Q(Q), .N(N), .STAGES(STAGES), .PSI(PSI), .STAGE(s)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (sv[s]),
      .in_intt  (sm[s]),
      .din      (sd[s]),
      .out_valid(sv[s+1]),
      .out_intt (sm[s+1]),
      .dout     (sd[s+1])
    );
  end

  // ---- N^-1 normalization (iNTT) ----
  ntt_norm #(.Q(Q), .N(N), .STAGES(STAGES)) u_norm (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (sv[STAGES]),
    .in_intt  (sm[STAGES]),
    .din      (sd[STAGES]),
    .out_valid(out_valid),
    .out_intt (out_intt),
    .dout     (out_coef)
  );
endmodule

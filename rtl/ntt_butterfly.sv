// ntt_butterfly: Cooley-Tukey radix-2 butterfly with a design-time twiddle.
//
//   X = (A + B*w) mod Q        Y = (A - B*w) mod Q
//
// with w = W_FWD in forward mode and w = W_INV (the modular inverse of the
// forward twiddle) when `intt` is set, as in the published diagram. B*w mod Q is formed by
// barrett_const_modmul (four pipeline registers); A is delayed by the same
// four registers so that it meets the product at Add1/Sub2. Add1 and Sub2
// are each followed by a one-step %Q correction (subtract Q on overflow, add
// Q on borrow). X and Y are combinational from the last pipeline register,
// so in a chain of stages they feed the next butterfly's Mult1 in the same
// cycle, as the published pipeline cuts place them.
//
// Interface: a, b (n bits, each < Q) and intt are sampled every cycle; x, y
// belong to the inputs of LATENCY = 4 cycles earlier. No stall, no reset.
//
// From the paper: the operators, the twiddle mux and the pipeline cuts.
// This design's choice: the delay line for A (the figure draws A straight
// across the cuts) and the form of the %Q corrections.
module ntt_butterfly #(
  parameter longint unsigned Q     = 64'd8380417,
  parameter longint unsigned W_FWD = 64'd1753,
  parameter longint unsigned W_INV = ntt_pkg::invmod(64'd1753, 64'd8380417)
) (
  input  logic                            clk,
  input  logic                            intt,
  input  logic [ntt_pkg::mod_bits(Q)-1:0] a,
  input  logic [ntt_pkg::mod_bits(Q)-1:0] b,
  output logic [ntt_pkg::mod_bits(Q)-1:0] x,
  output logic [ntt_pkg::mod_bits(Q)-1:0] y
);
  localparam int unsigned NB      = ntt_pkg::mod_bits(Q);
  localparam int unsigned LATENCY = 4;

  logic [NB-1:0] bw;
  barrett_const_modmul #(.Q(Q), .C0(W_FWD), .C1(W_INV)) u_modmul (
    .clk(clk), .b(b), .sel(intt), .r(bw)
  );

  logic [NB-1:0] a_dly [LATENCY];
  always_ff @(posedge clk) begin
    a_dly[0] <= a;
    for (int i = 1; i < LATENCY; i++) a_dly[i] <= a_dly[i-1];
  end

  logic [NB-1:0] a4;
  assign a4 = a_dly[LATENCY-1];

  // Add1 + %Q
  logic [NB:0] sum;
  always_comb begin
    sum = {1'b0, a4} + {1'b0, bw};
    x   = (sum >= (NB+1)'(Q)) ? NB'(sum - (NB+1)'(Q)) : sum[NB-1:0];
  end

  // Sub2 + %Q
  always_comb begin
    if (a4 >= bw) y = a4 - bw;
    else          y = NB'({1'b0, a4} + (NB+1)'(Q) - {1'b0, bw});
  end
endmodule

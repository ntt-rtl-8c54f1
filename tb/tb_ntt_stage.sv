// tb_ntt_stage: checks two stages (the second and the last) of a 16-point,
// 4-stage flow over the Dilithium modulus, psi = 1753^16 (a primitive 32nd
// root). Random vectors enter every cycle with random mode and gaps in
// in_valid; each output vector must equal one stage of the reference flow
// (pairs at distance N >> (s+1), twiddle psi^brv4(2^s + group) or its
// inverse), and out_valid/out_intt must follow in_valid/in_intt by exactly
// 4 cycles.
module tb_ntt_stage;
  import ntt_ref_pkg::*;
  localparam longint unsigned Q   = 64'd8380417;
  localparam int unsigned     N   = 16;
  localparam int unsigned     S   = 4;
  localparam int LAT = 4;
  localparam int NV  = 400;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  // psi computed by repeated multiplication (no 64-bit overflow)
  function automatic longint unsigned psi16();
    return rpow(64'd1753, 16, Q);
  endfunction
  localparam longint unsigned P = psi16();

  logic        in_valid, in_intt;
  logic [22:0] din [N];
  logic        v1, m1, v3, m3;
  logic [22:0] d1 [N], d3 [N];

  ntt_stage #(.Q(Q), .N(N), .STAGES(S), .PSI(P), .STAGE(1)) dut1 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_intt(in_intt), .din(din),
    .out_valid(v1), .out_intt(m1), .dout(d1));
  ntt_stage #(.Q(Q), .N(N), .STAGES(S), .PSI(P), .STAGE(3)) dut3 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_intt(in_intt), .din(din),
    .out_valid(v3), .out_intt(m3), .dout(d3));

  function automatic void one_stage(ref longint unsigned a [], input int unsigned s, input bit inv);
    int unsigned len = N >> (s + 1);
    longint unsigned z, t;
    for (int unsigned g = 0; g < (N / 2) / len; g++) begin
      z = rpow(P, rbrv((1 << s) + g, S), Q);
      if (inv) z = rinv(z, Q);
      for (int unsigned j = 2 * len * g; j < 2 * len * g + len; j++) begin
        t = (z * a[j + len]) % Q;
        a[j + len] = (a[j] + Q - t) % Q;
        a[j] = (a[j] + t) % Q;
      end
    end
  endfunction

  longint unsigned e1 [NV][N], e3 [NV][N];
  bit ev [NV], em [NV];

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a [];
    rst_n = 0; in_valid = 0; in_intt = 0;
    foreach (din[i]) din[i] = 0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (v1 !== 1'b0 || v3 !== 1'b0) begin failures++; $display("FAIL reset valid"); end
    rst_n = 1;
    a = new[N];
    for (int c = 0; c < NV + LAT; c++) begin
      if (c < NV) begin
        in_valid = ($urandom % 4) != 0;
        in_intt  = 1'($urandom);
        foreach (din[i]) begin din[i] = 23'($urandom % Q); end
        ev[c] = in_valid; em[c] = in_intt;
        foreach (a[i]) a[i] = din[i];
        one_stage(a, 1, in_intt);
        foreach (a[i]) e1[c][i] = a[i];
        foreach (a[i]) a[i] = din[i];
        one_stage(a, 3, in_intt);
        foreach (a[i]) e3[c][i] = a[i];
      end else in_valid = 0;
      @(posedge clk);
      #1;
      if (c >= LAT - 1 && c - LAT + 1 < NV) begin
        automatic int o = c - LAT + 1;
        checks += 2;
        if (v1 !== ev[o] || v3 !== ev[o]) begin failures++; $display("FAIL valid %0d", o); end
        if (m1 !== em[o] || m3 !== em[o]) begin failures++; $display("FAIL intt %0d", o); end
        for (int i = 0; i < N; i++) begin
          checks += 2;
          if (d1[i] !== 23'(e1[o][i])) begin failures++; $display("FAIL s1 v%0d e%0d", o, i); end
          if (d3[i] !== 23'(e3[o][i])) begin failures++; $display("FAIL s3 v%0d e%0d", o, i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

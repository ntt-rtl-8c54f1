// tb_ntt_norm: checks the normalization unit on an 8-element vector over
// the Dilithium modulus with STAGES = 3: in iNTT mode each element must
// come out multiplied by 8^-1 mod Q, in forward mode unchanged, 4 cycles
// after it entered, with valid and mode following; modes alternate at
// random from cycle to cycle.
module tb_ntt_norm;
  import ntt_ref_pkg::*;
  localparam longint unsigned Q = 64'd8380417;
  localparam int unsigned     N = 8;
  localparam int LAT = 4;
  localparam int NV  = 500;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_intt, ov, om;
  logic [22:0] din [N], dout [N];

  ntt_norm #(.Q(Q), .N(N), .STAGES(3)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_intt(in_intt), .din(din),
    .out_valid(ov), .out_intt(om), .dout(dout));

  longint unsigned e [NV][N];
  bit ev [NV], em [NV];
  longint unsigned ninv;

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ninv = rinv(8, Q);
    rst_n = 0; in_valid = 0; in_intt = 0;
    foreach (din[i]) din[i] = 0;
    repeat (2) @(posedge clk);
    #1;
    rst_n = 1;
    for (int c = 0; c < NV + LAT; c++) begin
      if (c < NV) begin
        in_valid = 1'($urandom);
        in_intt  = 1'($urandom);
        foreach (din[i]) begin
          din[i] = 23'($urandom % Q);
          e[c][i] = in_intt ? (longint'(din[i]) * ninv) % Q : longint'(din[i]);
        end
        ev[c] = in_valid; em[c] = in_intt;
      end
      @(posedge clk);
      #1;
      if (c >= LAT - 1 && c - LAT + 1 < NV) begin
        automatic int o = c - LAT + 1;
        checks++;
        if (ov !== ev[o] || om !== em[o]) begin failures++; $display("FAIL side band %0d", o); end
        for (int i = 0; i < N; i++) begin
          checks++;
          if (dout[i] !== 23'(e[o][i])) begin failures++; $display("FAIL v%0d e%0d", o, i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

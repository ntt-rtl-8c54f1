// tb_ntt_butterfly: streams random (A, B, mode) triples, one per cycle, into
// a Dilithium-size butterfly and a Kyber-size butterfly and checks that
// X = A + B*w and Y = A - B*w mod Q (w or w^-1 by mode) appear exactly 4
// cycles later. Corner operands (0, Q-1) exercise the wrap of Add1 and the
// borrow of Sub2.
module tb_ntt_butterfly;
  import ntt_ref_pkg::*;
  localparam longint unsigned Q  = 64'd8380417;
  localparam longint unsigned W  = 64'd4808194;       // 1753^128 mod Q
  localparam longint unsigned QK = 64'd3329;
  localparam longint unsigned WK = 64'd1729;          // 17^64 mod Q
  localparam int LAT = 4;
  localparam int NV  = 3000;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        intt;
  logic [22:0] a, b, x, y;
  logic [11:0] ak, bk, xk, yk;

  ntt_butterfly #(.Q(Q), .W_FWD(W), .W_INV(rinv(W, Q))) dut (
    .clk(clk), .intt(intt), .a(a), .b(b), .x(x), .y(y));
  ntt_butterfly #(.Q(QK), .W_FWD(WK), .W_INV(rinv(WK, QK))) dutk (
    .clk(clk), .intt(intt), .a(ak), .b(bk), .x(xk), .y(yk));

  longint unsigned ex [NV], ey [NV], exk [NV], eyk [NV];
  int n_wrap = 0, n_borrow = 0;

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned t, w;
    for (int c = 0; c < NV + LAT; c++) begin
      if (c < NV) begin
        a    = 23'($urandom % Q);
        b    = 23'($urandom % Q);
        ak   = 12'($urandom % QK);
        bk   = 12'($urandom % QK);
        intt = 1'($urandom);
        if (c == 0) begin a = 23'(Q - 1); b = 23'(Q - 1); end
        if (c == 1) begin a = 0; b = 23'(Q - 1); ak = 0; bk = 12'(QK - 1); end
        w = intt ? rinv(W, Q) : W;
        t = (longint'(b) * w) % Q;
        ex[c] = (a + t) % Q;
        ey[c] = (a + Q - t) % Q;
        if (a + t >= Q) n_wrap++;
        if (a < t) n_borrow++;
        w = intt ? rinv(WK, QK) : WK;
        t = (longint'(bk) * w) % QK;
        exk[c] = (ak + t) % QK;
        eyk[c] = (ak + QK - t) % QK;
      end
      @(posedge clk);
      #1;
      if (c >= LAT - 1 && c - LAT + 1 < NV) begin
        automatic int o = c - LAT + 1;
        checks += 4;
        if (x !== 23'(ex[o]))  begin failures++; $display("FAIL x  %0d: %0d vs %0d", o, x, ex[o]); end
        if (y !== 23'(ey[o]))  begin failures++; $display("FAIL y  %0d: %0d vs %0d", o, y, ey[o]); end
        if (xk !== 12'(exk[o])) begin failures++; $display("FAIL xk %0d", o); end
        if (yk !== 12'(eyk[o])) begin failures++; $display("FAIL yk %0d", o); end
      end
    end
    checks++;
    if (n_wrap == 0 || n_borrow == 0) failures++;
    $display("wraps=%0d borrows=%0d", n_wrap, n_borrow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

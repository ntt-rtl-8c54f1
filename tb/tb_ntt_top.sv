// tb_ntt_top: end-to-end test of the full-size accelerator with its default
// parameters (Dilithium ring: Q = 8380417, N = 256, 8 stages, psi = 1753).
//
// A stream of random polynomials is driven for NV cycles: first forward
// transforms back to back (one per cycle), then back-to-back vectors whose
// mode flips every cycle, then a random mix with idle cycles. Every output
// vector is compared with the reference flow of ntt_ref_pkg (forward: the
// Cooley-Tukey flow; iNTT: bit-reversed load, inverse twiddles, scaling by
// 2^-stages), and forward results are also compared with the polynomial
// evaluated at the roots psi^(2*brv(i)+1). out_valid must repeat in_valid
// exactly LAT = 1 + 4*8 + 4 = 37 cycles later, and never rise out of reset
// with nothing inside. Each mechanism (forward, iNTT, back-to-back issue,
// mode switch between consecutive vectors, idle cycles) is counted and a
// mechanism that never occurred counts as a failure.
module tb_ntt_top;
  import ntt_ref_pkg::*;
  localparam longint unsigned Q   = 64'd8380417;
  localparam int unsigned     N   = 256;
  localparam int unsigned     S   = 8;
  localparam longint unsigned PSI = 64'd1753;
  localparam int unsigned     W   = 23;
  localparam int LAT = 1 + 4 * S + 4;
  localparam int NV  = 48;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic         rst_n, in_valid, in_intt, out_valid, out_intt;
  logic [W-1:0] in_coef [N], out_coef [N];

  ntt_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_intt(in_intt), .in_coef(in_coef),
    .out_valid(out_valid), .out_intt(out_intt), .out_coef(out_coef));

  typedef struct {
    int              cyc;
    bit              intt;
    longint unsigned exp [N];
  } item_t;
  item_t exp_q [$];

  int cycle = 0;
  int n_fwd = 0, n_inv = 0, n_b2b = 0, n_switch = 0, n_idle = 0, n_def = 0, n_out = 0;
  bit in_done = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (NV + LAT + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus ----
  initial begin
    longint unsigned a [];
    item_t it;
    automatic bit prev_v = 0, prev_m = 0;
    rst_n = 0; in_valid = 0; in_intt = 0;
    foreach (in_coef[i]) in_coef[i] = '0;
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1;
    a = new[N];
    for (int c = 0; c < NV; c++) begin
      if (c < 12)      begin in_valid = 1; in_intt = 0; end
      else if (c < 24) begin in_valid = 1; in_intt = c[0]; end
      else             begin in_valid = ($urandom % 3) != 0; in_intt = 1'($urandom); end
      foreach (in_coef[i]) begin
        case (c)
          0:       in_coef[i] = W'(Q - 1);
          1:       in_coef[i] = '0;
          2:       in_coef[i] = (i == 1) ? W'(1) : W'(0);
          default: in_coef[i] = W'($urandom % Q);
        endcase
      end
      if (in_valid) begin
        foreach (a[i]) a[i] = in_coef[i];
        model(a, Q, PSI, S, in_intt);
        it.cyc  = cycle;
        it.intt = in_intt;
        foreach (a[i]) it.exp[i] = a[i];
        // forward results: check a few points against the definition
        if (!in_intt && (c % 4 == 0)) begin
          longint unsigned orig [];
          orig = new[N];
          foreach (orig[i]) orig[i] = in_coef[i];
          for (int k = 0; k < N; k += 37) begin
            checks++;
            n_def++;
            if (def_point(orig, Q, PSI, S, k) != it.exp[k]) begin
              failures++;
              $display("FAIL reference flow disagrees with definition, vector %0d point %0d", c, k);
            end
          end
        end
        exp_q.push_back(it);
        if (in_intt) n_inv++; else n_fwd++;
        if (prev_v) n_b2b++;
        if (prev_v && prev_m != in_intt) n_switch++;
      end else n_idle++;
      prev_v = in_valid;
      prev_m = in_intt;
      @(posedge clk);
      #1;
    end
    in_valid = 0;
    in_done  = 1;
  end

  // ---- checker ----
  initial begin
    @(posedge rst_n);
    forever begin
      @(posedge clk);
      #2;
      if (out_valid) begin
        item_t e;
        n_out++;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL unexpected output at cycle %0d", cycle);
        end else begin
          e = exp_q.pop_front();
          checks += 2;
          if (cycle - e.cyc != LAT) begin
            failures++;
            $display("FAIL latency %0d, expected %0d", cycle - e.cyc, LAT);
          end
          if (out_intt !== e.intt) begin failures++; $display("FAIL mode bit"); end
          for (int i = 0; i < N; i++) begin
            checks++;
            if (out_coef[i] !== W'(e.exp[i])) begin
              failures++;
              if (failures < 20)
                $display("FAIL vector from cycle %0d (intt=%0d) elem %0d: got %0d exp %0d",
                         e.cyc, e.intt, i, out_coef[i], e.exp[i]);
            end
          end
        end
      end else if (in_done && exp_q.size() == 0) break;
    end
    // mechanism coverage
    $display("forward=%0d intt=%0d back_to_back=%0d mode_switch=%0d idle=%0d def_checks=%0d outputs=%0d",
             n_fwd, n_inv, n_b2b, n_switch, n_idle, n_def, n_out);
    checks += 6;
    if (n_fwd == 0)    begin failures++; $display("FAIL no forward transform"); end
    if (n_inv == 0)    begin failures++; $display("FAIL no iNTT"); end
    if (n_b2b == 0)    begin failures++; $display("FAIL no back-to-back issue"); end
    if (n_switch == 0) begin failures++; $display("FAIL no mode switch"); end
    if (n_idle == 0)   begin failures++; $display("FAIL no idle cycle"); end
    if (n_out != n_fwd + n_inv) begin failures++; $display("FAIL output count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

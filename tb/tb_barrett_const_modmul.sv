// tb_barrett_const_modmul: streams one random operand per cycle (with
// random twiddle select) through the Dilithium-size Barrett constant
// multiplier and compares every result, exactly 4 cycles later, with
// b * C mod Q computed by the '%' operator. Worst-case operands (0, 1, Q-1)
// and both constants are included, as is a Kyber operand whose Barrett
// estimate is two short (the only case that needs the 2Q correction); a small Kyber-size instance is checked
// the same way.
module tb_barrett_const_modmul;
  localparam longint unsigned Q   = 64'd8380417;
  localparam longint unsigned C0  = 64'd1753;
  localparam longint unsigned C1  = 64'd8380416;     // Q-1, the largest constant
  localparam longint unsigned QK  = 64'd3329;
  localparam longint unsigned CK0 = 64'd17;
  localparam longint unsigned CK1 = 64'd3303;
  localparam int LAT = 4;
  localparam int NV  = 3000;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [22:0] b, r;
  logic        sel;
  logic [11:0] bk, rk;

  barrett_const_modmul #(.Q(Q),  .C0(C0),  .C1(C1))  dut  (.clk(clk), .b(b),  .sel(sel), .r(r));
  barrett_const_modmul #(.Q(QK), .C0(CK0), .C1(CK1)) dutk (.clk(clk), .b(bk), .sel(sel), .r(rk));

  longint unsigned exp_d [NV + LAT];
  longint unsigned exp_k [NV + LAT];

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NV + LAT; c++) begin
      if (c < NV) begin
        case (c)
          0: b = 23'd0;
          1: b = 23'(Q - 1);
          2: b = 23'd1;
          3: b = 23'(Q - 1);
          default: b = 23'($urandom % Q);
        endcase
        sel = (c == 3) ? 1'b1 : 1'($urandom);
        bk  = 12'($urandom % QK);
        if (c == 1) bk = 12'(QK - 1);
        // 3200 * 3303: the Barrett quotient estimate is 2 short, so the
        // remainder before %Q lies in [2Q, 3Q)
        if (c == 5 || c == 9) begin bk = 12'd3200; sel = 1'b1; end
        exp_d[c] = (longint'(b)  * (sel ? C1  : C0))  % Q;
        exp_k[c] = (longint'(bk) * (sel ? CK1 : CK0)) % QK;
      end
      @(posedge clk);
      #1;
      if (c >= LAT - 1) begin
        // result of operand c-LAT+1 is visible after the edge of cycle c
        checks += 2;
        if (r !== 23'(exp_d[c-LAT+1])) begin
          failures++;
          $display("FAIL d op %0d got %0d exp %0d", c-LAT+1, r, exp_d[c-LAT+1]);
        end
        if (rk !== 12'(exp_k[c-LAT+1])) begin
          failures++;
          $display("FAIL k op %0d got %0d exp %0d", c-LAT+1, rk, exp_k[c-LAT+1]);
        end
      end
      if (c == NV + LAT - 2) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

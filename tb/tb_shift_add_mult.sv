// tb_shift_add_mult: checks the shift-add constant multiplier against the
// '*' operator for several constants (the Dilithium Barrett factor, Q, a
// twiddle, constants with runs of ones that produce subtractions, and the
// trivial constant 1), on random and extreme operands, including a product
// truncated to its low bits.
module tb_shift_add_mult;
  int checks = 0, failures = 0;

  logic [23:0] x;
  logic [47:0] p_r, p_q, p_run, p_one;
  logic [24:0] p_tr;
  logic [47:0] p_13;

  shift_add_mult #(.IN_W(24), .OUT_W(48), .C(64'd8396807))  u_r   (.x(x), .p(p_r));
  shift_add_mult #(.IN_W(24), .OUT_W(48), .C(64'd8380417))  u_q   (.x(x), .p(p_q));
  shift_add_mult #(.IN_W(24), .OUT_W(48), .C(64'hFFFFFF))   u_run (.x(x), .p(p_run));
  shift_add_mult #(.IN_W(24), .OUT_W(48), .C(64'd1))        u_one (.x(x), .p(p_one));
  shift_add_mult #(.IN_W(24), .OUT_W(25), .C(64'd8380417))  u_tr  (.x(x), .p(p_tr));
  shift_add_mult #(.IN_W(24), .OUT_W(48), .C(64'd13))       u_13  (.x(x), .p(p_13));

  task automatic check(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s x=%0d got=%0d exp=%0d", what, x, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      case (i)
        0: x = '0;
        1: x = '1;
        2: x = 24'd1;
        3: x = 24'h800000;
        default: x = 24'($urandom);
      endcase
      #1;
      check("R",    p_r,   longint'(x) * 8396807);
      check("Q",    p_q,   longint'(x) * 8380417);
      check("run",  p_run, longint'(x) * 64'hFFFFFF);
      check("one",  p_one, longint'(x));
      check("trunc", p_tr, (longint'(x) * 8380417) & 64'h1FFFFFF);
      check("13",   p_13,  longint'(x) * 13);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_qdiv_coef_gen: self-checking test of the coefficient generator.
// For corner and random dividends it compares the eight outputs with 4*s_i written out
// from the closed forms: 4*s0 = q0+q1+q2+q3, 4*s1 = q0-q1+q2-q3, 4*s2 = q0+q1-q2-q3,
// 4*s3 = q0-q1-q2+q3, and 4*s4..4*s7 = 8*q0, 8*q2, 8*q3, 8*q1. Combinational block.
module tb_qdiv_coef_gen;
  localparam int DW = 16;
  localparam int CW = DW + 3;
  logic signed [DW-1:0] q [4];
  logic signed [CW-1:0] s [8];
  int checks = 0, failures = 0;

  qdiv_coef_gen #(.DATA_W(DW)) dut (.q(q), .s(s));

  task automatic run(input longint q0, input longint q1, input longint q2, input longint q3);
    longint exp_s [8];
    q[0] = DW'(q0); q[1] = DW'(q1); q[2] = DW'(q2); q[3] = DW'(q3);
    exp_s[0] = q0 + q1 + q2 + q3;
    exp_s[1] = q0 - q1 + q2 - q3;
    exp_s[2] = q0 + q1 - q2 - q3;
    exp_s[3] = q0 - q1 - q2 + q3;
    exp_s[4] = 8 * q0;
    exp_s[5] = 8 * q2;
    exp_s[6] = 8 * q3;
    exp_s[7] = 8 * q1;
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (longint'(s[i]) != exp_s[i]) begin
        failures++;
        $display("FAIL s%0d q=(%0d,%0d,%0d,%0d) got %0d exp %0d", i, q0, q1, q2, q3, s[i], exp_s[i]);
      end
    end
  endtask

  function automatic longint rnd();
    return longint'($signed(16'($urandom)));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(-32768, -32768, -32768, -32768);
    run(32767, 32767, 32767, 32767);
    run(-32768, 32767, -32768, 32767);
    run(1, 2, 3, 4);
    repeat (1000) run(rnd(), rnd(), rnd(), rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

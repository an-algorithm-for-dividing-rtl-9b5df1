// tb_qdiv_post_add: self-checking test of the additions after the multipliers.
// The testbench forms the eight products itself from the closed forms of the coefficients
// (4*s_i) and the divisor-side values (u_i), feeds them in, and compares the four outputs
// with the numerators of the schoolbook left division: z0 = -(r0q0+r1q1+r2q2+r3q3),
// z1 = r0q1-r1q0-r2q3+r3q2, z2 = r0q2+r1q3-r2q0-r3q1, z3 = r0q3-r1q2+r2q1-r3q0.
// This checks that the output side of the factorisation closes the algorithm.
module tb_qdiv_post_add;
  localparam int DW = 16;
  localparam int MW = 2 * (DW + 3);
  localparam int NW = 2 * DW + 2;
  logic signed [MW-1:0] m [8];
  logic signed [NW-1:0] z [4];
  int checks = 0, failures = 0;

  qdiv_post_add #(.DATA_W(DW)) dut (.m(m), .z(z));

  task automatic run(input longint q0, input longint q1, input longint q2, input longint q3,
                     input longint r0, input longint r1, input longint r2, input longint r3);
    longint s [8], u [8], exp_z [4];
    longint x0, x1, x2, x3;
    s[0] = q0 + q1 + q2 + q3; s[1] = q0 - q1 + q2 - q3;
    s[2] = q0 + q1 - q2 - q3; s[3] = q0 - q1 - q2 + q3;
    s[4] = 8 * q0; s[5] = 8 * q2; s[6] = 8 * q3; s[7] = 8 * q1;
    x0 = r0; x1 = -r1; x2 = -r2; x3 = -r3;
    u[0] = x0 + x1 + x2 + x3; u[1] = x0 - x1 + x2 - x3;
    u[2] = x0 + x1 - x2 - x3; u[3] = x0 - x1 - x2 + x3;
    u[4] = x0; u[5] = x3; u[6] = x1; u[7] = x2;
    for (int i = 0; i < 8; i++) m[i] = MW'(s[i] * u[i]);
    exp_z[0] = -(r0 * q0 + r1 * q1 + r2 * q2 + r3 * q3);
    exp_z[1] = r0 * q1 - r1 * q0 - r2 * q3 + r3 * q2;
    exp_z[2] = r0 * q2 + r1 * q3 - r2 * q0 - r3 * q1;
    exp_z[3] = r0 * q3 - r1 * q2 + r2 * q1 - r3 * q0;
    #1;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (longint'(z[i]) != exp_z[i]) begin
        failures++;
        $display("FAIL z%0d got %0d exp %0d", i, z[i], exp_z[i]);
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
    run(-32768, -32768, -32768, -32768, -32768, -32768, -32768, -32768);
    run(-32768, -32768, -32768, -32768, -32768, 32767, 32767, 32767);
    run(1, 0, 0, 0, 0, 1, 0, 0);
    run(0, 0, 1, 0, 0, 0, 0, 1);
    repeat (1000) run(rnd(), rnd(), rnd(), rnd(), rnd(), rnd(), rnd(), rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_qdiv_pre_add: self-checking test of the divisor-side additions.
// With x' = (r0, -r1, -r2, -r3) the expected outputs are written out in closed form:
// u0 = x'0+x'1+x'2+x'3, u1 = x'0-x'1+x'2-x'3, u2 = x'0+x'1-x'2-x'3, u3 = x'0-x'1-x'2+x'3,
// and u4..u7 = x'0, x'3, x'1, x'2. Corner and random divisors. Combinational block.
module tb_qdiv_pre_add;
  localparam int DW = 16;
  localparam int PW = DW + 3;
  logic signed [DW-1:0] r [4];
  logic signed [PW-1:0] u [8];
  int checks = 0, failures = 0;

  qdiv_pre_add #(.DATA_W(DW)) dut (.r(r), .u(u));

  task automatic run(input longint r0, input longint r1, input longint r2, input longint r3);
    longint x0, x1, x2, x3;
    longint exp_u [8];
    r[0] = DW'(r0); r[1] = DW'(r1); r[2] = DW'(r2); r[3] = DW'(r3);
    x0 = r0; x1 = -r1; x2 = -r2; x3 = -r3;
    exp_u[0] = x0 + x1 + x2 + x3;
    exp_u[1] = x0 - x1 + x2 - x3;
    exp_u[2] = x0 + x1 - x2 - x3;
    exp_u[3] = x0 - x1 - x2 + x3;
    exp_u[4] = x0;
    exp_u[5] = x3;
    exp_u[6] = x1;
    exp_u[7] = x2;
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (longint'(u[i]) != exp_u[i]) begin
        failures++;
        $display("FAIL u%0d r=(%0d,%0d,%0d,%0d) got %0d exp %0d", i, r0, r1, r2, r3, u[i], exp_u[i]);
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
    run(32767, -32768, -32768, -32768);
    run(1, 0, 0, 0);
    run(0, 1, 2, 3);
    repeat (1000) run(rnd(), rnd(), rnd(), rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_qdiv_norm: self-checking test of the squared norm R = r0^2 + r1^2 + r2^2 + r3^2.
// Corner values (all components at the most negative value gives the largest R) and
// random divisors, compared with the sum of squares in 64-bit integers. Combinational block.
module tb_qdiv_norm;
  localparam int DW = 16;
  logic signed [DW-1:0]   r [4];
  logic        [2*DW:0]   norm;
  int checks = 0, failures = 0;

  qdiv_norm #(.DATA_W(DW)) dut (.r(r), .norm(norm));

  task automatic run(input longint r0, input longint r1, input longint r2, input longint r3);
    longint expv;
    r[0] = DW'(r0); r[1] = DW'(r1); r[2] = DW'(r2); r[3] = DW'(r3);
    expv = r0 * r0 + r1 * r1 + r2 * r2 + r3 * r3;
    #1;
    checks++;
    if (longint'(norm) != expv) begin
      failures++;
      $display("FAIL r=(%0d,%0d,%0d,%0d) got %0d exp %0d", r0, r1, r2, r3, norm, expv);
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
    run(32767, -32768, 32767, -32768);
    run(0, 0, 0, 0);
    run(-1, 2, -3, 4);
    repeat (2000) run(rnd(), rnd(), rnd(), rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hadamard2: self-checking test of the 2x2 Hadamard butterfly.
// Drives corner values and random values at W = 16 and compares sum and diff with a+b and
// a-b computed in 64-bit integers. Purely combinational block: values settle after #1.
module tb_hadamard2;
  localparam int W = 16;
  logic signed [W-1:0] a, b;
  logic signed [W:0]   sum, diff;
  int checks = 0, failures = 0;

  hadamard2 #(.W(W)) dut (.a(a), .b(b), .sum(sum), .diff(diff));

  task automatic check(input longint av, input longint bv);
    a = W'(av); b = W'(bv);
    #1;
    checks += 2;
    if (longint'(sum) != av + bv) begin
      failures++; $display("FAIL sum %0d+%0d got %0d", av, bv, sum);
    end
    if (longint'(diff) != av - bv) begin
      failures++; $display("FAIL diff %0d-%0d got %0d", av, bv, diff);
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
    check(-32768, -32768); check(32767, -32768); check(-32768, 32767); check(32767, 32767);
    check(0, 0); check(1, -1);
    repeat (2000) check(longint'($signed(16'($urandom))), longint'($signed(16'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

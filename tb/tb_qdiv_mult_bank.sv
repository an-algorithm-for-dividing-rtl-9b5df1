// tb_qdiv_mult_bank: self-checking test of the eight parallel multipliers.
// Random and extreme signed operands on all eight lanes at once; each product is compared
// with the 64-bit product formed in the testbench. Combinational block.
module tb_qdiv_mult_bank;
  localparam int DW = 16;
  localparam int CW = DW + 3;
  localparam int PW = DW + 3;
  localparam int MW = CW + PW;
  logic signed [CW-1:0] s [8];
  logic signed [PW-1:0] u [8];
  logic signed [MW-1:0] m [8];
  longint sv [8], uv [8];
  int checks = 0, failures = 0;

  qdiv_mult_bank #(.DATA_W(DW)) dut (.s(s), .u(u), .m(m));

  task automatic apply_and_check();
    for (int i = 0; i < 8; i++) begin
      s[i] = CW'(sv[i]);
      u[i] = PW'(uv[i]);
    end
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (longint'(m[i]) != sv[i] * uv[i]) begin
        failures++;
        $display("FAIL lane %0d: %0d * %0d got %0d", i, sv[i], uv[i], m[i]);
      end
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
    for (int i = 0; i < 8; i++) begin
      sv[i] = -(longint'(1) <<< (CW - 1));
      uv[i] = (i % 2) ? -(longint'(1) <<< (PW - 1)) : (longint'(1) <<< (PW - 1)) - 1;
    end
    apply_and_check();
    repeat (1000) begin
      for (int i = 0; i < 8; i++) begin
        sv[i] = longint'($signed(CW'($urandom)));
        uv[i] = longint'($signed(PW'($urandom)));
      end
      apply_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_qdiv_top: end-to-end test of the quaternion divider at its default parameters
// (16-bit components, 16 quotient fraction bits).
//
// A producer offers operand pairs with random gaps; a consumer takes results with random
// back-pressure. Every quotient is compared with the schoolbook left division
// y = conj(r)*q / |r|^2 evaluated in 64-bit integers (numerator shifted left by 16, divided
// with truncation toward zero), which shares nothing with the factorised datapath. The
// test also checks:
//   - latency: out_valid rises 52 clock edges after the edge that takes the operands
//     (at the default sizes; 2*DATA_W + 2 + QUO_FRAC + 2 in general);
//   - the operands are refused (in_ready low) while an operation is in flight;
//   - the result is held unchanged while out_ready is low;
//   - a zero divisor gives out_dbz and a zero quotient.
// Each of these mechanisms is counted and a failure is recorded for one that never occurred.
// Also covered: the identity q / q = 1, q / 1 = q, and the extreme operands -32768.
module tb_qdiv_top;
  localparam int DW  = 16;
  localparam int QF  = 16;
  localparam int QW  = 2 * DW + 2 + QF;
  localparam int LAT = 2 * DW + 2 + QF + 2;
  localparam int N_RANDOM = 20000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_dbz;
  logic signed [DW-1:0] q [4], r [4];
  logic signed [QW-1:0] y [4];
  int checks = 0, failures = 0;
  int n_stall = 0, n_refused = 0, n_dbz = 0, n_ops = 0;

  always #5 clk = ~clk;

  qdiv_top dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .q(q), .r(r),
    .out_valid(out_valid), .out_ready(out_ready), .y(y), .out_dbz(out_dbz));

  // Count cycles where an offered operand pair is refused.
  always @(posedge clk) if (rst_n && in_valid && !in_ready) n_refused++;

  function automatic longint rnd();
    return longint'($signed(16'($urandom)));
  endfunction

  task automatic divide(input longint qv [4], input longint rv [4]);
    longint num [4], rr, expv [4];
    logic signed [QW-1:0] held [4];
    int edges, waitc;
    num[0] = rv[0] * qv[0] + rv[1] * qv[1] + rv[2] * qv[2] + rv[3] * qv[3];
    num[1] = rv[0] * qv[1] - rv[1] * qv[0] - rv[2] * qv[3] + rv[3] * qv[2];
    num[2] = rv[0] * qv[2] + rv[1] * qv[3] - rv[2] * qv[0] - rv[3] * qv[1];
    num[3] = rv[0] * qv[3] - rv[1] * qv[2] + rv[2] * qv[1] - rv[3] * qv[0];
    rr = rv[0] * rv[0] + rv[1] * rv[1] + rv[2] * rv[2] + rv[3] * rv[3];
    for (int i = 0; i < 4; i++) expv[i] = (rr == 0) ? 0 : (num[i] * (longint'(1) <<< QF)) / rr;

    // offer the operands
    for (int i = 0; i < 4; i++) begin q[i] = DW'(qv[i]); r[i] = DW'(rv[i]); end
    in_valid = 1'b1;
    checks++;
    if (!in_ready) begin failures++; $display("FAIL divider not idle between operations"); end
    @(posedge clk); #1;
    in_valid = 1'($urandom % 2);         // sometimes keep offering a next pair: refused
    for (int i = 0; i < 4; i++) begin q[i] = DW'($urandom); r[i] = DW'($urandom); end
    edges = 1;
    while (!out_valid && edges < 200) begin
      checks++;
      if (in_ready) begin failures++; $display("FAIL in_ready while busy"); end
      @(posedge clk); #1;
      edges++;
    end
    in_valid = 1'b0;
    checks++;
    if (edges - 1 != LAT) begin failures++; $display("FAIL latency %0d exp %0d", edges - 1, LAT); end

    // back-pressure: hold out_ready low for a random number of cycles
    waitc = $urandom % 4;
    out_ready = 1'b0;
    for (int i = 0; i < 4; i++) held[i] = y[i];
    for (int c = 0; c < waitc; c++) begin
      @(posedge clk); #1;
      n_stall++;
      checks++;
      if (!out_valid || y[0] != held[0] || y[1] != held[1] || y[2] != held[2] || y[3] != held[3]) begin
        failures++; $display("FAIL result not held under back-pressure");
      end
    end

    checks++;
    if (out_dbz != (rr == 0)) begin failures++; $display("FAIL dbz %0b R=%0d", out_dbz, rr); end
    if (rr == 0) n_dbz++;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (longint'(y[i]) != expv[i]) begin
        failures++;
        $display("FAIL y%0d q=(%0d,%0d,%0d,%0d) r=(%0d,%0d,%0d,%0d) got %0d exp %0d", i,
                 qv[0], qv[1], qv[2], qv[3], rv[0], rv[1], rv[2], rv[3], y[i], expv[i]);
      end
    end
    out_ready = 1'b1;
    @(posedge clk); #1;
    out_ready = 1'($urandom % 2);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid after the result was taken"); end
    n_ops++;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint qv [4], rv [4];
    in_valid = 1'b0; out_ready = 1'b0;
    for (int i = 0; i < 4; i++) begin q[i] = '0; r[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // q / 1 = q (r = 1.0 with 8 fraction bits: the quotient is q * 2^16 / 256)
    qv = '{1000, -2000, 3000, -4000}; rv = '{256, 0, 0, 0};
    divide(qv, rv);
    // q / q = 1
    qv = '{123, -456, 789, -1011}; rv = qv;
    divide(qv, rv);
    // extremes
    qv = '{-32768, -32768, -32768, -32768}; rv = '{-32768, -32768, -32768, -32768};
    divide(qv, rv);
    qv = '{-32768, -32768, -32768, -32768}; rv = '{0, 0, 0, 1};
    divide(qv, rv);
    qv = '{32767, -32768, 32767, -32768}; rv = '{-1, 0, 0, 0};
    divide(qv, rv);
    // zero divisor
    qv = '{5, 6, 7, 8}; rv = '{0, 0, 0, 0};
    divide(qv, rv);
    // random operands, some with small divisors
    for (int n = 0; n < N_RANDOM; n++) begin
      for (int i = 0; i < 4; i++) begin
        qv[i] = rnd();
        rv[i] = (n % 4 == 0) ? longint'($signed(4'($urandom))) : rnd();
      end
      if (n % 97 == 0) rv = '{0, 0, 0, 0};
      divide(qv, rv);
      repeat ($urandom % 3) @(posedge clk);
      #1;
    end

    $display("mechanisms: operations=%0d back-pressure cycles=%0d refused offers=%0d zero divisors=%0d",
             n_ops, n_stall, n_refused, n_dbz);
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL back-pressure never exercised"); end
    checks++; if (n_refused == 0) begin failures++; $display("FAIL refused offer never exercised"); end
    checks++; if (n_dbz == 0)     begin failures++; $display("FAIL zero divisor never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_qdiv_eta_scale: self-checking test of the four parallel dividers.
// Random numerators within the range the datapath produces (|z| <= 2^32) and random
// norms, including R = 1, the largest R and R = 0. Expected: y0 = trunc(-z0 * 2^16 / R),
// yi = trunc(zi * 2^16 / R), computed with 64-bit integer division (which truncates toward
// zero); for R = 0 the quotient is zero and dbz is set. The number of clock edges from the
// edge that takes start to the one after which done is high is checked against
// NW + QF + 1 = 51, and busy must be low again with done.
module tb_qdiv_eta_scale;
  localparam int DW = 16;
  localparam int QF = 16;
  localparam int NW = 2 * DW + 2;
  localparam int RW = 2 * DW + 1;
  localparam int QW = NW + QF;
  localparam int LAT = NW + QF + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic signed [NW-1:0] z [4];
  logic        [RW-1:0] norm;
  logic busy, done, dbz;
  logic signed [QW-1:0] y [4];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qdiv_eta_scale #(.DATA_W(DW), .QF(QF)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .z(z), .norm(norm),
    .busy(busy), .done(done), .y(y), .dbz(dbz));

  task automatic run(input longint z0, input longint z1, input longint z2, input longint z3,
                     input longint rv);
    longint zv [4], expv [4];
    int edges;
    zv[0] = z0; zv[1] = z1; zv[2] = z2; zv[3] = z3;
    for (int i = 0; i < 4; i++) z[i] = NW'(zv[i]);
    norm = RW'(rv);
    for (int i = 0; i < 4; i++) begin
      if (rv == 0) expv[i] = 0;
      else expv[i] = ((i == 0 ? -zv[i] : zv[i]) * (longint'(1) <<< QF)) / rv;
    end
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    for (int i = 0; i < 4; i++) z[i] = NW'($urandom);   // inputs are only sampled at start
    norm = RW'($urandom);
    edges = 1;
    while (!done && edges < 200) begin
      @(posedge clk); #1;
      edges++;
    end
    checks++;
    if (edges != LAT) begin
      failures++; $display("FAIL latency %0d exp %0d", edges, LAT);
    end
    checks++;
    if (busy) begin
      failures++; $display("FAIL busy still high with done");
    end
    checks++;
    if (dbz != (rv == 0)) begin
      failures++; $display("FAIL dbz %0b for R=%0d", dbz, rv);
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (longint'(y[i]) != expv[i]) begin
        failures++;
        $display("FAIL y%0d z=%0d R=%0d got %0d exp %0d", i, zv[i], rv, y[i], expv[i]);
      end
    end
    @(posedge clk); #1;
    // The result holds after done.
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (longint'(y[i]) != expv[i]) begin
        failures++; $display("FAIL y%0d not held", i);
      end
    end
  endtask

  function automatic longint rz();
    longint v;
    v = longint'({$urandom, $urandom}) % ((longint'(1) <<< 32) + 1);
    return ($urandom % 2) ? -v : v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    z[0] = '0; z[1] = '0; z[2] = '0; z[3] = '0; norm = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    run(longint'(1) <<< 32, -(longint'(1) <<< 32), 12345, -1, 1);
    run(longint'(1) <<< 32, -(longint'(1) <<< 32), 7, -7, longint'(1) <<< 32);
    run(100, -100, 3, 0, 0);
    run(-5, 5, 1, -1, 3);
    repeat (300) run(rz(), rz(), rz(), rz(), longint'($urandom) + 1);
    repeat (300) run(rz(), rz(), rz(), rz(), longint'($urandom % 1000) + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

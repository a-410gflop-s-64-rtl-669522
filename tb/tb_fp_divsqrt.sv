// Self-checking testbench for fp_divsqrt.
// Random binary32 divisions and square roots are compared bit-exactly with
// a reference computed in double precision and rounded to binary32 (round
// to nearest even) by the testbench's own conversion. Special operands
// (zero, infinity, NaN, negative square root) are checked against IEEE-754
// results. The latency from acceptance to result must be 29 cycles (28 for a square root), and
// four cores requesting at once must each get their own result.
module tb_fp_divsqrt;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] req_valid, req_ready, req_op, rsp_valid;
  logic [3:0][31:0] req_a, req_b;
  logic [31:0] rsp_result;

  fp_divsqrt #(.NumCores(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_op_i(req_op),
    .req_a_i(req_a), .req_b_i(req_b), .rsp_valid_o(rsp_valid), .rsp_result_o(rsp_result));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    d = '0;
    d[63]    = f[31];
    d[62:52] = 11'(int'(f[30:23]) - 127 + 1023);   // rebias, normal numbers only
    d[51:29] = f[22:0];
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] mr;
    int e;
    logic g, s;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    g = m[28]; s = |m[27:0];
    mr = {1'b0, m[52:29]} + 25'(g && (s || m[29]));
    if (mr[24]) begin mr = mr >> 1; e++; end
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] rnd_fp();
    return {1'($urandom), 8'($urandom_range(154, 100)), 23'($urandom)};
  endfunction

  task automatic run1(input logic op, input logic [31:0] a, input logic [31:0] b,
                      output logic [31:0] res, output int lat);
    int c = 0;
    int core = $urandom_range(3);
    req_valid = '0; req_valid[core] = 1; req_op[core] = op; req_a[core] = a; req_b[core] = b;
    #4;
    while (!req_ready[core]) begin @(negedge clk); #4; end
    @(negedge clk);
    req_valid = '0;
    while (!rsp_valid[core]) begin @(negedge clk); c++; if (c > 100) break; end
    lat = c + 1;
    res = rsp_result;
    @(negedge clk);
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] a, b, r, exp_r;
    int lat;
    req_valid = '0; req_op = '0; req_a = '0; req_b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      a = rnd_fp(); b = rnd_fp();
      run1(1'b0, a, b, r, lat);
      exp_r = r2f(f2r(a) / f2r(b));
      check(r == exp_r, $sformatf("div %h/%h = %h, want %h", a, b, r, exp_r));
      check(lat == 29, $sformatf("div latency %0d", lat));
      a[31] = 1'b0;
      run1(1'b1, a, 0, r, lat);
      exp_r = r2f($sqrt(f2r(a)));
      check(r == exp_r, $sformatf("sqrt %h = %h, want %h", a, r, exp_r));
      check(lat == 28, $sformatf("sqrt latency %0d", lat));
    end
    // exact cases
    run1(0, 32'h40c00000, 32'h40000000, r, lat); check(r == 32'h40400000, "6/2 = 3");
    run1(1, 32'h41100000, 0, r, lat);            check(r == 32'h40400000, "sqrt 9 = 3");
    run1(1, 32'h40000000, 0, r, lat);            check(r == 32'h3fb504f3, "sqrt 2");
    // specials
    run1(0, 32'h3f800000, 32'h00000000, r, lat); check(r == 32'h7f800000, "1/0 = +inf");
    run1(0, 32'h00000000, 32'h00000000, r, lat); check(r == 32'h7fc00000, "0/0 = NaN");
    run1(0, 32'h7f800000, 32'h7f800000, r, lat); check(r == 32'h7fc00000, "inf/inf = NaN");
    run1(0, 32'hbf800000, 32'h7f800000, r, lat); check(r == 32'h80000000, "-1/inf = -0");
    run1(0, 32'h7fc00001, 32'h3f800000, r, lat); check(r == 32'h7fc00000, "NaN/1 = NaN");
    run1(1, 32'hbf800000, 0, r, lat);            check(r == 32'h7fc00000, "sqrt(-1) = NaN");
    run1(1, 32'h7f800000, 0, r, lat);            check(r == 32'h7f800000, "sqrt(inf) = inf");
    run1(1, 32'h80000000, 0, r, lat);            check(r == 32'h80000000, "sqrt(-0) = -0");
    run1(0, 32'h7f000000, 32'h00800000, r, lat); check(r == 32'h7f800000, "overflow to inf");
    // four cores at once: all served, each with its own quotient
    begin
      logic [3:0] got = '0;
      for (int c = 0; c < 4; c++) begin
        req_valid[c] = 1; req_op[c] = 0; req_a[c] = 32'h41200000 + (c << 23); req_b[c] = 32'h40000000;
      end
      for (int t = 0; t < 200 && got != 4'hf; t++) begin
        logic [3:0] acc;
        #4;
        acc = req_valid & req_ready;   // handshakes of this cycle
        @(negedge clk);
        req_valid &= ~acc;
        for (int c = 0; c < 4; c++) if (rsp_valid[c]) begin
          got[c] = 1;
          check(rsp_result == r2f(f2r(32'h41200000 + (c << 23)) / 2.0), $sformatf("shared core %0d", c));
        end
      end
      check(got == 4'hf, $sformatf("all four cores answered %b", got));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking testbench for ipu.
// Random operands for every operation are checked against reference values
// computed here with integer arithmetic on the unpacked fields; the result
// must appear one cycle after the operation is issued. Hand-worked complex
// products (0.5+0.5j)*(0.5-0.25j) are checked as well.
module tb_ipu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [2:0] op;
  logic [31:0] a, b, c, result;

  ipu dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .op_i(op), .op_a_i(a), .op_b_i(b),
           .op_c_i(c), .out_valid_o(out_valid), .result_o(result));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] ref_model(input logic [2:0] o, input logic [31:0] x, y, z);
    longint xr, xi, yr, yi, zr, zi, pr, pi;
    xr = longint'($signed(x[15:0])); xi = longint'($signed(x[31:16]));
    yr = longint'($signed(y[15:0])); yi = longint'($signed(y[31:16]));
    zr = longint'($signed(z[15:0])); zi = longint'($signed(z[31:16]));
    pr = (xr * yr - xi * yi) >>> 15;
    pi = (xr * yi + xi * yr) >>> 15;
    case (o)
      3'd0: return 32'(longint'(x) * longint'(y));
      3'd1: return 32'(longint'(z) + longint'(x) * longint'(y));
      3'd2: return {16'(xi + yi), 16'(xr + yr)};
      3'd3: return {16'(xi - yi), 16'(xr - yr)};
      3'd4: return 32'(longint'(z) + xr * yr + xi * yi);
      3'd5: return {16'(pi), 16'(pr)};
      3'd6: return {16'(zi + pi), 16'(zr + pr)};
      3'd7: return x + y + z;
      default: return 32'd0;
    endcase
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] want;
    in_valid = 0; op = 0; a = 0; b = 0; c = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 700; n++) begin
      op = 3'(n % 8); a = $urandom; b = $urandom; c = $urandom; in_valid = 1;
      want = ref_model(op, a, b, c);
      @(negedge clk);
      in_valid = 0;
      check(out_valid && result == want, $sformatf("op %0d a=%h b=%h c=%h: %h want %h", op, a, b, c, result, want));
      @(negedge clk);
      check(!out_valid, "single-cycle valid");
    end
    // (0.5+0.5j)*(0.5-0.25j) = 0.375+0.125j
    op = 3'd5; a = {16'h4000, 16'h4000}; b = {16'hE000, 16'h4000}; c = 0; in_valid = 1;
    @(negedge clk);
    check(result == {16'h1000, 16'h3000}, "complex product 0.375+0.125j");
    op = 3'd6; c = {16'h0800, 16'hF000};   // + (-0.125+0.0625j)
    @(negedge clk);
    check(result == {16'h1800, 16'h2000}, "complex MAC 0.25+0.1875j");
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

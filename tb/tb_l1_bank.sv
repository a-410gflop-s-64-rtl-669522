// Self-checking testbench for l1_bank.
// Random loads and stores with byte enables are checked against a reference
// array; every response must arrive exactly one cycle after its request.
// The bank queue is filled to overflow (the extra push must be refused),
// drained in order and popped once more while empty (refused). A response
// held back by rsp_ready must stay stable and block new requests.
module tb_l1_bank;
  import hs_pkg::*;
  localparam int unsigned W = 256, QD = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;

  l1_bank dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
               .req_i(req), .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp));

  logic [31:0] model [W];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one request and wait for its response (always exactly one cycle).
  task automatic access(input mem_op_e op, input logic [7:0] row, input logic [31:0] wdata,
                        input logic [3:0] be, output mem_rsp_t r);
    req = '0;
    req.op = op; req.addr = {14'd0, row, 10'd0}; req.wdata = wdata; req.be = be;
    req.src = 6'(row); req.tag = 3'(row);
    req_valid = 1;
    @(negedge clk);            // request accepted at the rising edge
    req_valid = 0;
    check(rsp_valid, "response one cycle after request");
    r = rsp;
    check(r.src == 6'(row) && r.tag == 3'(row), "response carries src/tag");
    @(negedge clk);
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mem_rsp_t r;
    logic [31:0] d;
    req_valid = 0; rsp_ready = 1; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // initialise the non-queue rows
    for (int i = 0; i < W - QD; i++) begin
      d = $urandom;
      model[i] = d;
      access(OP_STORE, 8'(i), d, 4'hf, r);
    end
    // random traffic
    for (int n = 0; n < 400; n++) begin
      int unsigned row = $urandom_range(W - QD - 1);
      if ($urandom_range(1)) begin
        logic [3:0] be = 4'($urandom);
        d = $urandom;
        for (int b = 0; b < 4; b++) if (be[b]) model[row][8*b +: 8] = d[8*b +: 8];
        access(OP_STORE, 8'(row), d, be, r);
      end else begin
        access(OP_LOAD, 8'(row), 0, 4'hf, r);
        check(r.rdata == model[row], $sformatf("load row %0d", row));
      end
    end
    // queue: fill, overflow, drain, underflow
    for (int i = 0; i < QD; i++) begin
      access(OP_QPUSH, 8'(i * 7), 32'hA000 + i, 4'hf, r);
      check(r.ok, "push into non-full queue");
    end
    access(OP_QPUSH, 0, 32'hDEAD, 4'hf, r);
    check(!r.ok, "push into full queue refused");
    for (int i = 0; i < QD; i++) begin
      access(OP_QPOP, 8'(i * 3), 0, 4'hf, r);
      check(r.ok && r.rdata == 32'hA000 + i, $sformatf("pop %0d in order", i));
    end
    access(OP_QPOP, 0, 0, 4'hf, r);
    check(!r.ok, "pop from empty queue refused");
    // queue wraps around
    for (int i = 0; i < 3 * QD; i++) begin
      access(OP_QPUSH, 0, 32'hB000 + i, 4'hf, r);
      access(OP_QPOP, 0, 0, 4'hf, r);
      check(r.ok && r.rdata == 32'hB000 + i, "wrap-around push/pop");
    end
    // back-pressure: the response must hold and block the next request
    req = '0; req.op = OP_LOAD; req.addr = {14'd0, 8'd5, 10'd0}; req_valid = 1; rsp_ready = 0;
    @(negedge clk);
    req.addr = {14'd0, 8'd6, 10'd0};
    check(rsp_valid && rsp.rdata == model[5] && !req_ready, "held response, bank not ready");
    @(negedge clk);
    check(rsp_valid && rsp.rdata == model[5], "response stable under back-pressure");
    rsp_ready = 1;
    @(negedge clk);  // first drained, second accepted in same cycle
    req_valid = 0;
    check(rsp_valid && rsp.rdata == model[6], "next access after drain");
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking testbench for qlr.
// The L1 side is a small model here: two queues (at addresses QA and QB,
// capacity 2) answering queue pushes and pops one cycle later, with ok=0
// when full or empty. Checked:
//  * a pop-QLR from memory delivers the words in order although its queue
//    is often empty (refused pops are retried), and switches off after its
//    element count;
//  * a push-QLR to memory delivers the core's words in order although its
//    queue is often full, and switches off after its count;
//  * a push-QLR and a pop-QLR in direct mode, looped back here, pass words
//    in order under random core back-pressure;
//  * refused requests did happen (retry path exercised).
module tb_qlr;
  import hs_pkg::*;
  localparam logic [31:0] QA = 32'h0000_0400, QB = 32'h0000_0804;
  localparam int N = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid; logic [1:0] cfg_idx; qlr_cfg_t cfg;
  logic [3:0] active, pop_valid, pop_ready, push_valid, push_ready;
  logic [3:0][31:0] pop_data, push_data, dout_data;
  logic [3:0] dout_valid, dout_ready, din_valid, din_ready;
  qlr_cfg_t [3:0] cfg_o;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq; mem_rsp_t mrsp;

  qlr dut (.clk_i(clk), .rst_ni(rst_n), .core_id_i(6'd5), .cfg_valid_i(cfg_valid), .cfg_idx_i(cfg_idx),
    .cfg_i(cfg), .active_o(active), .cfg_o(cfg_o), .pop_valid_o(pop_valid), .pop_data_o(pop_data),
    .pop_ready_i(pop_ready), .push_valid_i(push_valid), .push_data_i(push_data), .push_ready_o(push_ready),
    .dout_valid_o(dout_valid), .dout_data_o(dout_data), .dout_ready_i(dout_ready),
    .din_valid_i(din_valid), .din_data_i(din_data), .din_ready_o(din_ready),
    .mem_req_valid_o(mreq_valid), .mem_req_ready_i(mreq_ready), .mem_req_o(mreq),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_i(mrsp));

  // direct link loop-back: QLR2 (push) feeds QLR3 (pop)
  logic [3:0][31:0] din_data;
  always_comb begin
    din_valid = '0; din_data = '0; dout_ready = '0;
    din_valid[3] = dout_valid[2]; din_data[3] = dout_data[2]; dout_ready[2] = din_ready[3];
  end

  int checks = 0, failures = 0, refused = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // L1 queue model
  logic [31:0] qa [$], qb [$];
  int qa_fed = 0, qb_got = 0;
  assign mreq_ready = 1'b1;
  always_ff @(posedge clk) begin
    mrsp_valid <= 1'b0;
    if (rst_n) begin
      // producer side of QA and consumer side of QB, random speed
      if (qa.size() < 2 && qa_fed < N && $urandom_range(3) == 0) begin qa.push_back(32'h100 + qa_fed); qa_fed++; end
      if (qb.size() > 0 && $urandom_range(3) == 0) begin
        checks++;
        if (qb.pop_front() != 32'h200 + qb_got) begin failures++; $display("FAIL: push order"); end
        qb_got++;
      end
      if (mreq_valid) begin
        mrsp_valid   <= 1'b1;
        mrsp.src     <= mreq.src;
        mrsp.tag     <= mreq.tag;
        mrsp.ok      <= 1'b1;
        mrsp.rdata   <= '0;
        if (mreq.op == OP_QPOP && mreq.addr == QA) begin
          if (qa.size() == 0) begin mrsp.ok <= 1'b0; refused++; end
          else mrsp.rdata <= qa.pop_front();
        end else if (mreq.op == OP_QPUSH && mreq.addr == QB) begin
          if (qb.size() >= 2) begin mrsp.ok <= 1'b0; refused++; end
          else qb.push_back(mreq.wdata);
        end else begin
          failures++; $display("FAIL: unexpected memory request");
        end
      end
    end
  end

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic configure(input int idx, input qlr_mode_e mode, input logic push,
                           input logic [31:0] addr, input int cnt);
    cfg_valid = 1; cfg_idx = 2'(idx);
    cfg = '0; cfg.mode = mode; cfg.push = push; cfg.addr = addr; cfg.count = 16'(cnt);
    cfg.src_core = 2'd0; cfg.src_qlr = 2'd2;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  int popped = 0, pushed = 0, dpushed = 0, dpopped = 0;
  initial begin
    cfg_valid = 0; cfg_idx = 0; cfg = '0; pop_ready = '0; push_valid = '0; push_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    configure(0, QLR_MEM, 1'b0, QA, N);
    configure(1, QLR_MEM, 1'b1, QB, N);
    configure(2, QLR_DIRECT, 1'b1, 0, 0);
    configure(3, QLR_DIRECT, 1'b0, 0, 0);
    check(active == 4'hf, "all QLRs active after configuration");
    for (int t = 0; t < 5000 && !(popped == N && qb_got == N && dpopped == N); t++) begin
      logic [3:0] pv, pr, uv, ur;
      logic [3:0][31:0] pd;
      pop_ready[0] = $urandom_range(1); pop_ready[3] = $urandom_range(1);
      push_valid[1] = (pushed < N);  push_data[1] = 32'h200 + pushed;
      push_valid[2] = (dpushed < N) && $urandom_range(1); push_data[2] = 32'h300 + dpushed;
      #4;
      pv = pop_valid; pr = pop_ready; uv = push_valid; ur = push_ready; pd = pop_data;
      @(negedge clk);
      if (pv[0] && pr[0]) begin check(pd[0] == 32'h100 + popped, "pop-QLR order"); popped++; end
      if (pv[3] && pr[3]) begin check(pd[3] == 32'h300 + dpopped, "direct link order"); dpopped++; end
      if (uv[1] && ur[1]) pushed++;
      if (uv[2] && ur[2]) dpushed++;
    end
    pop_ready = '0; push_valid = '0;
    check(popped == N, "pop stream complete");
    check(qb_got == N, "push stream complete");
    check(dpopped == N, "direct stream complete");
    repeat (5) @(negedge clk);
    check(active[0] == 1'b0 && active[1] == 1'b0, "bounded QLRs switched off");
    check(active[3:2] == 2'b11, "unbounded QLRs stay on");
    check(refused > 0, "refused queue accesses were retried");
    $display("refused=%0d", refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

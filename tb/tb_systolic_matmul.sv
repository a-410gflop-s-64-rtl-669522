// Workload testbench: systolic matrix multiplication C = A x B on the full
// cluster, with the data flow of a QLR-based systolic array.
//
// A 2 x 4 array of cores computes a 2 x 4 result over an inner dimension K.
// Array position (i, j) is core j%2 + 2*i of Tile j/2 in Group 0, so the
// left half of the array sits in Tile 0 and the right half in Tile 1:
//  * column 0 loads the rows of A from L1, row 0 loads the columns of B;
//  * every core passes its A element to the right and (row 0) its B element
//    downwards through push-QLRs, and takes them from the left / from above
//    through pop-QLRs;
//  * inside a Tile the links are direct QLR connections; between Tile 0 and
//    Tile 1 the A stream goes through queues in L1 banks of Group 1;
//  * each core accumulates its output element with the IPU and stores it.
// The multiply runs twice: 32-bit integers with MAC, and 16-bit complex
// (Q1.15 real/imaginary) with CMAC. Every result is compared with a product
// computed here, all streams must have switched off at the end, and both
// direct-link and memory-queue words must have been seen. Cycles per run
// are printed.
module tb_systolic_matmul;
  import hs_pkg::*;
  localparam int NCo = NumCores, NTi = NumTiles;
  localparam int K = 16;
  localparam int ABase = NumBanks * 30, BBase = NumBanks * 40, CBase = NumBanks * 50;
  localparam logic [2:0] OpMac = 3'd1, OpCmac = 3'd6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NCo-1:0] core_req_valid, core_req_ready, core_rsp_valid;
  mem_req_t [NCo-1:0] core_req;
  mem_rsp_t [NCo-1:0] core_rsp;
  logic     [NCo-1:0] qlr_cfg_valid;
  logic     [NCo-1:0][1:0] qlr_cfg_idx;
  qlr_cfg_t [NCo-1:0] qlr_cfg;
  logic     [NCo-1:0][NumQlr-1:0] qlr_active, qlr_pop_valid, qlr_pop_ready, qlr_push_valid, qlr_push_ready;
  logic     [NCo-1:0][NumQlr-1:0][31:0] qlr_pop_data, qlr_push_data;
  logic     [NCo-1:0] ds_rsp_valid, ds_req_ready;
  logic     [NTi-1:0][31:0] ds_rsp_result;
  logic     [NCo-1:0] ipu_valid, ipu_valid_o;
  logic     [NCo-1:0][2:0] ipu_op;
  logic     [NCo-1:0][31:0] ipu_a, ipu_b, ipu_c, ipu_result;

  heartstream_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(core_req_valid), .core_req_ready_o(core_req_ready), .core_req_i(core_req),
    .core_rsp_valid_o(core_rsp_valid), .core_rsp_o(core_rsp),
    .qlr_cfg_valid_i(qlr_cfg_valid), .qlr_cfg_idx_i(qlr_cfg_idx), .qlr_cfg_i(qlr_cfg),
    .qlr_active_o(qlr_active), .qlr_pop_valid_o(qlr_pop_valid), .qlr_pop_data_o(qlr_pop_data),
    .qlr_pop_ready_i(qlr_pop_ready), .qlr_push_valid_i(qlr_push_valid), .qlr_push_data_i(qlr_push_data),
    .qlr_push_ready_o(qlr_push_ready),
    .ds_req_valid_i('0), .ds_req_ready_o(ds_req_ready), .ds_req_op_i('0),
    .ds_req_a_i('0), .ds_req_b_i('0), .ds_rsp_valid_o(ds_rsp_valid), .ds_rsp_result_o(ds_rsp_result),
    .ipu_valid_i(ipu_valid), .ipu_op_i(ipu_op), .ipu_a_i(ipu_a), .ipu_b_i(ipu_b), .ipu_c_i(ipu_c),
    .ipu_valid_o(ipu_valid_o), .ipu_result_o(ipu_result));

  int checks = 0, failures = 0, n_direct = 0, n_queue = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] waddr(input int w);
    return 32'(w) << 2;
  endfunction
  function automatic int core_of(input int i, input int j);
    return (j / 2) * NumCoresPerTile + 2 * i + (j % 2);
  endfunction
  // queue of row i between Tile 0 and Tile 1: a bank of Group 1, Tile 1
  function automatic logic [31:0] qaddr(input int i);
    return waddr(64 + 16 + 3 + i);
  endfunction

  task automatic access(input int c, input mem_op_e op, input logic [31:0] addr, input logic [31:0] wdata,
                        output logic [31:0] rdata);
    int n = 0;
    core_req[c] = '0;
    core_req[c].op = op; core_req[c].addr = addr; core_req[c].wdata = wdata; core_req[c].be = 4'hf;
    core_req_valid[c] = 1'b1;
    #4; while (!core_req_ready[c]) begin @(negedge clk); #4; end
    @(negedge clk);
    core_req_valid[c] = 1'b0;
    while (!core_rsp_valid[c] && n < 200) begin #4; if (core_rsp_valid[c]) break; @(negedge clk); n++; end
    rdata = core_rsp[c].rdata;
    @(negedge clk);
  endtask

  task automatic qpop(input int c, input int q, output logic [31:0] v);
    qlr_pop_ready[c][q] = 1;
    #4; while (!qlr_pop_valid[c][q]) begin @(negedge clk); #4; end
    v = qlr_pop_data[c][q];
    @(negedge clk); qlr_pop_ready[c][q] = 0;
  endtask

  task automatic qpush(input int c, input int q, input logic [31:0] v);
    qlr_push_valid[c][q] = 1; qlr_push_data[c][q] = v;
    #4; while (!qlr_push_ready[c][q]) begin @(negedge clk); #4; end
    @(negedge clk); qlr_push_valid[c][q] = 0;
  endtask

  // reference arithmetic
  function automatic logic [31:0] cmac_ref(input logic [31:0] c, input logic [31:0] a, input logic [31:0] b);
    int a_re = int'($signed(a[15:0])), a_im = int'($signed(a[31:16]));
    int b_re = int'($signed(b[15:0])), b_im = int'($signed(b[31:16]));
    int re = (a_re * b_re - a_im * b_im) >>> 15, im = (a_re * b_im + a_im * b_re) >>> 15;
    logic [15:0] r16 = c[15:0] + 16'(re), i16 = c[31:16] + 16'(im);
    return {i16, r16};
  endfunction

  logic [31:0] A [2][K], B [K][4];
  logic [2:0]  run_op;
  logic        run_go = 0;
  int          run_done = 0;

  // one process per array position
  for (genvar gi = 0; gi < 2; gi++) begin : g_row
    for (genvar gj = 0; gj < 4; gj++) begin : g_col
      localparam int C = (gj / 2) * 4 + 2 * gi + (gj % 2);
      initial begin
        logic [31:0] a, b, acc, d;
        forever begin
          wait (run_go);
          acc = '0;
          for (int k = 0; k < K; k++) begin
            if (gj == 0) access(C, OP_LOAD, waddr(ABase + gi * K + k), 0, a);
            else begin
              qpop(C, 0, a);
              if (gj == 2) n_queue++; else n_direct++;
            end
            if (gi == 0) access(C, OP_LOAD, waddr(BBase + k * 4 + gj), 0, b);
            else begin qpop(C, 1, b); n_direct++; end
            if (gj < 3)  qpush(C, 2, a);
            if (gi == 0) qpush(C, 3, b);
            ipu_valid[C] = 1; ipu_op[C] = run_op; ipu_a[C] = a; ipu_b[C] = b; ipu_c[C] = acc;
            @(negedge clk); ipu_valid[C] = 0;
            acc = ipu_result[C];
          end
          access(C, OP_STORE, waddr(CBase + gi * 4 + gj), acc, d);
          run_done++;
          wait (!run_go);
        end
      end
    end
  end

  task automatic configure(input int n);
    for (int i = 0; i < 2; i++) for (int j = 0; j < 4; j++) begin
      int c = core_of(i, j);
      // QLR0: pop A from the left; QLR1: pop B from above; QLR2: push A right; QLR3: push B down
      if (j > 0) begin
        qlr_cfg_valid[c] = 1; qlr_cfg_idx[c] = 2'd0;
        if (j == 2) qlr_cfg[c] = '{mode: QLR_MEM, push: 1'b0, addr: qaddr(i), src_core: 2'd0, src_qlr: 2'd0, count: 16'(n)};
        else        qlr_cfg[c] = '{mode: QLR_DIRECT, push: 1'b0, addr: '0, src_core: 2'(2 * i + (j - 1) % 2), src_qlr: 2'd2, count: 16'(n)};
        @(negedge clk); qlr_cfg_valid[c] = 0;
      end
      if (i > 0) begin
        qlr_cfg_valid[c] = 1; qlr_cfg_idx[c] = 2'd1;
        qlr_cfg[c] = '{mode: QLR_DIRECT, push: 1'b0, addr: '0, src_core: 2'(j % 2), src_qlr: 2'd3, count: 16'(n)};
        @(negedge clk); qlr_cfg_valid[c] = 0;
      end
      if (j < 3) begin
        qlr_cfg_valid[c] = 1; qlr_cfg_idx[c] = 2'd2;
        if (j == 1) qlr_cfg[c] = '{mode: QLR_MEM, push: 1'b1, addr: qaddr(i), src_core: 2'd0, src_qlr: 2'd0, count: 16'(n)};
        else        qlr_cfg[c] = '{mode: QLR_DIRECT, push: 1'b1, addr: '0, src_core: 2'd0, src_qlr: 2'd0, count: 16'(n)};
        @(negedge clk); qlr_cfg_valid[c] = 0;
      end
      if (i == 0) begin
        qlr_cfg_valid[c] = 1; qlr_cfg_idx[c] = 2'd3;
        qlr_cfg[c] = '{mode: QLR_DIRECT, push: 1'b1, addr: '0, src_core: 2'd0, src_qlr: 2'd0, count: 16'(n)};
        @(negedge clk); qlr_cfg_valid[c] = 0;
      end
    end
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d, ref_c;
    int t0;
    core_req_valid = '0; core_req = '0; qlr_cfg_valid = '0; qlr_cfg_idx = '0; qlr_cfg = '0;
    qlr_pop_ready = '0; qlr_push_valid = '0; qlr_push_data = '0;
    ipu_valid = '0; ipu_op = '0; ipu_a = '0; ipu_b = '0; ipu_c = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    for (int run = 0; run < 2; run++) begin
      run_op = run == 0 ? OpMac : OpCmac;
      for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++) begin
        A[i][k] = run == 0 ? $urandom : {16'($urandom_range(16383)) - 16'd8192, 16'($urandom_range(16383)) - 16'd8192};
        access(63, OP_STORE, waddr(ABase + i * K + k), A[i][k], d);
      end
      for (int k = 0; k < K; k++) for (int j = 0; j < 4; j++) begin
        B[k][j] = run == 0 ? $urandom : {16'($urandom_range(16383)) - 16'd8192, 16'($urandom_range(16383)) - 16'd8192};
        access(63, OP_STORE, waddr(BBase + k * 4 + j), B[k][j], d);
      end
      configure(K);
      t0 = $time / 10;
      run_done = 0; run_go = 1;
      wait (run_done == 8);
      $display("%s matmul 2x%0dx4: %0d cycles", run == 0 ? "int32" : "complex16", K, $time / 10 - t0);
      run_go = 0;
      @(negedge clk);
      for (int i = 0; i < 2; i++) for (int j = 0; j < 4; j++) begin
        ref_c = '0;
        for (int k = 0; k < K; k++) ref_c = run == 0 ? ref_c + A[i][k] * B[k][j] : cmac_ref(ref_c, A[i][k], B[k][j]);
        access(63, OP_LOAD, waddr(CBase + i * 4 + j), 0, d);
        check(d == ref_c, $sformatf("run %0d C[%0d][%0d] = %h, expected %h", run, i, j, d, ref_c));
      end
      repeat (4) @(negedge clk);
      check(qlr_active[7:0] == '0, "all streams switched off");
    end
    $display("stream words: direct=%0d queue=%0d", n_direct, n_queue);
    check(n_direct > 0 && n_queue > 0, "direct links and memory queues both used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

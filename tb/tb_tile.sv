// Self-checking testbench for one Tile (placed as Tile 2 of Group 1).
//  * The four cores store and load random words in the Tile's 16 banks;
//    loads are checked against a reference copy and must take one cycle.
//  * A core's access to Group 3 must leave on remote port 2 (3-1) one
//    cycle later with the core's id; the answer injected on rsp_i[2] must
//    reach that core.
//  * Requests injected on req_i[1] as from a core of Group 0 must be served
//    by the banks and answered on rsp_o[1].
//  * A push-QLR of core 0 linked directly to a pop-QLR of core 3 must pass
//    a stream in order; the shared DIV-SQRT and an IPU are exercised once.
module tb_tile;
  import hs_pkg::*;
  localparam logic [1:0] G = 2'd1, T = 2'd2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [3:0] creq_valid, creq_ready, crsp_valid;
  mem_req_t [3:0] creq;
  mem_rsp_t [3:0] crsp;
  logic     [3:0] cfg_valid; logic [3:0][1:0] cfg_idx; qlr_cfg_t [3:0] cfg;
  logic     [3:0][3:0] active, pop_valid, pop_ready, push_valid, push_ready;
  logic     [3:0][3:0][31:0] pop_data, push_data;
  logic     [3:0] ds_valid, ds_ready, ds_op, ds_rsp_valid;
  logic     [3:0][31:0] ds_a, ds_b; logic [31:0] ds_res;
  logic     [3:0] ipu_v, ipu_vo; logic [3:0][2:0] ipu_op; logic [3:0][31:0] ipu_a, ipu_b, ipu_c, ipu_r;
  logic     [3:0] ro_valid, ro_ready, ri_valid, ri_ready, qi_valid, qi_ready, so_valid, so_ready;
  mem_req_t [3:0] ro, qi;
  mem_rsp_t [3:0] ri, so;

  tile dut (.clk_i(clk), .rst_ni(rst_n), .group_idx_i(G), .tile_idx_i(T),
    .core_req_valid_i(creq_valid), .core_req_ready_o(creq_ready), .core_req_i(creq),
    .core_rsp_valid_o(crsp_valid), .core_rsp_o(crsp),
    .qlr_cfg_valid_i(cfg_valid), .qlr_cfg_idx_i(cfg_idx), .qlr_cfg_i(cfg), .qlr_active_o(active),
    .qlr_pop_valid_o(pop_valid), .qlr_pop_data_o(pop_data), .qlr_pop_ready_i(pop_ready),
    .qlr_push_valid_i(push_valid), .qlr_push_data_i(push_data), .qlr_push_ready_o(push_ready),
    .ds_req_valid_i(ds_valid), .ds_req_ready_o(ds_ready), .ds_req_op_i(ds_op), .ds_req_a_i(ds_a),
    .ds_req_b_i(ds_b), .ds_rsp_valid_o(ds_rsp_valid), .ds_rsp_result_o(ds_res),
    .ipu_valid_i(ipu_v), .ipu_op_i(ipu_op), .ipu_a_i(ipu_a), .ipu_b_i(ipu_b), .ipu_c_i(ipu_c),
    .ipu_valid_o(ipu_vo), .ipu_result_o(ipu_r),
    .req_o_valid_o(ro_valid), .req_o_ready_i(ro_ready), .req_o_o(ro),
    .rsp_i_valid_i(ri_valid), .rsp_i_ready_o(ri_ready), .rsp_i_i(ri),
    .req_i_valid_i(qi_valid), .req_i_ready_o(qi_ready), .req_i_i(qi),
    .rsp_o_valid_o(so_valid), .rsp_o_ready_i(so_ready), .rsp_o_o(so));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // address of row r, bank b of this Tile
  function automatic logic [31:0] laddr(input int r, input int b);
    return {14'd0, 8'(r), G, T, 4'(b), 2'b00};
  endfunction

  logic [31:0] model [16][64];

  task automatic access(input int c, input mem_op_e op, input logic [31:0] addr, input logic [31:0] wd,
                        output logic [31:0] rd, output int lat);
    creq[c] = '0; creq[c].op = op; creq[c].addr = addr; creq[c].wdata = wd; creq[c].be = 4'hf;
    creq_valid[c] = 1;
    #4; while (!creq_ready[c]) begin @(negedge clk); #4; end
    @(negedge clk); creq_valid[c] = 0;
    lat = 1;
    while (!crsp_valid[c] && lat < 50) begin @(negedge clk); lat++; end
    rd = crsp[c].rdata;
    @(negedge clk);
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nd = 0;
  initial begin
    logic [31:0] d; int lat;
    creq_valid = '0; creq = '0; cfg_valid = '0; cfg_idx = '0; cfg = '0; pop_ready = '0;
    push_valid = '0; push_data = '0; ds_valid = '0; ds_op = '0; ds_a = '0; ds_b = '0;
    ipu_v = '0; ipu_op = '0; ipu_a = '0; ipu_b = '0; ipu_c = '0;
    ro_ready = '1; ri_valid = '0; ri = '0; qi_valid = '0; qi = '0; so_ready = '1;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // local traffic
    for (int b = 0; b < 16; b++) for (int r = 0; r < 64; r++) model[b][r] = '0;
    for (int b = 0; b < 16; b++) for (int r = 0; r < 64; r++)
      access(r % 4, OP_STORE, laddr(r, b), 0, d, lat);
    for (int n = 0; n < 300; n++) begin
      int c = $urandom_range(3), b = $urandom_range(15), r = $urandom_range(63);
      if ($urandom_range(1)) begin
        d = $urandom; model[b][r] = d;
        access(c, OP_STORE, laddr(r, b), d, d, lat);
      end else begin
        access(c, OP_LOAD, laddr(r, b), 0, d, lat);
        check(d == model[b][r] && lat == 1, $sformatf("local load b%0d r%0d lat %0d", b, r, lat));
      end
    end

    // outgoing remote request from core 2 to Group 3
    creq[2] = '0; creq[2].op = OP_LOAD; creq[2].addr = {14'd0, 8'd9, 2'd3, 2'd0, 4'd5, 2'b00};
    creq_valid[2] = 1;
    @(negedge clk); creq_valid[2] = 0;
    check(ro_valid == 4'b0100, "request leaves on remote port 2");
    check(ro[2].src == {G, T, 2'd2} && ro[2].addr == creq[2].addr, "remote request carries core id");
    @(negedge clk);
    ri_valid[2] = 1; ri[2] = '{rdata: 32'hCAFE, ok: 1'b1, src: {G, T, 2'd2}, tag: 3'd0};
    #1; check(crsp_valid[2] && crsp[2].rdata == 32'hCAFE, "remote response reaches core 2");
    @(negedge clk); ri_valid = '0;

    // incoming request from Group 0 on port 1
    model[7][3] = 32'h5A5A;
    qi_valid[1] = 1; qi[1] = '0; qi[1].op = OP_STORE; qi[1].addr = laddr(3, 7); qi[1].wdata = 32'h5A5A;
    qi[1].be = 4'hf; qi[1].src = {2'd0, 2'd1, 2'd3};
    @(negedge clk); qi[1].op = OP_LOAD;
    @(negedge clk); qi_valid = '0;
    begin
      int seen = 0;
      for (int t = 0; t < 6; t++) begin
        if (so_valid[1]) begin
          seen++;
          check(so[1].src == {2'd0, 2'd1, 2'd3}, "incoming response routed back on port 1");
          if (seen == 2) check(so[1].rdata == 32'h5A5A, "incoming load data");
        end
        @(negedge clk);
      end
      check(seen == 2, "two responses on rsp_o[1]");
    end

    // direct QLR link: core 0 push-QLR 0 -> core 3 pop-QLR 1
    cfg_valid[0] = 1; cfg_idx[0] = 0; cfg[0] = '{mode: QLR_DIRECT, push: 1'b1, addr: 0, src_core: 0, src_qlr: 0, count: 0};
    cfg_valid[3] = 1; cfg_idx[3] = 1; cfg[3] = '{mode: QLR_DIRECT, push: 1'b0, addr: 0, src_core: 0, src_qlr: 0, count: 0};
    @(negedge clk); cfg_valid = '0;
    fork
      for (int i = 0; i < 20; i++) begin
        push_valid[0][0] = 1; push_data[0][0] = 32'(i * 11);
        #4; while (!push_ready[0][0]) begin @(negedge clk); #4; end
        @(negedge clk); push_valid[0][0] = 0;
      end
      for (int i = 0; i < 20; i++) begin
        pop_ready[3][1] = $urandom_range(1);
        #4;
        if (pop_ready[3][1] && pop_valid[3][1]) begin
          check(pop_data[3][1] == 32'(nd * 11), "direct link data"); nd++;
        end else i--;
        @(negedge clk);
      end
    join
    pop_ready = '0;
    check(nd == 20, "direct link stream complete");

    // DIV-SQRT: 1/4 from core 1; IPU of core 3: 6*7+1
    ds_valid[1] = 1; ds_op[1] = 0; ds_a[1] = 32'h3f800000; ds_b[1] = 32'h40800000;
    #4; while (!ds_ready[1]) begin @(negedge clk); #4; end
    @(negedge clk); ds_valid[1] = 0;
    for (int t = 0; t < 40 && !ds_rsp_valid[1]; t++) @(negedge clk);
    check(ds_rsp_valid[1] && ds_res == 32'h3e800000, "shared DIV-SQRT 1/4");
    ipu_v[3] = 1; ipu_op[3] = 3'd1; ipu_a[3] = 6; ipu_b[3] = 7; ipu_c[3] = 1;
    @(negedge clk); ipu_v[3] = 0;
    check(ipu_vo[3] && ipu_r[3] == 43, "IPU MAC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

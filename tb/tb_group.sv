// Self-checking testbench for one Group (placed as Group 2).
//  * Random cores of the four Tiles store and load random words anywhere in
//    the Group's 64 banks; loads are checked against a reference copy and
//    must take 1 cycle in the core's own Tile and 3 cycles in another Tile.
//  * An access to Group 3 must leave on direction 1 towards the target
//    Tile, and a response injected on the return link must reach the core.
//  * A request arriving from Group 0 on direction 2 must be answered on the
//    direction-2 response link towards the requester's Tile.
module tb_group;
  import hs_pkg::*;
  localparam logic [1:0] G = 2'd2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [3:0][3:0] creq_valid, creq_ready, crsp_valid;
  mem_req_t [3:0][3:0] creq;
  mem_rsp_t [3:0][3:0] crsp;
  mem_req_t [3:1][3:0] xq_o, xq_i;
  mem_rsp_t [3:1][3:0] xs_o, xs_i;
  logic [3:1][3:0] eqo_v, eqo_r, eqi_v, eqi_r, eso_v, eso_r, esi_v, esi_r;

  group dut (.clk_i(clk), .rst_ni(rst_n), .group_idx_i(G),
    .core_req_valid_i(creq_valid), .core_req_ready_o(creq_ready), .core_req_i(creq),
    .core_rsp_valid_o(crsp_valid), .core_rsp_o(crsp),
    .qlr_cfg_valid_i('0), .qlr_cfg_idx_i('0), .qlr_cfg_i('0), .qlr_active_o(),
    .qlr_pop_valid_o(), .qlr_pop_data_o(), .qlr_pop_ready_i('0), .qlr_push_valid_i('0),
    .qlr_push_data_i('0), .qlr_push_ready_o(),
    .ds_req_valid_i('0), .ds_req_ready_o(), .ds_req_op_i('0), .ds_req_a_i('0), .ds_req_b_i('0),
    .ds_rsp_valid_o(), .ds_rsp_result_o(),
    .ipu_valid_i('0), .ipu_op_i('0), .ipu_a_i('0), .ipu_b_i('0), .ipu_c_i('0), .ipu_valid_o(), .ipu_result_o(),
    .ext_req_valid_o(eqo_v), .ext_req_ready_i(eqo_r), .ext_req_o(xq_o),
    .ext_req_valid_i(eqi_v), .ext_req_ready_o(eqi_r), .ext_req_i(xq_i),
    .ext_rsp_valid_o(eso_v), .ext_rsp_ready_i(eso_r), .ext_rsp_o(xs_o),
    .ext_rsp_valid_i(esi_v), .ext_rsp_ready_o(esi_r), .ext_rsp_i(xs_i));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] gaddr(input int r, input int t, input int b);
    return {14'd0, 8'(r), G, 2'(t), 4'(b), 2'b00};
  endfunction

  logic [31:0] model [4][16][16];

  task automatic access(input int t, input int c, input mem_op_e op, input logic [31:0] addr,
                        input logic [31:0] wd, output logic [31:0] rd, output int lat);
    creq[t][c] = '0; creq[t][c].op = op; creq[t][c].addr = addr; creq[t][c].wdata = wd; creq[t][c].be = 4'hf;
    creq_valid[t][c] = 1;
    #4; while (!creq_ready[t][c]) begin @(negedge clk); #4; end
    @(negedge clk); creq_valid[t][c] = 0;
    lat = 1;
    while (!crsp_valid[t][c] && lat < 50) begin @(negedge clk); lat++; end
    rd = crsp[t][c].rdata;
    @(negedge clk);
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d; int lat;
    creq_valid = '0; creq = '0; eqo_r = '1; eqi_v = '0; xq_i = '0; eso_r = '1; esi_v = '0; xs_i = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 4; t++) for (int b = 0; b < 16; b++) for (int r = 0; r < 16; r++) begin
      model[t][b][r] = 32'(t * 1000 + b * 20 + r);
      access(b % 4, r % 4, OP_STORE, gaddr(r, t, b), model[t][b][r], d, lat);
    end
    for (int n = 0; n < 400; n++) begin
      int st = $urandom_range(3), sc = $urandom_range(3), t = $urandom_range(3), b = $urandom_range(15), r = $urandom_range(15);
      if ($urandom_range(2) == 0) begin
        d = $urandom; model[t][b][r] = d;
        access(st, sc, OP_STORE, gaddr(r, t, b), d, d, lat);
      end else begin
        access(st, sc, OP_LOAD, gaddr(r, t, b), 0, d, lat);
        check(d == model[t][b][r], $sformatf("load t%0d b%0d r%0d", t, b, r));
        check(lat == (st == t ? 1 : 3), $sformatf("latency %0d from Tile %0d to Tile %0d", lat, st, t));
      end
    end
    // to Group 3 (direction 1), target Tile 2, from Tile 1 core 3
    creq[1][3] = '0; creq[1][3].op = OP_LOAD; creq[1][3].addr = {14'd0, 8'd1, 2'd3, 2'd2, 4'd0, 2'b00};
    creq_valid[1][3] = 1; @(negedge clk); creq_valid[1][3] = 0;
    for (int i = 0; i < 4 && !eqo_v[1][2]; i++) @(negedge clk);
    check(eqo_v[1][2] && xq_o[1][2].src == {G, 2'd1, 2'd3}, "request leaves on direction 1 to Tile 2");
    @(negedge clk);
    esi_v[1][1] = 1; xs_i[1][1] = '{rdata: 32'hBEEF, ok: 1'b1, src: {G, 2'd1, 2'd3}, tag: 3'd0};
    @(negedge clk); esi_v = '0;
    begin
      int seen = 0;
      for (int i = 0; i < 4; i++) begin
        if (crsp_valid[1][3] && crsp[1][3].rdata == 32'hBEEF) seen++;
        @(negedge clk);
      end
      check(seen == 1, "response from Group 3 reaches the core");
    end
    // from Group 0 (arrives on direction 2) to Tile 3, bank 4, row 5; requester Tile 1 core 0
    eqi_v[2][3] = 1; xq_i[2][3] = '0; xq_i[2][3].op = OP_LOAD; xq_i[2][3].addr = gaddr(5, 3, 4);
    xq_i[2][3].src = {2'd0, 2'd1, 2'd0};
    @(negedge clk); eqi_v = '0;
    begin
      int seen = 0;
      for (int i = 0; i < 6; i++) begin
        if (eso_v[2][1]) begin
          seen++;
          check(xs_o[2][1].rdata == model[3][4][5] && xs_o[2][1].src == {2'd0, 2'd1, 2'd0}, "answer to Group 0");
        end
        @(negedge clk);
      end
      check(seen == 1, "one answer on direction-2 response link to Tile 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

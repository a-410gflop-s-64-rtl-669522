// End-to-end testbench of the cluster at its full size (64 cores, 256 banks).
//
// The testbench plays the 64 cores. Phases:
//  1. Latency: core 0 loads from its own Tile, from another Tile of its
//     Group and from another Group; the data must arrive after 1, 3 and 5
//     cycles.
//  2. Shared memory: all 64 cores at once store to and load back 32 words
//     each, spread over all 256 banks of all Groups; the data is compared
//     with the values each core wrote. Bank conflicts make requests wait.
//  3. Systolic stream across the cluster, as in a QLR-linked pipeline:
//     core 0 (Group 0, Tile 0) loads a vector from L1 and pushes it through
//     a direct QLR link to core 1 of its Tile; core 1 adds 1 and pushes the
//     words through a queue in an L1 bank of Group 2 (memory-mapped QLR);
//     core 40 (Group 2, Tile 2) pops them, multiplies by 3 on its IPU and
//     stores the products; everything is checked by loads afterwards.
//  4. The four cores of Tile 5 use its shared DIV-SQRT at the same time
//     (square roots of 1, 4, 9 and 16).
// Each mechanism (bank-conflict stall, in-Tile / in-Group / cross-Group
// access, QLR direct link, queue full/empty retry, DIV-SQRT sharing, IPU) is
// counted and must have happened at least once.
module tb_cluster;
  import hs_pkg::*;
  localparam int NCo = NumCores, NTi = NumTiles;
  localparam int WPC = 32;        // words per core in phase 2
  localparam int VEC = 24;        // stream length in phase 3

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
  logic     [NCo-1:0] ds_req_valid, ds_req_ready, ds_req_op, ds_rsp_valid;
  logic     [NCo-1:0][31:0] ds_req_a, ds_req_b;
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
    .ds_req_valid_i(ds_req_valid), .ds_req_ready_o(ds_req_ready), .ds_req_op_i(ds_req_op),
    .ds_req_a_i(ds_req_a), .ds_req_b_i(ds_req_b), .ds_rsp_valid_o(ds_rsp_valid), .ds_rsp_result_o(ds_rsp_result),
    .ipu_valid_i(ipu_valid), .ipu_op_i(ipu_op), .ipu_a_i(ipu_a), .ipu_b_i(ipu_b), .ipu_c_i(ipu_c),
    .ipu_valid_o(ipu_valid_o), .ipu_result_o(ipu_result));

  int checks = 0, failures = 0;
  int n_conflict = 0, n_local = 0, n_group = 0, n_remote = 0, n_direct = 0, n_retry = 0,
      n_ds_wait = 0, n_ipu = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // word index -> byte address (word w: bank w%256, row w/256)
  function automatic logic [31:0] waddr(input int w);
    return 32'(w) << 2;
  endfunction

  // Mechanism monitors.
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCo; c++) begin
      if (core_req_valid[c] && !core_req_ready[c]) n_conflict++;
      if (ds_req_valid[c] && !ds_req_ready[c]) n_ds_wait++;
    end
  end

  // One blocking access by core c; returns data and latency in cycles.
  task automatic access(input int c, input mem_op_e op, input logic [31:0] addr, input logic [31:0] wdata,
                        output logic [31:0] rdata, output int lat);
    int n = 0;
    core_req[c] = '0;
    core_req[c].op = op; core_req[c].addr = addr; core_req[c].wdata = wdata; core_req[c].be = 4'hf;
    core_req_valid[c] = 1'b1;
    #4;
    while (!core_req_ready[c]) begin @(negedge clk); #4; end
    @(negedge clk);
    core_req_valid[c] = 1'b0;
    lat = 1;
    while (!core_rsp_valid[c]) begin
      #4;   // response seen in the cycle it is valid, before the next edge
      if (core_rsp_valid[c]) break;
      @(negedge clk); lat++;
      if (lat > 200) begin failures++; $display("FAIL: no response core %0d", c); break; end
    end
    rdata = core_rsp[c].rdata;
    if (op == OP_LOAD) check(core_rsp[c].src == 6'(c), "response reaches the requesting core");
    @(negedge clk);
  endtask

  // Variant that samples the response at the cycle it appears (for latency).
  task automatic timed_load(input int c, input logic [31:0] addr, output logic [31:0] rdata, output int lat);
    core_req[c] = '0; core_req[c].op = OP_LOAD; core_req[c].addr = addr; core_req[c].be = 4'hf;
    core_req_valid[c] = 1'b1;
    @(posedge clk); #1;               // accepted at this edge (no contention)
    core_req_valid[c] = 1'b0;
    lat = 0;
    do begin
      if (lat > 0) begin @(posedge clk); #1; end
      lat++;
      #3;
    end while (!core_rsp_valid[c] && lat < 50);
    rdata = core_rsp[c].rdata;
    @(negedge clk);
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] pattern(input int c, input int k);
    return {8'(c), 8'(k), 16'(c * 977 + k * 131)};
  endfunction

  // Phase 2 word owned by core c, element k: unique for all (c, k).
  function automatic int owned(input int c, input int k);
    int r = k / 4;
    return ((c * 4 + (k % 4) + 37 * r) % NumBanks) + NumBanks * (r + 8);
  endfunction

  logic phase2_go = 0;
  int   phase2_done = 0;
  for (genvar gc = 0; gc < NCo; gc++) begin : g_core_drv
    initial begin
      logic [31:0] d; int lat;
      wait (phase2_go);
      for (int k = 0; k < WPC; k++) access(gc, OP_STORE, waddr(owned(gc, k)), pattern(gc, k), d, lat);
      for (int k = 0; k < WPC; k++) begin
        access(gc, OP_LOAD, waddr(owned(gc, k)), 0, d, lat);
        check(d == pattern(gc, k), $sformatf("core %0d word %0d", gc, k));
      end
      phase2_done++;
    end
  end

  logic [31:0] sq_in [4], sq_out [4];
  initial begin
    logic [31:0] d; int lat;
    core_req_valid = '0; core_req = '0; qlr_cfg_valid = '0; qlr_cfg_idx = '0; qlr_cfg = '0;
    qlr_pop_ready = '0; qlr_push_valid = '0; qlr_push_data = '0;
    ds_req_valid = '0; ds_req_op = '0; ds_req_a = '0; ds_req_b = '0;
    ipu_valid = '0; ipu_op = '0; ipu_a = '0; ipu_b = '0; ipu_c = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. latency: bank 3 of Tile 0 (own), Tile 2 of Group 0, Tile 1 of Group 3
    access(0, OP_STORE, waddr(3),        32'h1111, d, lat);
    access(0, OP_STORE, waddr(2*16 + 5), 32'h2222, d, lat);
    access(0, OP_STORE, waddr(3*64 + 16 + 9), 32'h3333, d, lat);
    timed_load(0, waddr(3), d, lat);
    check(d == 32'h1111 && lat == 1, $sformatf("own Tile: %h after %0d cycles (1)", d, lat));
    if (lat == 1) n_local++;
    timed_load(0, waddr(2*16 + 5), d, lat);
    check(d == 32'h2222 && lat == 3, $sformatf("own Group: %h after %0d cycles (3)", d, lat));
    if (lat == 3) n_group++;
    timed_load(0, waddr(3*64 + 16 + 9), d, lat);
    check(d == 32'h3333 && lat == 5, $sformatf("other Group: %h after %0d cycles (5)", d, lat));
    if (lat == 5) n_remote++;
    // every Group from core 63 (Group 3, Tile 3)
    for (int g = 0; g < 4; g++) begin
      access(63, OP_STORE, waddr(g*64 + 7), 32'h600 + g, d, lat);
      timed_load(63, waddr(g*64 + 7), d, lat);
      check(d == 32'h600 + g && lat == (g == 3 ? 3 : 5), $sformatf("core 63 -> Group %0d: %0d cycles", g, lat));
    end

    // ---- 2. all cores at once
    phase2_go = 1;
    wait (phase2_done == NCo);
    @(negedge clk);

    // ---- 3. systolic stream
    for (int i = 0; i < VEC; i++) access(0, OP_STORE, waddr(NumBanks * 20 + i), 32'(i * 5 + 2), d, lat);
    // core 1: pop-QLR 0 fed directly by core 0's push-QLR 1; push-QLR 2 into the queue of bank 2*64+2*16+4
    qlr_cfg_valid[0] = 1; qlr_cfg_idx[0] = 2'd1;
    qlr_cfg[0] = '{mode: QLR_DIRECT, push: 1'b1, addr: 32'h0, src_core: 2'd0, src_qlr: 2'd0, count: 16'(VEC)};
    qlr_cfg_valid[1] = 1; qlr_cfg_idx[1] = 2'd0;
    qlr_cfg[1] = '{mode: QLR_DIRECT, push: 1'b0, addr: 32'h0, src_core: 2'd0, src_qlr: 2'd1, count: 16'(VEC)};
    qlr_cfg_valid[40] = 1; qlr_cfg_idx[40] = 2'd3;
    qlr_cfg[40] = '{mode: QLR_MEM, push: 1'b0, addr: waddr(2*64 + 2*16 + 4), src_core: 2'd0, src_qlr: 2'd0, count: 16'(VEC)};
    @(negedge clk);
    qlr_cfg_valid[1] = 1; qlr_cfg_idx[1] = 2'd2;
    qlr_cfg[1] = '{mode: QLR_MEM, push: 1'b1, addr: waddr(2*64 + 2*16 + 4), src_core: 2'd0, src_qlr: 2'd0, count: 16'(VEC)};
    qlr_cfg_valid[0] = 0; qlr_cfg_valid[40] = 0;
    @(negedge clk);
    qlr_cfg_valid = '0;
    fork
      begin : producer   // core 0: load and push
        for (int i = 0; i < VEC; i++) begin
          access(0, OP_LOAD, waddr(NumBanks * 20 + i), 0, d, lat);
          qlr_push_valid[0][1] = 1; qlr_push_data[0][1] = d;
          #4; while (!qlr_push_ready[0][1]) begin @(negedge clk); #4; end
          @(negedge clk); qlr_push_valid[0][1] = 0;
          n_direct++;
        end
      end
      begin : middle     // core 1: pop, add 1, push
        for (int i = 0; i < VEC; i++) begin
          logic [31:0] v;
          qlr_pop_ready[1][0] = 1;
          #4; while (!qlr_pop_valid[1][0]) begin @(negedge clk); #4; end
          v = qlr_pop_data[1][0];
          @(negedge clk); qlr_pop_ready[1][0] = 0;
          qlr_push_valid[1][2] = 1; qlr_push_data[1][2] = v + 1;
          #4; while (!qlr_push_ready[1][2]) begin @(negedge clk); #4; end
          @(negedge clk); qlr_push_valid[1][2] = 0;
        end
      end
      begin : consumer   // core 40: pop, IPU multiply by 3, store; slow at first so the queue fills
        repeat (60) @(negedge clk);
        for (int i = 0; i < VEC; i++) begin
          logic [31:0] v;
          qlr_pop_ready[40][3] = 1;
          #4; while (!qlr_pop_valid[40][3]) begin @(negedge clk); #4; end
          v = qlr_pop_data[40][3];
          @(negedge clk); qlr_pop_ready[40][3] = 0;
          ipu_valid[40] = 1; ipu_op[40] = 3'd0; ipu_a[40] = v; ipu_b[40] = 32'd3;
          @(negedge clk); ipu_valid[40] = 0;
          if (ipu_valid_o[40]) n_ipu++;
          access(40, OP_STORE, waddr(NumBanks * 21 + i), ipu_result[40], d, lat);
        end
      end
    join
    for (int i = 0; i < VEC; i++) begin
      access(5, OP_LOAD, waddr(NumBanks * 21 + i), 0, d, lat);
      check(d == 32'((i * 5 + 3) * 3), $sformatf("systolic result %0d = %0d", i, d));
    end
    repeat (4) @(negedge clk);
    check(qlr_active[0][1] == 0 && qlr_active[1] == 4'b0 && qlr_active[40][3] == 0, "streams finished and switched off");

    // ---- 4. shared DIV-SQRT of Tile 5: cores 20..23, sqrt((c+1)^2) = c+1
    // binary32: 1, 4, 9, 16 and their roots 1, 2, 3, 4
    sq_in  = '{32'h3f800000, 32'h40800000, 32'h41100000, 32'h41800000};
    sq_out = '{32'h3f800000, 32'h40000000, 32'h40400000, 32'h40800000};
    for (int c = 20; c < 24; c++) begin
      ds_req_valid[c] = 1; ds_req_op[c] = 1; ds_req_a[c] = sq_in[c-20];
    end
    begin
      logic [3:0] got = '0;
      for (int t = 0; t < 300 && got != 4'hf; t++) begin
        logic [NCo-1:0] acc;
        #4; acc = ds_req_valid & ds_req_ready;
        @(negedge clk); ds_req_valid &= ~acc;
        for (int c = 20; c < 24; c++) if (ds_rsp_valid[c]) begin
          got[c-20] = 1;
          check(ds_rsp_result[5] == sq_out[c-20], $sformatf("divsqrt core %0d: %h", c, ds_rsp_result[5]));
        end
      end
      check(got == 4'hf, "all DIV-SQRT requests answered");
    end

    // ---- mechanisms
    $display("mechanisms: conflict=%0d local=%0d group=%0d remote=%0d direct=%0d retry=%0d ds_wait=%0d ipu=%0d",
             n_conflict, n_local, n_group, n_remote, n_direct, n_retry, n_ds_wait, n_ipu);
    check(n_conflict > 0, "bank-conflict stall happened");
    check(n_local > 0 && n_group > 0 && n_remote > 0, "all three latency classes seen");
    check(n_direct > 0, "direct QLR link used");
    check(n_retry > 0, "queue full/empty retry happened");
    check(n_ds_wait > 0, "DIV-SQRT contention happened");
    check(n_ipu > 0, "IPU used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // queue full/empty retries of the memory-mapped stream (core 1 push, core 40 pop)
  always @(posedge clk) if (rst_n) begin
    if (dut.g_group[0].i_group.g_tile[0].i_tile.g_core[1].i_qlr.mem_rsp_valid_i &&
        !dut.g_group[0].i_group.g_tile[0].i_tile.m_rsp[1].ok) n_retry++;
    if (dut.g_group[2].i_group.g_tile[2].i_tile.g_core[0].i_qlr.mem_rsp_valid_i &&
        !dut.g_group[2].i_group.g_tile[2].i_tile.m_rsp[0].ok) n_retry++;
  end
endmodule

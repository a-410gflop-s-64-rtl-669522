// Tile: four core complexes and sixteen 1-KiB L1 banks.
//
// What is inside (as in the paper's Tile drawing):
//  * 16 l1_bank instances, 16 KiB of the cluster's shared L1.
//  * Per core a QLR unit, an IPU, and one memory master port shared by the
//    core's load/store unit (tag 0) and its QLRs (tags 1..NumQlr), merged by a
//    round-robin arbiter.
//  * A request crossbar from the 4 core masters and the 4 incoming remote
//    ports (req_i) to the 16 banks and the 4 outgoing remote ports (req_o),
//    and a response crossbar from the 16 banks and the 4 incoming response
//    ports (rsp_i) to the 4 masters and the 4 outgoing response ports (rsp_o).
//    The paper draws separate local and remote crossbars and remote
//    arbiters; here each direction is one crossbar with the same
//    connectivity (requests arriving from outside only go to banks).
//  * Direct QLR links: a pop-QLR in QLR_DIRECT mode reads the FIFO of the
//    push-QLR (src_core, src_qlr) it is configured with, inside the Tile.
//  * One fp_divsqrt shared by the 4 cores.
//
// Routing. A request for a bank of this Tile goes straight to the bank (one
// cycle: request in cycle 0, data in cycle 1). Any other address leaves on
// remote port k = (target Group - this Group) mod 4; port 0 serves the other
// Tiles of the same Group. Requests arriving on req_i[k] come from Group
// (this Group - k). A response for a core of this Tile goes to that core;
// otherwise it leaves on rsp_o[k], k = (this Group - requester Group) mod 4,
// which is the port the request came in on. req_o and rsp_o are registered
// (pipe_reg), which with the cluster's inter-Group registers gives 1/3/5
// cycle loads. Core response ports have no back-pressure: cores and QLRs
// always accept responses. The port numbering rule is this design's choice.
module tile
  import hs_pkg::*;
(
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [GroupIdxW-1:0]          group_idx_i,
  input  logic [TileIdxW-1:0]           tile_idx_i,
  // core load/store units
  input  logic     [NumCoresPerTile-1:0] core_req_valid_i,
  output logic     [NumCoresPerTile-1:0] core_req_ready_o,
  input  mem_req_t [NumCoresPerTile-1:0] core_req_i,
  output logic     [NumCoresPerTile-1:0] core_rsp_valid_o,
  output mem_rsp_t [NumCoresPerTile-1:0] core_rsp_o,
  // QLRs
  input  logic     [NumCoresPerTile-1:0]              qlr_cfg_valid_i,
  input  logic     [NumCoresPerTile-1:0][1:0]         qlr_cfg_idx_i,
  input  qlr_cfg_t [NumCoresPerTile-1:0]              qlr_cfg_i,
  output logic     [NumCoresPerTile-1:0][NumQlr-1:0]  qlr_active_o,
  output logic     [NumCoresPerTile-1:0][NumQlr-1:0]  qlr_pop_valid_o,
  output logic     [NumCoresPerTile-1:0][NumQlr-1:0][DataWidth-1:0] qlr_pop_data_o,
  input  logic     [NumCoresPerTile-1:0][NumQlr-1:0]  qlr_pop_ready_i,
  input  logic     [NumCoresPerTile-1:0][NumQlr-1:0]  qlr_push_valid_i,
  input  logic     [NumCoresPerTile-1:0][NumQlr-1:0][DataWidth-1:0] qlr_push_data_i,
  output logic     [NumCoresPerTile-1:0][NumQlr-1:0]  qlr_push_ready_o,
  // shared FP division / square root
  input  logic [NumCoresPerTile-1:0]        ds_req_valid_i,
  output logic [NumCoresPerTile-1:0]        ds_req_ready_o,
  input  logic [NumCoresPerTile-1:0]        ds_req_op_i,
  input  logic [NumCoresPerTile-1:0][31:0]  ds_req_a_i,
  input  logic [NumCoresPerTile-1:0][31:0]  ds_req_b_i,
  output logic [NumCoresPerTile-1:0]        ds_rsp_valid_o,
  output logic [31:0]                       ds_rsp_result_o,
  // IPUs
  input  logic [NumCoresPerTile-1:0]        ipu_valid_i,
  input  logic [NumCoresPerTile-1:0][2:0]   ipu_op_i,
  input  logic [NumCoresPerTile-1:0][31:0]  ipu_a_i,
  input  logic [NumCoresPerTile-1:0][31:0]  ipu_b_i,
  input  logic [NumCoresPerTile-1:0][31:0]  ipu_c_i,
  output logic [NumCoresPerTile-1:0]        ipu_valid_o,
  output logic [NumCoresPerTile-1:0][31:0]  ipu_result_o,
  // remote ports
  output logic     [NumRemotePorts-1:0] req_o_valid_o,
  input  logic     [NumRemotePorts-1:0] req_o_ready_i,
  output mem_req_t [NumRemotePorts-1:0] req_o_o,
  input  logic     [NumRemotePorts-1:0] rsp_i_valid_i,
  output logic     [NumRemotePorts-1:0] rsp_i_ready_o,
  input  mem_rsp_t [NumRemotePorts-1:0] rsp_i_i,
  input  logic     [NumRemotePorts-1:0] req_i_valid_i,
  output logic     [NumRemotePorts-1:0] req_i_ready_o,
  input  mem_req_t [NumRemotePorts-1:0] req_i_i,
  output logic     [NumRemotePorts-1:0] rsp_o_valid_o,
  input  logic     [NumRemotePorts-1:0] rsp_o_ready_i,
  output mem_rsp_t [NumRemotePorts-1:0] rsp_o_o
);
  localparam int unsigned NC   = NumCoresPerTile;
  localparam int unsigned NB   = NumBanksPerTile;
  localparam int unsigned NR   = NumRemotePorts;
  localparam int unsigned ReqIn   = NC + NR;        // 8
  localparam int unsigned ReqOut  = NB + NR;        // 20
  localparam int unsigned RspIn   = NB + NR;        // 20
  localparam int unsigned RspOut  = NC + NR;        // 8
  localparam int unsigned ReqSelW = $clog2(ReqOut);
  localparam int unsigned RspSelW = $clog2(RspOut);

  // ---------------------------------------------------------------- masters
  logic     [NC-1:0] m_valid, m_ready;
  mem_req_t [NC-1:0] m_req;
  logic     [NC-1:0] q_req_valid, q_req_ready;
  mem_req_t [NC-1:0] q_req;
  logic     [NC-1:0] m_rsp_valid;
  mem_rsp_t [NC-1:0] m_rsp;

  logic     [NC-1:0][NumQlr-1:0]                dout_valid, dout_ready, din_valid, din_ready;
  logic     [NC-1:0][NumQlr-1:0][DataWidth-1:0] dout_data, din_data;
  qlr_cfg_t [NC-1:0][NumQlr-1:0]                qcfg;

  for (genvar c = 0; c < NC; c++) begin : g_core
    core_id_t id;
    mem_req_t lsu_req;
    assign id = {group_idx_i, tile_idx_i, 2'(c)};
    always_comb begin
      lsu_req     = core_req_i[c];
      lsu_req.src = id;
      lsu_req.tag = '0;
    end

    qlr i_qlr (
      .clk_i, .rst_ni,
      .core_id_i      (id),
      .cfg_valid_i    (qlr_cfg_valid_i[c]),
      .cfg_idx_i      (qlr_cfg_idx_i[c]),
      .cfg_i          (qlr_cfg_i[c]),
      .active_o       (qlr_active_o[c]),
      .cfg_o          (qcfg[c]),
      .pop_valid_o    (qlr_pop_valid_o[c]),
      .pop_data_o     (qlr_pop_data_o[c]),
      .pop_ready_i    (qlr_pop_ready_i[c]),
      .push_valid_i   (qlr_push_valid_i[c]),
      .push_data_i    (qlr_push_data_i[c]),
      .push_ready_o   (qlr_push_ready_o[c]),
      .dout_valid_o   (dout_valid[c]),
      .dout_data_o    (dout_data[c]),
      .dout_ready_i   (dout_ready[c]),
      .din_valid_i    (din_valid[c]),
      .din_data_i     (din_data[c]),
      .din_ready_o    (din_ready[c]),
      .mem_req_valid_o(q_req_valid[c]),
      .mem_req_ready_i(q_req_ready[c]),
      .mem_req_o      (q_req[c]),
      .mem_rsp_valid_i(m_rsp_valid[c] && m_rsp[c].tag != '0),
      .mem_rsp_i      (m_rsp[c])
    );

    logic [1:0] mux_ready;
    rr_arbiter #(.NumIn(2), .payload_t(mem_req_t)) i_master_arb (
      .clk_i, .rst_ni,
      .in_valid_i ({q_req_valid[c], core_req_valid_i[c]}),
      .in_ready_o (mux_ready),
      .in_data_i  ({q_req[c], lsu_req}),
      .out_valid_o(m_valid[c]),
      .out_ready_i(m_ready[c]),
      .out_data_o (m_req[c]),
      .out_idx_o  ()
    );
    assign core_req_ready_o[c] = mux_ready[0];
    assign q_req_ready[c]      = mux_ready[1];

    assign core_rsp_valid_o[c] = m_rsp_valid[c] && (m_rsp[c].tag == '0);
    assign core_rsp_o[c]       = m_rsp[c];

    ipu i_ipu (
      .clk_i, .rst_ni,
      .in_valid_i (ipu_valid_i[c]),
      .op_i       (ipu_op_i[c]),
      .op_a_i     (ipu_a_i[c]),
      .op_b_i     (ipu_b_i[c]),
      .op_c_i     (ipu_c_i[c]),
      .out_valid_o(ipu_valid_o[c]),
      .result_o   (ipu_result_o[c])
    );
  end

  // Direct QLR links inside the Tile.
  always_comb begin
    dout_ready = '0;
    for (int unsigned c = 0; c < NC; c++) begin
      for (int unsigned q = 0; q < NumQlr; q++) begin
        din_valid[c][q] = dout_valid[qcfg[c][q].src_core][qcfg[c][q].src_qlr];
        din_data[c][q]  = dout_data[qcfg[c][q].src_core][qcfg[c][q].src_qlr];
        if (qcfg[c][q].mode == QLR_DIRECT && !qcfg[c][q].push)
          dout_ready[qcfg[c][q].src_core][qcfg[c][q].src_qlr] |= din_ready[c][q];
      end
    end
  end

  // ---------------------------------------------------------- request xbar
  logic     [ReqIn-1:0]               rq_in_valid, rq_in_ready;
  mem_req_t [ReqIn-1:0]               rq_in_data;
  logic     [ReqIn-1:0][ReqSelW-1:0]  rq_in_sel;
  logic     [ReqOut-1:0]              rq_out_valid, rq_out_ready;
  mem_req_t [ReqOut-1:0]              rq_out_data;

  always_comb begin
    for (int unsigned c = 0; c < NC; c++) begin
      rq_in_valid[c] = m_valid[c];
      rq_in_data[c]  = m_req[c];
      if (addr_group(m_req[c].addr) == group_idx_i && addr_tile(m_req[c].addr) == tile_idx_i)
        rq_in_sel[c] = ReqSelW'(addr_bank(m_req[c].addr));
      else  // remote port: (target Group - this Group) mod NumGroups
        rq_in_sel[c] = ReqSelW'(NB) + ReqSelW'(GroupIdxW'(addr_group(m_req[c].addr) - group_idx_i));
      m_ready[c] = rq_in_ready[c];
    end
    for (int unsigned k = 0; k < NR; k++) begin
      rq_in_valid[NC+k] = req_i_valid_i[k];
      rq_in_data[NC+k]  = req_i_i[k];
      rq_in_sel[NC+k]   = ReqSelW'(addr_bank(req_i_i[k].addr));
      req_i_ready_o[k]  = rq_in_ready[NC+k];
    end
  end

  xbar #(.NumIn(ReqIn), .NumOut(ReqOut), .payload_t(mem_req_t)) i_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (rq_in_valid),
    .in_ready_o (rq_in_ready),
    .in_data_i  (rq_in_data),
    .in_sel_i   (rq_in_sel),
    .out_valid_o(rq_out_valid),
    .out_ready_i(rq_out_ready),
    .out_data_o (rq_out_data),
    .out_src_o  ()
  );

  // ------------------------------------------------------------------ banks
  logic     [RspIn-1:0]               rs_in_valid, rs_in_ready;
  mem_rsp_t [RspIn-1:0]               rs_in_data;
  logic     [RspIn-1:0][RspSelW-1:0]  rs_in_sel;
  logic     [RspOut-1:0]              rs_out_valid, rs_out_ready;
  logic     [NB-1:0]                  bank_rsp_valid;
  mem_rsp_t [NB-1:0]                  bank_rsp;
  mem_rsp_t [RspOut-1:0]              rs_out_data;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    l1_bank i_bank (
      .clk_i, .rst_ni,
      .req_valid_i(rq_out_valid[b]),
      .req_ready_o(rq_out_ready[b]),
      .req_i      (rq_out_data[b]),
      .rsp_valid_o(bank_rsp_valid[b]),
      .rsp_ready_i(rs_in_ready[b]),
      .rsp_o      (bank_rsp[b])
    );
  end

  // Registered remote request and response outputs.
  for (genvar k = 0; k < NR; k++) begin : g_remote
    pipe_reg #(.payload_t(mem_req_t)) i_req_reg (
      .clk_i, .rst_ni,
      .in_valid_i (rq_out_valid[NB+k]),
      .in_ready_o (rq_out_ready[NB+k]),
      .in_data_i  (rq_out_data[NB+k]),
      .out_valid_o(req_o_valid_o[k]),
      .out_ready_i(req_o_ready_i[k]),
      .out_data_o (req_o_o[k])
    );
    pipe_reg #(.payload_t(mem_rsp_t)) i_rsp_reg (
      .clk_i, .rst_ni,
      .in_valid_i (rs_out_valid[NC+k]),
      .in_ready_o (rs_out_ready[NC+k]),
      .in_data_i  (rs_out_data[NC+k]),
      .out_valid_o(rsp_o_valid_o[k]),
      .out_ready_i(rsp_o_ready_i[k]),
      .out_data_o (rsp_o_o[k])
    );
  end

  // --------------------------------------------------------- response xbar
  always_comb begin
    for (int unsigned b = 0; b < NB; b++) begin
      rs_in_valid[b] = bank_rsp_valid[b];
      rs_in_data[b]  = bank_rsp[b];
      if (id_group(bank_rsp[b].src) == group_idx_i && id_tile(bank_rsp[b].src) == tile_idx_i)
        rs_in_sel[b] = RspSelW'(id_core(bank_rsp[b].src));
      else  // remote port: (this Group - requesting Group) mod NumGroups
        rs_in_sel[b] = RspSelW'(NC) + RspSelW'(GroupIdxW'(group_idx_i - id_group(bank_rsp[b].src)));
    end
    for (int unsigned k = 0; k < NR; k++) begin
      rs_in_valid[NB+k] = rsp_i_valid_i[k];
      rs_in_data[NB+k]  = rsp_i_i[k];
      rs_in_sel[NB+k]   = RspSelW'(id_core(rsp_i_i[k].src));
      rsp_i_ready_o[k]  = rs_in_ready[NB+k];
    end
  end

  // Cores and QLRs always take their responses.
  assign rs_out_ready[NC-1:0] = '1;
  assign m_rsp_valid          = rs_out_valid[NC-1:0];
  assign m_rsp                = rs_out_data[NC-1:0];

  xbar #(.NumIn(RspIn), .NumOut(RspOut), .payload_t(mem_rsp_t)) i_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (rs_in_valid),
    .in_ready_o (rs_in_ready),
    .in_data_i  (rs_in_data),
    .in_sel_i   (rs_in_sel),
    .out_valid_o(rs_out_valid),
    .out_ready_i(rs_out_ready),
    .out_data_o (rs_out_data),
    .out_src_o  ()
  );

  // ------------------------------------------------------- shared DIV-SQRT
  fp_divsqrt #(.NumCores(NC)) i_divsqrt (
    .clk_i, .rst_ni,
    .req_valid_i (ds_req_valid_i),
    .req_ready_o (ds_req_ready_o),
    .req_op_i    (ds_req_op_i),
    .req_a_i     (ds_req_a_i),
    .req_b_i     (ds_req_b_i),
    .rsp_valid_o (ds_rsp_valid_o),
    .rsp_result_o(ds_rsp_result_o)
  );

endmodule

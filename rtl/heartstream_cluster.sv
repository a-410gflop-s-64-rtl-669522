// Shared-L1 cluster top: 64 core ports, 256 KiB of L1 in 256 banks.
//
// Four Groups of four Tiles of four cores. Any core can load from or store
// to any of the 256 banks: in 1 cycle inside its Tile, 3 cycles inside its
// Group and 5 cycles in another Group. The Groups are joined pairwise, each
// Group sending on direction k = 1..3 to Group (g+k) mod 4; every one of these
// links carries four Tile lanes and is registered once in each direction
// (pipe_reg), which is what makes the cross-Group access two cycles longer
// than the in-Group one. QLR streams between cores of different Tiles run
// through queues in the L1 banks over this same network.
//
// The ports are those of the 64 core complexes, indexed by the global core
// id {group, tile, core}: load/store unit requests, QLR configuration and
// register streams, the Tile-shared FP division/square-root units (one
// result bus per Tile) and the IPUs. The RISC-V cores themselves, the
// instruction caches, the DMA, the AXI side (L2, peripherals, off-chip
// links) and the clock generation are not part of this RTL.
// All structure and sizes follow the paper; the link registering is this
// design's way to meet the paper's 1-5 cycle latency.
module heartstream_cluster
  import hs_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  input  logic     [NumCores-1:0] core_req_valid_i,
  output logic     [NumCores-1:0] core_req_ready_o,
  input  mem_req_t [NumCores-1:0] core_req_i,
  output logic     [NumCores-1:0] core_rsp_valid_o,
  output mem_rsp_t [NumCores-1:0] core_rsp_o,
  input  logic     [NumCores-1:0] qlr_cfg_valid_i,
  input  logic     [NumCores-1:0][1:0] qlr_cfg_idx_i,
  input  qlr_cfg_t [NumCores-1:0] qlr_cfg_i,
  output logic     [NumCores-1:0][NumQlr-1:0] qlr_active_o,
  output logic     [NumCores-1:0][NumQlr-1:0] qlr_pop_valid_o,
  output logic     [NumCores-1:0][NumQlr-1:0][DataWidth-1:0] qlr_pop_data_o,
  input  logic     [NumCores-1:0][NumQlr-1:0] qlr_pop_ready_i,
  input  logic     [NumCores-1:0][NumQlr-1:0] qlr_push_valid_i,
  input  logic     [NumCores-1:0][NumQlr-1:0][DataWidth-1:0] qlr_push_data_i,
  output logic     [NumCores-1:0][NumQlr-1:0] qlr_push_ready_o,
  input  logic     [NumCores-1:0] ds_req_valid_i,
  output logic     [NumCores-1:0] ds_req_ready_o,
  input  logic     [NumCores-1:0] ds_req_op_i,
  input  logic     [NumCores-1:0][31:0] ds_req_a_i,
  input  logic     [NumCores-1:0][31:0] ds_req_b_i,
  output logic     [NumCores-1:0] ds_rsp_valid_o,
  input  logic     [NumCores-1:0] ipu_valid_i,
  input  logic     [NumCores-1:0][2:0] ipu_op_i,
  input  logic     [NumCores-1:0][31:0] ipu_a_i,
  input  logic     [NumCores-1:0][31:0] ipu_b_i,
  input  logic     [NumCores-1:0][31:0] ipu_c_i,
  output logic     [NumCores-1:0] ipu_valid_o,
  output logic     [NumCores-1:0][31:0] ipu_result_o,
  output logic     [NumTiles-1:0][31:0] ds_rsp_result_o
);
  localparam int unsigned NT  = NumTilesPerGroup;
  localparam int unsigned NR  = NumRemotePorts;
  localparam int unsigned CPG = NumTilesPerGroup * NumCoresPerTile;

  logic     [NumGroups-1:0][NR-1:1][NT-1:0] req_o_valid, req_o_ready, req_i_valid, req_i_ready;
  mem_req_t [NumGroups-1:0][NR-1:1][NT-1:0] req_o, req_i;
  logic     [NumGroups-1:0][NR-1:1][NT-1:0] rsp_o_valid, rsp_o_ready, rsp_i_valid, rsp_i_ready;
  mem_rsp_t [NumGroups-1:0][NR-1:1][NT-1:0] rsp_o, rsp_i;

  for (genvar g = 0; g < NumGroups; g++) begin : g_group
    group i_group (
      .clk_i, .rst_ni,
      .group_idx_i      (GroupIdxW'(g)),
      .core_req_valid_i (core_req_valid_i[g*CPG +: CPG]),
      .core_req_ready_o (core_req_ready_o[g*CPG +: CPG]),
      .core_req_i       (core_req_i[g*CPG +: CPG]),
      .core_rsp_valid_o (core_rsp_valid_o[g*CPG +: CPG]),
      .core_rsp_o       (core_rsp_o[g*CPG +: CPG]),
      .qlr_cfg_valid_i  (qlr_cfg_valid_i[g*CPG +: CPG]),
      .qlr_cfg_idx_i    (qlr_cfg_idx_i[g*CPG +: CPG]),
      .qlr_cfg_i        (qlr_cfg_i[g*CPG +: CPG]),
      .qlr_active_o     (qlr_active_o[g*CPG +: CPG]),
      .qlr_pop_valid_o  (qlr_pop_valid_o[g*CPG +: CPG]),
      .qlr_pop_data_o   (qlr_pop_data_o[g*CPG +: CPG]),
      .qlr_pop_ready_i  (qlr_pop_ready_i[g*CPG +: CPG]),
      .qlr_push_valid_i (qlr_push_valid_i[g*CPG +: CPG]),
      .qlr_push_data_i  (qlr_push_data_i[g*CPG +: CPG]),
      .qlr_push_ready_o (qlr_push_ready_o[g*CPG +: CPG]),
      .ds_req_valid_i   (ds_req_valid_i[g*CPG +: CPG]),
      .ds_req_ready_o   (ds_req_ready_o[g*CPG +: CPG]),
      .ds_req_op_i      (ds_req_op_i[g*CPG +: CPG]),
      .ds_req_a_i       (ds_req_a_i[g*CPG +: CPG]),
      .ds_req_b_i       (ds_req_b_i[g*CPG +: CPG]),
      .ds_rsp_valid_o   (ds_rsp_valid_o[g*CPG +: CPG]),
      .ipu_valid_i      (ipu_valid_i[g*CPG +: CPG]),
      .ipu_op_i         (ipu_op_i[g*CPG +: CPG]),
      .ipu_a_i          (ipu_a_i[g*CPG +: CPG]),
      .ipu_b_i          (ipu_b_i[g*CPG +: CPG]),
      .ipu_c_i          (ipu_c_i[g*CPG +: CPG]),
      .ipu_valid_o      (ipu_valid_o[g*CPG +: CPG]),
      .ipu_result_o     (ipu_result_o[g*CPG +: CPG]),
      .ds_rsp_result_o  (ds_rsp_result_o[g*NT +: NT]),
      .ext_req_valid_o  (req_o_valid[g]),
      .ext_req_ready_i  (req_o_ready[g]),
      .ext_req_o        (req_o[g]),
      .ext_req_valid_i  (req_i_valid[g]),
      .ext_req_ready_o  (req_i_ready[g]),
      .ext_req_i        (req_i[g]),
      .ext_rsp_valid_o  (rsp_o_valid[g]),
      .ext_rsp_ready_i  (rsp_o_ready[g]),
      .ext_rsp_o        (rsp_o[g]),
      .ext_rsp_valid_i  (rsp_i_valid[g]),
      .ext_rsp_ready_o  (rsp_i_ready[g]),
      .ext_rsp_i        (rsp_i[g])
    );

    // Links leaving Group g: requests to Group (g+k), responses to Group (g-k).
    for (genvar k = 1; k < NR; k++) begin : g_dir
      localparam int unsigned ReqDst = (g + k) % NumGroups;
      localparam int unsigned RspDst = (g + NumGroups - k) % NumGroups;
      for (genvar t = 0; t < NT; t++) begin : g_lane
        pipe_reg #(.payload_t(mem_req_t)) i_req_link (
          .clk_i, .rst_ni,
          .in_valid_i (req_o_valid[g][k][t]),
          .in_ready_o (req_o_ready[g][k][t]),
          .in_data_i  (req_o[g][k][t]),
          .out_valid_o(req_i_valid[ReqDst][k][t]),
          .out_ready_i(req_i_ready[ReqDst][k][t]),
          .out_data_o (req_i[ReqDst][k][t])
        );
        pipe_reg #(.payload_t(mem_rsp_t)) i_rsp_link (
          .clk_i, .rst_ni,
          .in_valid_i (rsp_o_valid[g][k][t]),
          .in_ready_o (rsp_o_ready[g][k][t]),
          .in_data_i  (rsp_o[g][k][t]),
          .out_valid_o(rsp_i_valid[RspDst][k][t]),
          .out_ready_i(rsp_i_ready[RspDst][k][t]),
          .out_data_o (rsp_i[RspDst][k][t])
        );
      end
    end
  end

endmodule

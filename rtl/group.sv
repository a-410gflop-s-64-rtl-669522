// Group: four Tiles and the 4x4 crossbars that join them.
//
// Every Tile has four remote request ports and four remote response ports.
// Port 0 of all four Tiles meets in the Group's local 4x4 request and
// response crossbars, which connect the Tiles of this Group with each other.
// Port k = 1..3 of all four Tiles meets in the 4x4 crossbars for direction
// k, whose outputs leave the Group towards Group (g+k) mod 4 for requests
// and Group (g-k) mod 4 for responses; requests and responses arriving from
// other Groups on direction k enter Tile t directly on its port k. A request
// picks its output by the target Tile field of the address, a response by
// the Tile field of the requesting core's id. The crossbars are
// combinational; the Tiles register what they send out, so a load from
// another Tile of the same Group takes 3 cycles.
// The four Groups with one local and three outward 4x4 crossbars follow the
// paper's Group drawing; the direction numbering is this design's choice.
// Core-side ports are those of the four Tiles, indexed [tile][core].
module group
  import hs_pkg::*;
(
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [GroupIdxW-1:0]   group_idx_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] core_req_valid_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] core_req_ready_o,
  input  mem_req_t [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] core_req_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] core_rsp_valid_o,
  output mem_rsp_t [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] core_rsp_o,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] qlr_cfg_valid_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][1:0] qlr_cfg_idx_i,
  input  qlr_cfg_t [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] qlr_cfg_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0] qlr_active_o,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0] qlr_pop_valid_o,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0][DataWidth-1:0] qlr_pop_data_o,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0] qlr_pop_ready_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0] qlr_push_valid_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0][DataWidth-1:0] qlr_push_data_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][NumQlr-1:0] qlr_push_ready_o,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] ds_req_valid_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] ds_req_ready_o,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] ds_req_op_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][31:0] ds_req_a_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][31:0] ds_req_b_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] ds_rsp_valid_o,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] ipu_valid_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][2:0] ipu_op_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][31:0] ipu_a_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][31:0] ipu_b_i,
  input  logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][31:0] ipu_c_i,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0] ipu_valid_o,
  output logic     [NumTilesPerGroup-1:0][NumCoresPerTile-1:0][31:0] ipu_result_o,
  output logic     [NumTilesPerGroup-1:0][31:0] ds_rsp_result_o,
  // links to the other Groups, direction k = 1..3, indexed [k][tile]
  output logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_req_valid_o,
  input  logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_req_ready_i,
  output mem_req_t [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_req_o,
  input  logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_req_valid_i,
  output logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_req_ready_o,
  input  mem_req_t [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_req_i,
  output logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_rsp_valid_o,
  input  logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_rsp_ready_i,
  output mem_rsp_t [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_rsp_o,
  input  logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_rsp_valid_i,
  output logic     [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_rsp_ready_o,
  input  mem_rsp_t [NumRemotePorts-1:1][NumTilesPerGroup-1:0] ext_rsp_i
);
  localparam int unsigned NT = NumTilesPerGroup;
  localparam int unsigned NR = NumRemotePorts;

  // Tile remote ports, indexed [tile][port].
  logic     [NT-1:0][NR-1:0] t_req_o_valid, t_req_o_ready, t_req_i_valid, t_req_i_ready;
  mem_req_t [NT-1:0][NR-1:0] t_req_o, t_req_i;
  logic     [NT-1:0][NR-1:0] t_rsp_o_valid, t_rsp_o_ready, t_rsp_i_valid, t_rsp_i_ready;
  mem_rsp_t [NT-1:0][NR-1:0] t_rsp_o, t_rsp_i;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    tile i_tile (
      .clk_i, .rst_ni,
      .group_idx_i      (group_idx_i),
      .tile_idx_i       (TileIdxW'(t)),
      .core_req_valid_i (core_req_valid_i[t]),
      .core_req_ready_o (core_req_ready_o[t]),
      .core_req_i       (core_req_i[t]),
      .core_rsp_valid_o (core_rsp_valid_o[t]),
      .core_rsp_o       (core_rsp_o[t]),
      .qlr_cfg_valid_i  (qlr_cfg_valid_i[t]),
      .qlr_cfg_idx_i    (qlr_cfg_idx_i[t]),
      .qlr_cfg_i        (qlr_cfg_i[t]),
      .qlr_active_o     (qlr_active_o[t]),
      .qlr_pop_valid_o  (qlr_pop_valid_o[t]),
      .qlr_pop_data_o   (qlr_pop_data_o[t]),
      .qlr_pop_ready_i  (qlr_pop_ready_i[t]),
      .qlr_push_valid_i (qlr_push_valid_i[t]),
      .qlr_push_data_i  (qlr_push_data_i[t]),
      .qlr_push_ready_o (qlr_push_ready_o[t]),
      .ds_req_valid_i   (ds_req_valid_i[t]),
      .ds_req_ready_o   (ds_req_ready_o[t]),
      .ds_req_op_i      (ds_req_op_i[t]),
      .ds_req_a_i       (ds_req_a_i[t]),
      .ds_req_b_i       (ds_req_b_i[t]),
      .ds_rsp_valid_o   (ds_rsp_valid_o[t]),
      .ipu_valid_i      (ipu_valid_i[t]),
      .ipu_op_i         (ipu_op_i[t]),
      .ipu_a_i          (ipu_a_i[t]),
      .ipu_b_i          (ipu_b_i[t]),
      .ipu_c_i          (ipu_c_i[t]),
      .ipu_valid_o      (ipu_valid_o[t]),
      .ipu_result_o     (ipu_result_o[t]),
      .ds_rsp_result_o  (ds_rsp_result_o[t]),
      .req_o_valid_o    (t_req_o_valid[t]),
      .req_o_ready_i    (t_req_o_ready[t]),
      .req_o_o          (t_req_o[t]),
      .rsp_i_valid_i    (t_rsp_i_valid[t]),
      .rsp_i_ready_o    (t_rsp_i_ready[t]),
      .rsp_i_i          (t_rsp_i[t]),
      .req_i_valid_i    (t_req_i_valid[t]),
      .req_i_ready_o    (t_req_i_ready[t]),
      .req_i_i          (t_req_i[t]),
      .rsp_o_valid_o    (t_rsp_o_valid[t]),
      .rsp_o_ready_i    (t_rsp_o_ready[t]),
      .rsp_o_o          (t_rsp_o[t])
    );
  end

  for (genvar k = 0; k < NR; k++) begin : g_dir
    logic     [NT-1:0]               rq_in_valid, rq_in_ready, rq_out_valid, rq_out_ready;
    mem_req_t [NT-1:0]               rq_in, rq_out;
    logic     [NT-1:0][TileIdxW-1:0] rq_sel;
    logic     [NT-1:0]               rs_in_valid, rs_in_ready, rs_out_valid, rs_out_ready;
    mem_rsp_t [NT-1:0]               rs_in, rs_out;
    logic     [NT-1:0][TileIdxW-1:0] rs_sel;

    for (genvar t = 0; t < NT; t++) begin : g_t
      assign rq_in_valid[t]         = t_req_o_valid[t][k];
      assign rq_in[t]               = t_req_o[t][k];
      assign rq_sel[t]              = addr_tile(t_req_o[t][k].addr);
      assign t_req_o_ready[t][k]    = rq_in_ready[t];
      assign rs_in_valid[t]         = t_rsp_o_valid[t][k];
      assign rs_in[t]               = t_rsp_o[t][k];
      assign rs_sel[t]              = id_tile(t_rsp_o[t][k].src);
      assign t_rsp_o_ready[t][k]    = rs_in_ready[t];
      if (k == 0) begin : g_local
        assign t_req_i_valid[t][k]  = rq_out_valid[t];
        assign t_req_i[t][k]        = rq_out[t];
        assign rq_out_ready[t]      = t_req_i_ready[t][k];
        assign t_rsp_i_valid[t][k]  = rs_out_valid[t];
        assign t_rsp_i[t][k]        = rs_out[t];
        assign rs_out_ready[t]      = t_rsp_i_ready[t][k];
      end else begin : g_ext
        assign ext_req_valid_o[k][t] = rq_out_valid[t];
        assign ext_req_o[k][t]       = rq_out[t];
        assign rq_out_ready[t]       = ext_req_ready_i[k][t];
        assign ext_rsp_valid_o[k][t] = rs_out_valid[t];
        assign ext_rsp_o[k][t]       = rs_out[t];
        assign rs_out_ready[t]       = ext_rsp_ready_i[k][t];
        assign t_req_i_valid[t][k]   = ext_req_valid_i[k][t];
        assign t_req_i[t][k]         = ext_req_i[k][t];
        assign ext_req_ready_o[k][t] = t_req_i_ready[t][k];
        assign t_rsp_i_valid[t][k]   = ext_rsp_valid_i[k][t];
        assign t_rsp_i[t][k]         = ext_rsp_i[k][t];
        assign ext_rsp_ready_o[k][t] = t_rsp_i_ready[t][k];
      end
    end

    xbar #(.NumIn(NT), .NumOut(NT), .payload_t(mem_req_t)) i_req_xbar (
      .clk_i, .rst_ni,
      .in_valid_i (rq_in_valid), .in_ready_o (rq_in_ready), .in_data_i (rq_in), .in_sel_i (rq_sel),
      .out_valid_o(rq_out_valid), .out_ready_i(rq_out_ready), .out_data_o(rq_out), .out_src_o()
    );
    xbar #(.NumIn(NT), .NumOut(NT), .payload_t(mem_rsp_t)) i_rsp_xbar (
      .clk_i, .rst_ni,
      .in_valid_i (rs_in_valid), .in_ready_o (rs_in_ready), .in_data_i (rs_in), .in_sel_i (rs_sel),
      .out_valid_o(rs_out_valid), .out_ready_i(rs_out_ready), .out_data_o(rs_out), .out_src_o()
    );
  end

endmodule

// Queue-linked registers (QLRs) of one core.
//
// A QLR ties one architectural register of the core to a stream. Once
// configured, it works without further instructions:
//   pop-QLR   the unit fetches words from its source ahead of time into a
//             small FIFO; each core read of the register takes the oldest word
//             (pop_* port) and stalls while the FIFO is empty.
//   push-QLR  each write-back of the core to the register is snooped into a
//             FIFO (push_* port, stalls while full); the unit forwards the
//             words to its destination in order.
// The source or destination is either a queue in an L1 bank (QLR_MEM; the
// unit issues OP_QPOP / OP_QPUSH requests to cfg.addr through the L1
// interconnect and retries a request that finds the queue empty or full) or
// the direct link to another core of the same Tile (QLR_DIRECT; din_*/dout_*
// ports, wired by the Tile). This follows the paper: direct connections
// inside a Tile, memory-mapped queues across Tiles, configuration once at
// program start.
//
// Choices of this design, where the paper gives no detail: NumQlr QLRs per
// core, QlrDepth-entry FIFOs, up to QlrDepth outstanding pops but one
// outstanding push per QLR (this keeps pushes in order across retries), an
// element count after which the QLR stops (0 = unlimited), and a memory port
// that the Tile shares with the core's load/store unit. Responses to this
// unit carry tag q+1 for QLR q and are always accepted.
// Writing a configuration resets that QLR's FIFO and counters.
module qlr
  import hs_pkg::*;
#(
  parameter int unsigned NQlr   = hs_pkg::NumQlr,
  parameter int unsigned Depth  = hs_pkg::QlrDepth,
  localparam int unsigned QIdxW = (NQlr > 1) ? $clog2(NQlr) : 1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  core_id_t                    core_id_i,
  // configuration
  input  logic                        cfg_valid_i,
  input  logic [QIdxW-1:0]            cfg_idx_i,
  input  qlr_cfg_t                    cfg_i,
  output logic [NQlr-1:0]             active_o,
  output qlr_cfg_t [NQlr-1:0]         cfg_o,
  // core side
  output logic [NQlr-1:0]             pop_valid_o,
  output logic [NQlr-1:0][DataWidth-1:0] pop_data_o,
  input  logic [NQlr-1:0]             pop_ready_i,
  input  logic [NQlr-1:0]             push_valid_i,
  input  logic [NQlr-1:0][DataWidth-1:0] push_data_i,
  output logic [NQlr-1:0]             push_ready_o,
  // direct links inside the Tile
  output logic [NQlr-1:0]             dout_valid_o,
  output logic [NQlr-1:0][DataWidth-1:0] dout_data_o,
  input  logic [NQlr-1:0]             dout_ready_i,
  input  logic [NQlr-1:0]             din_valid_i,
  input  logic [NQlr-1:0][DataWidth-1:0] din_data_i,
  output logic [NQlr-1:0]             din_ready_o,
  // L1 memory port
  output logic                        mem_req_valid_o,
  input  logic                        mem_req_ready_i,
  output mem_req_t                    mem_req_o,
  input  logic                        mem_rsp_valid_i,
  input  mem_rsp_t                    mem_rsp_i
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;
  localparam int unsigned CntW = $clog2(Depth + 1);

  qlr_cfg_t [NQlr-1:0]            cfg_q;
  logic [DataWidth-1:0]           fifo_q [NQlr][Depth];
  logic [NQlr-1:0][PtrW-1:0]      rptr_q, wptr_q;
  logic [NQlr-1:0][CntW-1:0]      cnt_q, outst_q;
  logic [NQlr-1:0]                inflight_q;
  logic [NQlr-1:0][15:0]          left_q;
  logic [NQlr-1:0]                unlim_q;

  logic [NQlr-1:0]                is_pop, is_push, is_mem, is_dir, more;
  logic [NQlr-1:0]                wr_en, rd_en;
  logic [NQlr-1:0][DataWidth-1:0] wr_data;
  logic [NQlr-1:0]                mreq_valid, mreq_ready;
  mem_req_t [NQlr-1:0]            mreq;
  logic [NQlr-1:0]                rsp_hit;

  function automatic logic [PtrW-1:0] pinc(logic [PtrW-1:0] p);
    return (int'(p) == Depth - 1) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    for (int unsigned q = 0; q < NQlr; q++) begin
      is_pop[q]  = (cfg_q[q].mode != QLR_OFF) && !cfg_q[q].push;
      is_push[q] = (cfg_q[q].mode != QLR_OFF) &&  cfg_q[q].push;
      is_mem[q]  = (cfg_q[q].mode == QLR_MEM);
      is_dir[q]  = (cfg_q[q].mode == QLR_DIRECT);
      more[q]    = unlim_q[q] || (left_q[q] != '0);
      rsp_hit[q] = mem_rsp_valid_i && (int'(mem_rsp_i.tag) == q + 1);

      // core side
      pop_valid_o[q]  = is_pop[q] && (cnt_q[q] != '0);
      pop_data_o[q]   = fifo_q[q][rptr_q[q]];
      push_ready_o[q] = is_push[q] && more[q] && (int'(cnt_q[q]) < Depth);

      // direct links
      dout_valid_o[q] = is_push[q] && is_dir[q] && (cnt_q[q] != '0);
      dout_data_o[q]  = fifo_q[q][rptr_q[q]];
      din_ready_o[q]  = is_pop[q] && is_dir[q] && more[q] && (int'(cnt_q[q]) < Depth);

      // memory requests
      mreq[q]       = '0;
      mreq[q].addr  = cfg_q[q].addr;
      mreq[q].be    = 4'hf;
      mreq[q].src   = core_id_i;
      mreq[q].tag   = TagWidth'(q + 1);
      mreq[q].wdata = fifo_q[q][rptr_q[q]];
      mreq[q].op    = is_push[q] ? OP_QPUSH : OP_QPOP;
      mreq_valid[q] = is_mem[q] && (is_pop[q]
                        ? (more[q] && (int'(cnt_q[q]) + int'(outst_q[q]) < Depth))
                        : (!inflight_q[q] && (cnt_q[q] != '0)));

    end
  end

  // FIFO write/read enables (kept apart from the handshake outputs above so
  // that no output depends combinationally on a ready input of the links).
  always_comb begin
    for (int unsigned q = 0; q < NQlr; q++) begin
      wr_en[q]   = 1'b0;
      wr_data[q] = '0;
      rd_en[q]   = 1'b0;
      if (is_pop[q]) begin
        if (is_mem[q] && rsp_hit[q] && mem_rsp_i.ok) begin
          wr_en[q] = 1'b1; wr_data[q] = mem_rsp_i.rdata;
        end
        if (is_dir[q] && din_valid_i[q] && din_ready_o[q]) begin
          wr_en[q] = 1'b1; wr_data[q] = din_data_i[q];
        end
        rd_en[q] = pop_valid_o[q] && pop_ready_i[q];
      end else if (is_push[q]) begin
        wr_en[q]   = push_valid_i[q] && push_ready_o[q];
        wr_data[q] = push_data_i[q];
        rd_en[q]   = (is_mem[q] && rsp_hit[q] && mem_rsp_i.ok) ||
                     (is_dir[q] && dout_valid_o[q] && dout_ready_i[q]);
      end
    end
  end

  rr_arbiter #(.NumIn(NQlr), .payload_t(mem_req_t)) i_arb (
    .clk_i, .rst_ni,
    .in_valid_i (mreq_valid),
    .in_ready_o (mreq_ready),
    .in_data_i  (mreq),
    .out_valid_o(mem_req_valid_o),
    .out_ready_i(mem_req_ready_i),
    .out_data_o (mem_req_o),
    .out_idx_o  ()
  );

  logic [NQlr-1:0] issued;
  assign issued = mreq_valid & mreq_ready;

  always_ff @(posedge clk_i) begin
    for (int unsigned q = 0; q < NQlr; q++)
      if (wr_en[q]) fifo_q[q][wptr_q[q]] <= wr_data[q];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q      <= '0;
      rptr_q     <= '0;
      wptr_q     <= '0;
      cnt_q      <= '0;
      outst_q    <= '0;
      inflight_q <= '0;
      left_q     <= '0;
      unlim_q    <= '0;
    end else begin
      for (int unsigned q = 0; q < NQlr; q++) begin
        if (cfg_valid_i && int'(cfg_idx_i) == q) begin
          cfg_q[q]      <= cfg_i;
          rptr_q[q]     <= '0;
          wptr_q[q]     <= '0;
          cnt_q[q]      <= '0;
          outst_q[q]    <= '0;
          inflight_q[q] <= 1'b0;
          left_q[q]     <= cfg_i.count;
          unlim_q[q]    <= (cfg_i.count == '0);
        end else begin
          if (wr_en[q]) wptr_q[q] <= pinc(wptr_q[q]);
          if (rd_en[q]) rptr_q[q] <= pinc(rptr_q[q]);
          cnt_q[q] <= cnt_q[q] + CntW'(wr_en[q]) - CntW'(rd_en[q]);
          if (is_pop[q]) begin
            outst_q[q] <= outst_q[q] + CntW'(issued[q]) - CntW'(rsp_hit[q]);
            // count elements: issued pops minus failed ones, or direct words
            if (!unlim_q[q]) begin
              if (is_mem[q])
                left_q[q] <= left_q[q] - 16'(issued[q]) + 16'(rsp_hit[q] && !mem_rsp_i.ok);
              else if (wr_en[q])
                left_q[q] <= left_q[q] - 16'd1;
            end
          end else if (is_push[q]) begin
            if (issued[q]) inflight_q[q] <= 1'b1;
            else if (rsp_hit[q]) inflight_q[q] <= 1'b0;
            if (!unlim_q[q] && wr_en[q]) left_q[q] <= left_q[q] - 16'd1;
          end
          // a bounded stream switches itself off once all is delivered
          if (!unlim_q[q] && (cfg_q[q].mode != QLR_OFF) && left_q[q] == '0 &&
              cnt_q[q] == '0 && outst_q[q] == '0 && !inflight_q[q] && !wr_en[q])
            cfg_q[q].mode <= QLR_OFF;
        end
      end
    end
  end

  always_comb
    for (int unsigned q = 0; q < NQlr; q++) active_o[q] = (cfg_q[q].mode != QLR_OFF);
  assign cfg_o = cfg_q;

endmodule

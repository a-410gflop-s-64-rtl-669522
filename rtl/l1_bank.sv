// One L1 scratchpad bank (1 KiB) with its memory controller and bank queue.
//
// The bank is a single-port array of NumWords 32-bit words. It accepts one
// request per cycle and answers it exactly one cycle later from an output
// register; a new request is accepted while that register is empty or being
// drained, so back-to-back accesses run at one per cycle.
//
// Operations (hs_pkg::mem_op_e):
//   OP_LOAD   read the addressed word
//   OP_STORE  write the addressed word under the byte enables; acknowledged
//   OP_QPUSH  append wdata to the bank's queue
//   OP_QPOP   return and remove the oldest word of the bank's queue
// The queue is what the paper calls a queue in L1 SPM: the storage a QLR
// stream uses when producer and consumer are in different Tiles. Its words
// live in the top NumQueueWords rows of the bank; head, tail and fill level are
// registers in the controller. Any address of the bank selects its queue.
// A push to a full queue or a pop from an empty one is answered with ok=0 and
// changes nothing; the requesting QLR retries. The paper does not say how a
// full or empty queue is handled, nor the queue size: both are this design's
// choices, as are the acknowledgement of stores and the reset of the queue
// pointers (the data array itself is not reset).
module l1_bank
  import hs_pkg::*;
#(
  parameter int unsigned NumWords      = hs_pkg::BankWords,
  parameter int unsigned NumQueueWords = hs_pkg::QueueDepth
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  mem_req_t req_i,
  output logic     rsp_valid_o,
  input  logic     rsp_ready_i,
  output mem_rsp_t rsp_o
);
  localparam int unsigned RowBits = $clog2(NumWords);
  localparam int unsigned QPtrW = (NumQueueWords > 1) ? $clog2(NumQueueWords) : 1;
  localparam int unsigned QBase = NumWords - NumQueueWords;

  logic [DataWidth-1:0] mem_q [NumWords];

  logic                 rsp_valid_q;
  mem_rsp_t             rsp_q;
  logic [QPtrW-1:0]     head_q, tail_q;
  logic [QPtrW:0]       count_q;

  logic                 accept;
  logic [RowBits-1:0]      row;
  logic                 q_full, q_empty;

  assign req_ready_o = !rsp_valid_q || rsp_ready_i;
  assign accept      = req_valid_i && req_ready_o;
  assign row         = req_i.addr[RowLsb +: RowBits];
  assign q_full      = (count_q == (QPtrW+1)'(NumQueueWords));
  assign q_empty     = (count_q == '0);
  assign rsp_valid_o = rsp_valid_q;
  assign rsp_o       = rsp_q;

  function automatic logic [QPtrW-1:0] qinc(logic [QPtrW-1:0] p);
    return (int'(p) == NumQueueWords - 1) ? '0 : p + 1'b1;
  endfunction

  // Data array: one access per accepted request.
  always_ff @(posedge clk_i) begin
    if (accept) begin
      unique case (req_i.op)
        OP_STORE: begin
          for (int b = 0; b < 4; b++)
            if (req_i.be[b]) mem_q[row][8*b +: 8] <= req_i.wdata[8*b +: 8];
        end
        OP_QPUSH: if (!q_full) mem_q[QBase + int'(tail_q)] <= req_i.wdata;
        default: ;
      endcase
    end
  end

  // Response register and queue pointers.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_valid_q <= 1'b0;
      rsp_q       <= '0;
      head_q      <= '0;
      tail_q      <= '0;
      count_q     <= '0;
    end else begin
      if (rsp_valid_q && rsp_ready_i) rsp_valid_q <= 1'b0;
      if (accept) begin
        rsp_valid_q <= 1'b1;
        rsp_q.src   <= req_i.src;
        rsp_q.tag   <= req_i.tag;
        rsp_q.ok    <= 1'b1;
        rsp_q.rdata <= '0;
        unique case (req_i.op)
          OP_LOAD:  rsp_q.rdata <= mem_q[row];
          OP_STORE: ;
          OP_QPUSH: begin
            if (q_full) rsp_q.ok <= 1'b0;
            else begin
              tail_q  <= qinc(tail_q);
              count_q <= count_q + 1'b1;
            end
          end
          OP_QPOP: begin
            if (q_empty) rsp_q.ok <= 1'b0;
            else begin
              rsp_q.rdata <= mem_q[QBase + int'(head_q)];
              head_q      <= qinc(head_q);
              count_q     <= count_q - 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // A response must stay stable until it is taken.
  a_rsp_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rsp_valid_o && !rsp_ready_i |=> rsp_valid_o && $stable(rsp_o));

endmodule

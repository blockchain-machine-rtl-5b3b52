// block_verify: first stage of the block-level pipeline. It takes one block
// descriptor from block_fifo ({block_num, num_txs, orderer signature and key,
// block_hash}), verifies the orderer's signature on its dedicated ECDSA
// engine and passes {block_num, num_txs, block_valid} to block_validate.
// With its own engine, block n+1 is verified while block_validate still works
// on block n.
//
// Interface: valid/ready in and out, engine request valid/ready and a
// one-cycle response pulse. ev_start marks the cycle a block is taken from
// block_fifo and ev_done the cycle its result is handed on; block_monitor
// time-stamps both. Latency: the engine's request-to-response time plus two cycles.
module block_verify
  import bmac_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  blk_fifo_t   in,
  output logic        eng_req_valid,
  input  logic        eng_req_ready,
  output ecdsa_req_t  eng_req,
  input  logic        eng_resp_valid,
  input  logic        eng_resp_ok,
  output logic        out_valid,
  input  logic        out_ready,
  output blk_info_t   out,
  output logic        ev_start,
  output logic        ev_done
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_OUT} state_t;
  state_t     state;
  blk_info_t  info;
  ecdsa_req_t req;

  assign in_ready      = (state == S_IDLE);
  assign eng_req_valid = (state == S_REQ);
  assign eng_req       = req;
  assign out_valid     = (state == S_OUT);
  assign out           = info;
  assign ev_start      = in_valid && in_ready;
  assign ev_done       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      info  <= '0;
      req   <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          info.block_num   <= in.block_num;
          info.num_txs     <= in.num_txs;
          info.block_valid <= 1'b0;
          req              <= in.orderer;
          state            <= S_REQ;
        end
        S_REQ:  if (eng_req_ready) state <= S_WAIT;
        S_WAIT: if (eng_resp_valid) begin
          info.block_valid <= eng_resp_ok;
          state            <= S_OUT;
        end
        S_OUT:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

// tx_verify: first stage of the transaction-level pipeline for one
// tx_validator. It verifies the client signature of a transaction
// ({client_sig, client_key, tx_hash}) on its own dedicated ECDSA engine.
//
// A transaction arrives with info.valid = result of the block verification.
// If the block is already invalid the signature is not verified at all and
// the transaction leaves at once as invalid (early abort). Otherwise the
// request is sent to the engine and info.valid becomes the engine's answer.
// The transaction's bookkeeping (cc_id, num_ends, rdset_size, wrset_size,
// sequence number) travels along for tx_vscc.
//
// Interface: valid/ready in and out; in_ready is high only when the stage is
// empty, which tx_scheduler reads as "this validator is free". Engine:
// request valid/ready, response one-cycle pulse. Latency: one cycle for a
// skipped transaction, otherwise the engine's request-to-response time plus two
// cycles. The handshakes are this implementation's choice.
module tx_verify
  import bmac_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  vfy_req_t    in,
  output logic        eng_req_valid,
  input  logic        eng_req_ready,
  output ecdsa_req_t  eng_req,
  input  logic        eng_resp_valid,
  input  logic        eng_resp_ok,
  output logic        out_valid,
  input  logic        out_ready,
  output tx_info_t    out,
  output logic        ev_skip
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_OUT} state_t;
  state_t     state;
  tx_info_t   info;
  ecdsa_req_t req;

  assign in_ready      = (state == S_IDLE);
  assign eng_req_valid = (state == S_REQ);
  assign eng_req       = req;
  assign out_valid     = (state == S_OUT);
  assign out           = info;
  assign ev_skip       = in_valid && in_ready && !in.info.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      info  <= '0;
      req   <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          info  <= in.info;
          req   <= in.client;
          state <= in.info.valid ? S_REQ : S_OUT;
        end
        S_REQ:  if (eng_req_ready) state <= S_WAIT;
        S_WAIT: if (eng_resp_valid) begin
          info.valid <= eng_resp_ok;
          state      <= S_OUT;
        end
        S_OUT:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

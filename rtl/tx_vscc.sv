// tx_vscc: second stage of the transaction-level pipeline (endorsement
// verification and endorsement-policy check) for one tx_validator.
//
// It holds the validator's own endorsement FIFO (filled by tx_scheduler with
// the endorsements of the transactions handed to this validator, in order),
// an ends_scheduler driving NENG ECDSA engines, and the
// ends_policy_evaluator. One transaction is processed at a time; its result
// (info.valid updated) waits on out until tx_collector takes it.
//
// Timing: the first endorsement can be issued the cycle after the transaction
// is accepted; the result appears two cycles after the last engine response
// (or after the last endorsement has been discarded). ENDS_DEPTH must hold
// the endorsements of two transactions (one being processed in this stage,
// one waiting in tx_verify); its value is this implementation's choice.
//
// The endorsement FIFO's occupancy is not needed (lint: unused signal). Lint
// notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the assertions, which lint reports as a net used both
// ways; that is intended.
module tx_vscc
  import bmac_pkg::*;
#(
  parameter int NENG       = 2,
  parameter int ENDS_DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   tx_in_valid,
  output logic                   tx_in_ready,
  input  tx_info_t               tx_in,
  input  logic                   ends_in_valid,
  output logic                   ends_in_ready,
  input  ends_fifo_t             ends_in,
  output logic [NENG-1:0]        eng_req_valid,
  input  logic [NENG-1:0]        eng_req_ready,
  output ecdsa_req_t [NENG-1:0]  eng_req,
  input  logic [NENG-1:0]        eng_resp_valid,
  input  logic [NENG-1:0]        eng_resp_ok,
  output logic                   out_valid,
  input  logic                   out_ready,
  output tx_info_t               out,
  output logic                   ev_issue,
  output logic                   ev_skip
);
  logic       ends_valid, ends_ready;
  ends_fifo_t ends;
  logic [$clog2(ENDS_DEPTH+1)-1:0] ends_count;

  sync_fifo #(.WIDTH($bits(ends_fifo_t)), .DEPTH(ENDS_DEPTH)) u_ends_fifo (
    .clk, .rst_n,
    .in_valid (ends_in_valid), .in_ready (ends_in_ready), .in_data (ends_in),
    .out_valid(ends_valid),    .out_ready(ends_ready),    .out_data(ends),
    .count    (ends_count)
  );

  logic                pol_clear, pol_ok;
  logic [NENG-1:0]     pol_wr_en, pol_wr_ok;
  enc_id_t [NENG-1:0]  pol_wr_id;
  logic [CC_W-1:0]     pol_cc_id;

  ends_scheduler #(.NENG(NENG)) u_sched (
    .clk, .rst_n,
    .tx_in_valid, .tx_in_ready, .tx_in,
    .ends_valid, .ends_ready, .ends,
    .eng_req_valid, .eng_req_ready, .eng_req, .eng_resp_valid, .eng_resp_ok,
    .pol_clear, .pol_wr_en, .pol_wr_id, .pol_wr_ok, .pol_cc_id, .pol_ok,
    .out_valid, .out_ready, .out,
    .ev_issue, .ev_skip
  );

  ends_policy_evaluator #(.NWR(NENG)) u_policy (
    .clk, .rst_n,
    .clear (pol_clear),
    .wr_en (pol_wr_en), .wr_id (pol_wr_id), .wr_ok (pol_wr_ok),
    .cc_id (pol_cc_id),
    .policy_ok (pol_ok)
  );
endmodule

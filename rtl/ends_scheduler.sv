// ends_scheduler: issues the endorsements of one transaction to the ECDSA
// engines of its tx_vscc and applies short-circuit policy evaluation.
//
// A transaction arrives from tx_verify with its client-signature result in
// info.valid and its endorsement count in info.num_ends. The scheduler clears
// the policy register file, then pops exactly num_ends endorsements from the
// validator's endorsement FIFO. Each endorsement is either
//   * issued to the lowest-numbered free engine (one per cycle), or
//   * discarded unverified, when the transaction is already invalid or the
//     policy evaluator already reports the policy satisfied.
// Engine results are written into the policy evaluator by endorser id. When
// all endorsements are consumed and no engine of this scheduler is busy, the
// transaction leaves with valid = verified && policy satisfied. Endorsements
// in flight when the policy becomes satisfied are allowed to finish (an engine
// cannot be aborted) and their results do not change the outcome.
//
// Issue happens in rounds: a round opens when none of this scheduler's
// engines is busy (so the policy output is up to date), and endorsements are
// then issued on consecutive cycles to all free engines; the round closes in
// the first cycle without an issue or with an engine result. The next round
// starts only when all results of the previous one are in the policy
// evaluator. With engines of equal latency this keeps every engine busy while
// endorsements remain, and it never verifies an endorsement whose outcome
// could no longer matter at the moment the round began (2-of-3 with two good
// endorsements verifies two, 3-of-3 needs a second round).
//
// Interfaces: valid/ready on tx_in, ends and out; per engine a request
// valid/ready handshake and a one-cycle response pulse with an ok bit. The
// policy evaluator is outside (see tx_vscc); pol_ok is its combinational
// output and follows a write by one cycle. ev_issue/ev_skip pulse for each
// endorsement issued or discarded.
//
// Short-circuit towards validity and discarding for invalid transactions
// follow the design; the issue order and waiting for in-flight engines are
// choices of this implementation.
//
// Lint notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the assertions, which lint reports as a net used both
// ways; that is intended.
module ends_scheduler
  import bmac_pkg::*;
#(
  parameter int NENG = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // transaction from tx_verify
  input  logic                   tx_in_valid,
  output logic                   tx_in_ready,
  input  tx_info_t               tx_in,
  // endorsements of this validator
  input  logic                   ends_valid,
  output logic                   ends_ready,
  input  ends_fifo_t             ends,
  // ECDSA engines
  output logic [NENG-1:0]        eng_req_valid,
  input  logic [NENG-1:0]        eng_req_ready,
  output ecdsa_req_t [NENG-1:0]  eng_req,
  input  logic [NENG-1:0]        eng_resp_valid,
  input  logic [NENG-1:0]        eng_resp_ok,
  // policy evaluator
  output logic                   pol_clear,
  output logic [NENG-1:0]        pol_wr_en,
  output enc_id_t [NENG-1:0]     pol_wr_id,
  output logic [NENG-1:0]        pol_wr_ok,
  output logic [CC_W-1:0]        pol_cc_id,
  input  logic                   pol_ok,
  // result to tx_collector
  output logic                   out_valid,
  input  logic                   out_ready,
  output tx_info_t               out,
  // events
  output logic                   ev_issue,
  output logic                   ev_skip
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_t;
  state_t state;

  tx_info_t               cur;
  logic [NENDS_W-1:0]     left;
  logic [NENG-1:0]        busy;
  enc_id_t [NENG-1:0]     busy_id;

  // lowest free engine
  logic                   any_free;
  logic [$clog2(NENG+1)-1:0] free_idx;
  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int e = NENG - 1; e >= 0; e--) begin
      if (!busy[e] && eng_req_ready[e]) begin
        any_free = 1'b1;
        free_idx = ($clog2(NENG+1))'(e);
      end
    end
  end

  wire discard = !cur.valid || pol_ok;
  wire run     = (state == S_RUN);
  wire have    = run && (left != '0) && ends_valid;
  wire do_skip = have && discard;
  logic round_open;
  wire may_iss = (busy == '0) || round_open;
  wire do_iss  = have && !discard && any_free && may_iss;

  assign tx_in_ready = (state == S_IDLE);
  assign pol_clear   = tx_in_valid && tx_in_ready;
  assign pol_cc_id   = cur.cc_id;
  assign ends_ready  = do_skip || do_iss;
  assign ev_issue    = do_iss;
  assign ev_skip     = do_skip;
  assign out_valid   = (state == S_OUT);
  assign out         = cur;

  always_comb begin
    for (int e = 0; e < NENG; e++) begin
      eng_req[e]       = ends.endorser;
      eng_req_valid[e] = do_iss && (free_idx == ($clog2(NENG+1))'(e));
      pol_wr_en[e]     = eng_resp_valid[e] && busy[e];
      pol_wr_id[e]     = busy_id[e];
      pol_wr_ok[e]     = eng_resp_ok[e];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur     <= '0;
      left    <= '0;
      busy    <= '0;
      busy_id <= '0;
      round_open <= 1'b0;
    end else begin
      round_open <= do_iss && ((eng_resp_valid & busy) == '0);
      for (int e = 0; e < NENG; e++) begin
        if (eng_resp_valid[e]) busy[e] <= 1'b0;
        if (eng_req_valid[e]) begin
          busy[e]    <= 1'b1;
          busy_id[e] <= ends.endorser_id;
        end
      end
      case (state)
        S_IDLE: if (tx_in_valid) begin
          cur   <= tx_in;
          left  <= tx_in.num_ends;
          state <= S_RUN;
        end
        S_RUN: begin
          if (ends_ready) left <= left - 1'b1;
          if (left == '0 && busy == '0) begin
            cur.valid <= cur.valid && pol_ok;
            state     <= S_OUT;
          end
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // An engine must not answer a request this scheduler did not make.
  a_resp_owned: assert property (@(posedge clk) disable iff (!rst_n)
                                 (eng_resp_valid & ~busy) == '0);
endmodule

// block_validate: second stage of the block-level pipeline; validates and
// commits all transactions of a block.
//
// It is the transaction-level pipeline: tx_scheduler feeds NTXV
// tx_validators, each a tx_verify (one ECDSA engine) followed by a tx_vscc
// (NENG ECDSA engines, its own endorsement FIFO and the policy evaluator).
// tx_collector puts the results back in block order for tx_mvcc_commit, which
// checks read versions against kv_database and commits the write sets. Block
// information reaches tx_mvcc_commit through a small FIFO so tx_scheduler can
// start the next block while the current one is still in flight.
//
// ECDSA engine numbering on the eng_* ports: 0..NTXV-1 are the tx_verify
// engines, then validator v's tx_vscc uses NTXV + v*NENG .. NTXV + v*NENG +
// NENG-1. res carries the block result without statistics. ev_start pulses
// when a block is taken. ev is a per-cycle count of pipeline events.
//
// The occupancy of the block-info FIFO and the database's init_done are not
// needed here (lint: unused signals); tx_mvcc_commit already waits on the
// database's ready signals. Lint notes: rst_n is both the asynchronous reset
// of the flip-flops and the disable condition of the assertions, which lint
// reports as a net used both ways; that is intended.
module block_validate
  import bmac_pkg::*;
#(
  parameter int NTXV       = 8,
  parameter int NENG       = 2,
  parameter int ENDS_DEPTH = 16,
  parameter int DB_SIZE    = DB_ENTRIES
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 blk_valid,
  output logic                                 blk_ready,
  input  blk_info_t                            blk,
  input  logic                                 tx_valid,
  output logic                                 tx_ready,
  input  tx_fifo_t                             tx,
  input  logic                                 ends_valid,
  output logic                                 ends_ready,
  input  ends_fifo_t                           ends,
  input  logic                                 rd_valid,
  output logic                                 rd_ready,
  input  rdset_fifo_t                          rd,
  input  logic                                 wr_valid,
  output logic                                 wr_ready,
  input  wrset_fifo_t                          wr,
  output logic [NTXV*(1+NENG)-1:0]             eng_req_valid,
  input  logic [NTXV*(1+NENG)-1:0]             eng_req_ready,
  output ecdsa_req_t [NTXV*(1+NENG)-1:0]       eng_req,
  input  logic [NTXV*(1+NENG)-1:0]             eng_resp_valid,
  input  logic [NTXV*(1+NENG)-1:0]             eng_resp_ok,
  output logic                                 res_valid,
  input  logic                                 res_ready,
  output res_fifo_t                            res,
  output logic                                 ev_start,
  output bp_events_t                           ev
);
  // scheduler <-> validators
  logic [NTXV-1:0]      vfy_valid, vfy_ready, vends_valid, vends_ready;
  vfy_req_t             vfy;
  ends_fifo_t           vends;
  // verify -> vscc -> collector
  logic [NTXV-1:0]      v2s_valid, v2s_ready, col_valid, col_ready;
  tx_info_t [NTXV-1:0]  v2s, col;
  logic [NTXV-1:0]      ev_vskip, ev_iss, ev_eskip;
  // block info
  logic                 bi_valid, bi_ready, bq_valid, bq_ready;
  blk_info_t            bi, bq;
  logic [2:0]           bq_count;
  // collector -> mvcc
  logic                 c_valid, c_ready;
  tx_info_t             c_tx;
  // database
  logic                 db_rd_valid, db_rd_ready, db_rd_resp_valid;
  logic                 db_wr_valid, db_wr_ready, db_init_done;
  logic [KEY_W-1:0]     db_rd_key, db_wr_key;
  db_entry_t            db_rd_resp, db_wr_data;
  logic                 ev_conflict, ev_lock;

  tx_scheduler #(.NTXV(NTXV)) u_sched (
    .clk, .rst_n,
    .blk_valid, .blk_ready, .blk,
    .tx_valid, .tx_ready, .tx,
    .ends_valid, .ends_ready, .ends,
    .vfy_valid, .vfy_ready, .vfy,
    .vends_valid, .vends_ready, .vends,
    .binfo_valid(bi_valid), .binfo_ready(bi_ready), .binfo(bi),
    .ev_start
  );

  for (genvar v = 0; v < NTXV; v++) begin : g_val
    tx_verify u_verify (
      .clk, .rst_n,
      .in_valid (vfy_valid[v]), .in_ready (vfy_ready[v]), .in (vfy),
      .eng_req_valid (eng_req_valid[v]), .eng_req_ready (eng_req_ready[v]),
      .eng_req (eng_req[v]),
      .eng_resp_valid(eng_resp_valid[v]), .eng_resp_ok (eng_resp_ok[v]),
      .out_valid (v2s_valid[v]), .out_ready (v2s_ready[v]), .out (v2s[v]),
      .ev_skip (ev_vskip[v])
    );

    tx_vscc #(.NENG(NENG), .ENDS_DEPTH(ENDS_DEPTH)) u_vscc (
      .clk, .rst_n,
      .tx_in_valid (v2s_valid[v]), .tx_in_ready (v2s_ready[v]), .tx_in (v2s[v]),
      .ends_in_valid (vends_valid[v]), .ends_in_ready (vends_ready[v]), .ends_in (vends),
      .eng_req_valid (eng_req_valid[NTXV + v*NENG +: NENG]),
      .eng_req_ready (eng_req_ready[NTXV + v*NENG +: NENG]),
      .eng_req       (eng_req      [NTXV + v*NENG +: NENG]),
      .eng_resp_valid(eng_resp_valid[NTXV + v*NENG +: NENG]),
      .eng_resp_ok   (eng_resp_ok  [NTXV + v*NENG +: NENG]),
      .out_valid (col_valid[v]), .out_ready (col_ready[v]), .out (col[v]),
      .ev_issue (ev_iss[v]), .ev_skip (ev_eskip[v])
    );
  end

  tx_collector #(.NTXV(NTXV)) u_coll (
    .clk, .rst_n,
    .in_valid (col_valid), .in_ready (col_ready), .in (col),
    .out_valid (c_valid), .out_ready (c_ready), .out (c_tx)
  );

  sync_fifo #(.WIDTH($bits(blk_info_t)), .DEPTH(4)) u_binfo_fifo (
    .clk, .rst_n,
    .in_valid (bi_valid), .in_ready (bi_ready), .in_data (bi),
    .out_valid (bq_valid), .out_ready (bq_ready), .out_data (bq),
    .count (bq_count)
  );

  tx_mvcc_commit u_mvcc (
    .clk, .rst_n,
    .binfo_valid (bq_valid), .binfo_ready (bq_ready), .binfo (bq),
    .tx_valid (c_valid), .tx_ready (c_ready), .tx (c_tx),
    .rd_valid, .rd_ready, .rd,
    .wr_valid, .wr_ready, .wr,
    .db_rd_valid, .db_rd_ready, .db_rd_key, .db_rd_resp_valid, .db_rd_resp,
    .db_wr_valid, .db_wr_ready, .db_wr_key, .db_wr_data,
    .res_valid, .res_ready, .res,
    .ev_conflict
  );

  kv_database #(.ENTRIES(DB_SIZE)) u_db (
    .clk, .rst_n,
    .rd_valid (db_rd_valid), .rd_ready (db_rd_ready), .rd_key (db_rd_key[$clog2(DB_SIZE)-1:0]),
    .rd_resp_valid (db_rd_resp_valid), .rd_resp (db_rd_resp),
    .wr_valid (db_wr_valid), .wr_ready (db_wr_ready), .wr_key (db_wr_key[$clog2(DB_SIZE)-1:0]),
    .wr_data (db_wr_data),
    .init_done (db_init_done),
    .ev_lock
  );

  always_comb begin
    ev = '0;
    ev.ends_issued   = 8'($countones(ev_iss));
    ev.ends_skipped  = 8'($countones(ev_eskip));
    ev.tx_skipped    = 8'($countones(ev_vskip));
    ev.mvcc_conflict = ev_conflict;
    ev.db_lock       = ev_lock;
  end
endmodule

// tb_block_validate: the transaction-level pipeline (tx_scheduler, NTXV=2
// tx_validators with NENG=2 engines each, tx_collector, tx_mvcc_commit, a
// 64-entry kv_database) driven with generated blocks: random endorsement
// policies from all ten circuits, bad client and endorser signatures, stale
// read versions, blocks already found invalid, and an empty block. Each
// block result (num, valid, every transaction flag) is compared with the
// reference model; the engine models check that no request is lost, and the
// test fails if short-circuited endorsements, skipped transactions or MVCC
// conflicts never occurred.
module tb_block_validate;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int NTXV = 2;
  localparam int NENG = 2;
  localparam int NE   = NTXV * (1 + NENG);
  localparam int LAT  = 20;
  localparam int NB   = 30;
  logic clk = 0, rst_n = 0;
  logic blk_valid, blk_ready, tx_valid, tx_ready, ends_valid, ends_ready;
  logic rd_valid, rd_ready, wr_valid, wr_ready;
  blk_info_t blk;
  tx_fifo_t tx;
  ends_fifo_t ends;
  rdset_fifo_t rd;
  wrset_fifo_t wr;
  logic [NE-1:0] eng_req_valid, eng_req_ready, eng_resp_valid, eng_resp_ok;
  ecdsa_req_t [NE-1:0] eng_req;
  int served [NE];
  bp_events_t ev;
  int checks = 0, failures = 0;
  int n_ends_issued = 0, n_ends_skipped = 0, n_tx_skipped = 0, n_conflict = 0;
  int n_bad_block = 0, n_empty = 0, n_policy_fail = 0, n_ooo = 0, n_big = 0, total_ends = 0;
  logic res_valid, res_ready;
  res_fifo_t res;
  logic ev_start;

  blk_info_t bq [$];
  tx_fifo_t    tq [$];
  ends_fifo_t  eq [$];
  rdset_fifo_t rq [$];
  wrset_fifo_t wq [$];
  res_fifo_t   expq [$];
  int          exp_vtx [$];
  int          nres = 0;
  int          big_blk = -1, big_validate = 0;

  block_validate #(.NTXV(2), .NENG(2), .DB_SIZE(64)) dut (.*);
  always #5 clk = ~clk;

  for (genvar e = 0; e < NE; e++) begin : g_eng
    ecdsa_engine_model #(.LAT(LAT)) u_eng (.clk, .rst_n,
      .req_valid (eng_req_valid[e]), .req_ready (eng_req_ready[e]), .req (eng_req[e]),
      .resp_valid (eng_resp_valid[e]), .resp_ok (eng_resp_ok[e]), .served (served[e]));
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // protocol-processor model: pushes into the buffers, pops after a transfer
  assign blk_valid  = bq.size() != 0;  assign blk  = blk_valid  ? bq[0] : '0;
  assign tx_valid   = tq.size() != 0;  assign tx   = tx_valid   ? tq[0] : '0;
  assign ends_valid = eq.size() != 0;  assign ends = ends_valid ? eq[0] : '0;
  assign rd_valid   = rq.size() != 0;  assign rd   = rd_valid   ? rq[0] : '0;
  assign wr_valid   = wq.size() != 0;  assign wr   = wr_valid   ? wq[0] : '0;
  logic fb = 0, ft = 0, fe = 0, fr = 0, fw = 0;
  always @(posedge clk) begin
    fb <= rst_n && blk_valid && blk_ready;
    ft <= rst_n && tx_valid && tx_ready;
    fe <= rst_n && ends_valid && ends_ready;
    fr <= rst_n && rd_valid && rd_ready;
    fw <= rst_n && wr_valid && wr_ready;
    if (rst_n) begin
      n_ends_issued  += int'(ev.ends_issued);
      n_ends_skipped += int'(ev.ends_skipped);
      n_tx_skipped   += int'(ev.tx_skipped);
      n_conflict     += int'(ev.mvcc_conflict);
    end
  end
  always @(negedge clk) begin
    if (fb) void'(bq.pop_front());
    if (ft) void'(tq.pop_front());
    if (fe) void'(eq.pop_front());
    if (fr) void'(rq.pop_front());
    if (fw) void'(wq.pop_front());
  end

  // out-of-order completion: a validator finishes a transaction while an
  // older one of the same block is still in another validator
  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < NTXV; v++)
      if (dut.col_valid[v] && !dut.col_ready[v]) begin
        n_ooo++;
        break;
      end
  end

  task automatic check_res(res_fifo_t r);
    res_fifo_t e;
    check(nres < expq.size(), "unexpected result");
    if (nres >= expq.size()) return;
    e = expq[nres];
    check(r.block_num == e.block_num, $sformatf("block_num %0d want %0d", r.block_num, e.block_num));
    check(r.block_valid == e.block_valid, $sformatf("block %0d valid", e.block_num));
    check(r.num_txs == e.num_txs, $sformatf("block %0d num_txs", e.block_num));
    check(r.tx_flags == e.tx_flags, $sformatf("block %0d flags %h want %h", e.block_num,
          r.tx_flags[63:0], e.tx_flags[63:0]));
    nres++;
  endtask

  always @(negedge clk) res_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && res_valid && res_ready) check_res(res);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d of %0d results", nres, expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_gen g;
    int ser;
    g = new();
    g.pct_bad_block = 15; g.pct_bad_tx = 10; g.pct_bad_ends = 15; g.pct_stale = 5;
    g.key_range = 16; g.max_rw = 3;
    g.cc_list = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9};
    for (int b = 0; b < NB; b++) begin
      res_fifo_t r;
      blk_info_t bi;
      int ntx;
      ntx = (b == 3) ? 0 : $urandom_range(1, 20);
      if (b == 6) begin g.pct_bad_block = 0; g.pct_bad_tx = 0; g.pct_bad_ends = 0; g.pct_stale = 0; g.cc_list = '{0}; end
      g.gen(b + 1, ntx);
      if (b == 6) begin g.pct_bad_block = 15; g.pct_bad_tx = 10; g.pct_bad_ends = 15; g.pct_stale = 5;
                        g.cc_list = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9}; big_blk = b; end
      if (b == 1) begin g.blk.orderer = mk_req(0, 99); g.exp_valid = 0; g.exp_flags = '0; g.exp_valid_txs = 0; end
      bi.block_num = g.blk.block_num; bi.num_txs = g.blk.num_txs; bi.block_valid = g.exp_valid;
      bq.push_back(bi);
      foreach (g.txs[i])  tq.push_back(g.txs[i]);
      foreach (g.ends[i]) eq.push_back(g.ends[i]);
      foreach (g.rds[i])  rq.push_back(g.rds[i]);
      foreach (g.wrs[i])  wq.push_back(g.wrs[i]);
      total_ends += g.ends.size();
      if (!g.exp_valid) n_bad_block++;
      if (ntx == 0) n_empty++;
      if (ntx == 256) n_big++;
      for (int t = 0; t < ntx; t++)
        if (g.exp_valid && req_ok(g.txs[t].client) && !g.exp_flags[t]) n_policy_fail++;
      r = '0;
      r.block_num = g.blk.block_num; r.num_txs = g.blk.num_txs; r.block_valid = g.exp_valid;
      r.tx_flags = g.exp_flags;
      expq.push_back(r);
      exp_vtx.push_back(g.exp_valid_txs);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nres == expq.size());
    repeat (10) @(posedge clk);
    check(tq.size() == 0 && eq.size() == 0 && rq.size() == 0 && wq.size() == 0 && bq.size() == 0,
          "every buffer entry consumed");
    check(n_bad_block > 0, "invalid block seen");
    check(n_empty > 0, "empty block seen");
    check(n_tx_skipped > 0, "transactions skipped after bad block or client signature");
    check(n_ends_skipped > 0, "endorsements short-circuited");
    check(n_ends_issued + n_ends_skipped == total_ends, $sformatf("every endorsement issued or skipped %0d+%0d/%0d",
          n_ends_issued, n_ends_skipped, total_ends));
    check(n_policy_fail > 0, "policy or MVCC rejections");
    check(n_conflict > 0, "MVCC conflicts");
    check(n_ooo > 0, "out-of-order completion across validators");
    begin
      int tot;
      tot = 0;
      for (int e = 0; e < NE; e++) tot += served[e];
      check(tot > 0, "engines used");
      $display("engine requests %0d", tot);
    end
    $display("mechanisms: bad_block=%0d empty=%0d tx_skipped=%0d ends_issued=%0d ends_skipped=%0d policy_or_mvcc=%0d conflicts=%0d ooo=%0d",
             n_bad_block, n_empty, n_tx_skipped, n_ends_issued, n_ends_skipped, n_policy_fail, n_conflict, n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

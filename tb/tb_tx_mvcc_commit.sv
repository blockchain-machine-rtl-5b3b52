// tb_tx_mvcc_commit: the MVCC/commit stage with a 64-entry kv_database.
// Generated blocks (random read/write sets over 16 keys, some stale expected
// versions, some transactions already invalid) are fed in transaction order.
// The generator keeps its own database model, so the expected transaction
// flags include conflicts with writes of earlier transactions of the same
// block. Checks every block result, that rdset/wrset FIFOs are fully consumed,
// the database contents at the end, and that conflicts occur.
module tb_tx_mvcc_commit;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic binfo_valid, binfo_ready, tx_valid, tx_ready, rd_valid, rd_ready, wr_valid, wr_ready;
  blk_info_t binfo;
  tx_info_t tx;
  rdset_fifo_t rd;
  wrset_fifo_t wr;
  logic db_rd_valid, db_rd_ready, db_rd_resp_valid, db_wr_valid, db_wr_ready, init_done, ev_lock;
  logic [KEY_W-1:0] db_rd_key, db_wr_key;
  db_entry_t db_rd_resp, db_wr_data;
  logic res_valid, res_ready, ev_conflict;
  res_fifo_t res;
  int checks = 0, failures = 0, conflicts = 0, locks = 0;

  blk_info_t   bq [$];
  tx_info_t    tq [$];
  rdset_fifo_t rq [$];
  wrset_fifo_t wq [$];
  res_fifo_t   expq [$];
  int nres = 0;

  tx_mvcc_commit dut (.*);
  kv_database #(.ENTRIES(N)) u_db (.clk, .rst_n,
    .rd_valid(db_rd_valid), .rd_ready(db_rd_ready), .rd_key(db_rd_key[$clog2(N)-1:0]),
    .rd_resp_valid(db_rd_resp_valid), .rd_resp(db_rd_resp),
    .wr_valid(db_wr_valid), .wr_ready(db_wr_ready), .wr_key(db_wr_key[$clog2(N)-1:0]), .wr_data(db_wr_data),
    .init_done, .ev_lock);
  always #5 clk = ~clk;

  assign binfo_valid = bq.size() != 0;  assign binfo = binfo_valid ? bq[0] : '0;
  assign tx_valid    = tq.size() != 0;  assign tx    = tx_valid ? tq[0] : '0;
  assign rd_valid    = rq.size() != 0;  assign rd    = rd_valid ? rq[0] : '0;
  assign wr_valid    = wq.size() != 0;  assign wr    = wr_valid ? wq[0] : '0;
  logic fb = 0, ft = 0, fr = 0, fw = 0;
  always @(posedge clk) begin
    fb <= rst_n && binfo_valid && binfo_ready; ft <= rst_n && tx_valid && tx_ready;
    fr <= rst_n && rd_valid && rd_ready; fw <= rst_n && wr_valid && wr_ready;
    if (ev_conflict) conflicts++;
    if (ev_lock) locks++;
  end
  always @(negedge clk) begin
    if (fb) void'(bq.pop_front());
    if (ft) void'(tq.pop_front());
    if (fr) void'(rq.pop_front());
    if (fw) void'(wq.pop_front());
    res_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    check(nres < expq.size(), "unexpected result");
    if (nres < expq.size()) begin
      check(res.block_num == expq[nres].block_num && res.num_txs == expq[nres].num_txs
            && res.block_valid == expq[nres].block_valid, $sformatf("block fields %0d %0d %0d", res.block_num, res.num_txs, res.block_valid));
      check(res.tx_flags == expq[nres].tx_flags, $sformatf("block %0d flags %h want %h", nres,
            res.tx_flags[31:0], expq[nres].tx_flags[31:0]));
    end
    nres++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_gen g;
    g = new();
    g.pct_bad_block = 0; g.pct_bad_tx = 15; g.pct_bad_ends = 0; g.pct_stale = 8;
    g.key_range = 16; g.max_rw = 3;
    for (int b = 0; b < 25; b++) begin
      blk_info_t bi;
      res_fifo_t r;
      int ntx;
      ntx = (b == 5) ? 0 : $urandom_range(1, 12);
      g.gen(b + 1, ntx);
      bi.block_num = 32'(b + 1); bi.num_txs = NTX_W'(ntx); bi.block_valid = 1;
      bq.push_back(bi);
      for (int t = 0; t < ntx; t++) begin
        tx_info_t x;
        x = '0;
        x.seq = SEQ_W'(t); x.last = (t == ntx - 1);
        x.valid = req_ok(g.txs[t].client);
        x.rdset_size = g.txs[t].rdset_size; x.wrset_size = g.txs[t].wrset_size;
        tq.push_back(x);
      end
      foreach (g.rds[i]) rq.push_back(g.rds[i]);
      foreach (g.wrs[i]) wq.push_back(g.wrs[i]);
      r = '0;
      r.block_num = bi.block_num; r.num_txs = bi.num_txs; r.block_valid = 1; r.tx_flags = g.exp_flags;
      expq.push_back(r);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nres == expq.size());
    repeat (5) @(posedge clk);
    check(rq.size() == 0 && wq.size() == 0 && tq.size() == 0, "all FIFOs consumed");
    for (int k = 0; k < 16; k++)
      check(u_db.mem[k].version == g.ver(k), $sformatf("db key %0d version", k));
    check(conflicts > 0, "MVCC conflicts exercised");
    // a write always retires before the next read is issued, so no lock stall
    check(locks == 0, "no read stalled behind a write in this access pattern");
    $display("conflicts %0d lock stalls %0d", conflicts, locks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

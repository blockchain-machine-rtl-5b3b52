// tb_tx_scheduler: feeds generated blocks (some invalid, some empty) through
// the scheduler into three model validators whose ready signals toggle at
// random. Checks that every transaction of a block is issued once, in order,
// to a free validator with the right seq/last/epoch/valid and fields; that
// each validator receives exactly the endorsements of the transactions it was
// given, in order; and that block information is forwarded once per block.
module tb_tx_scheduler;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int NTXV = 3;
  logic clk = 0, rst_n = 0;
  logic blk_valid, blk_ready, tx_valid, tx_ready, ends_valid, ends_ready;
  blk_info_t blk;
  tx_fifo_t tx;
  ends_fifo_t ends;
  logic [NTXV-1:0] vfy_valid, vfy_ready, vends_valid, vends_ready;
  vfy_req_t vfy;
  ends_fifo_t vends;
  logic binfo_valid, binfo_ready, ev_start;
  blk_info_t binfo;
  int checks = 0, failures = 0;

  blk_info_t  bq [$];
  tx_fifo_t   tq [$];
  ends_fifo_t eq [$];
  // expectations
  blk_info_t  exp_blk [$];
  tx_info_t   exp_info [$];
  tx_fifo_t   exp_tx [$];
  ends_fifo_t exp_ends_of_tx [$][$];
  ends_fifo_t got_ends [NTXV][$];
  int         tx_to_v [$];
  int         ntx_seen = 0, nblk_seen = 0;

  tx_scheduler #(.NTXV(NTXV)) dut (.*);
  always #5 clk = ~clk;

  assign blk_valid  = bq.size() != 0;
  assign blk        = blk_valid ? bq[0] : '0;
  assign tx_valid   = tq.size() != 0;
  assign tx         = tx_valid ? tq[0] : '0;
  assign ends_valid = eq.size() != 0;
  assign ends       = ends_valid ? eq[0] : '0;
  logic fb = 0, ft = 0, fe = 0;
  always @(posedge clk) begin
    fb <= blk_valid && blk_ready;
    ft <= tx_valid && tx_ready;
    fe <= ends_valid && ends_ready;
  end
  always @(negedge clk) begin
    if (fb) void'(bq.pop_front());
    if (ft) void'(tq.pop_front());
    if (fe) void'(eq.pop_front());
    vfy_ready   <= NTXV'($urandom);
    vends_ready <= NTXV'($urandom);
    binfo_ready <= ($urandom_range(0, 3) != 0);
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check($countones(vfy_valid) <= 1, "one issue per cycle");
    for (int v = 0; v < NTXV; v++) begin
      if (vfy_valid[v] && vfy_ready[v]) begin
        check(ntx_seen < exp_info.size(), "unexpected transaction");
        if (ntx_seen < exp_info.size()) begin
          check(vfy.info == exp_info[ntx_seen], $sformatf("tx %0d info", ntx_seen));
          check(vfy.client == exp_tx[ntx_seen].client, "client request");
        end
        tx_to_v.push_back(v);
        ntx_seen++;
      end
      if (vends_valid[v] && vends_ready[v]) got_ends[v].push_back(vends);
      if (vfy_valid[v] && !vfy_ready[v]) check(0, "issued to a busy validator");
    end
    if (binfo_valid && binfo_ready) begin
      check(nblk_seen < exp_blk.size() && binfo == exp_blk[nblk_seen], "block info");
      nblk_seen++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_gen g;
    logic [EPOCH_W-1:0] epoch;
    g = new();
    g.cc_list = '{0, 4, 6, 2};
    g.pct_bad_block = 30;
    epoch = 0;
    vfy_ready = 0; vends_ready = 0; binfo_ready = 0;
    for (int b = 0; b < 12; b++) begin
      blk_info_t bi;
      int ntx;
      ntx = (b == 3) ? 0 : $urandom_range(1, 20);
      g.gen(b, ntx);
      bi.block_num = g.blk.block_num; bi.num_txs = g.blk.num_txs; bi.block_valid = req_ok(g.blk.orderer);
      bq.push_back(bi);
      exp_blk.push_back(bi);
      for (int t = 0; t < ntx; t++) begin
        tx_info_t inf;
        inf.seq = SEQ_W'(t); inf.last = (t == ntx - 1); inf.epoch = epoch; inf.valid = bi.block_valid;
        inf.cc_id = g.txs[t].cc_id; inf.num_ends = g.txs[t].num_ends;
        inf.rdset_size = g.txs[t].rdset_size; inf.wrset_size = g.txs[t].wrset_size;
        exp_info.push_back(inf);
        exp_tx.push_back(g.txs[t]);
        tq.push_back(g.txs[t]);
      end
      if (ntx != 0) epoch = epoch + 1'b1;
      // endorsements, grouped per transaction
      begin
        int k;
        k = 0;
        for (int t = 0; t < ntx; t++) begin
          ends_fifo_t el [$];
          el.delete();
          for (int e = 0; e < int'(g.txs[t].num_ends); e++) begin
            el.push_back(g.ends[k]);
            eq.push_back(g.ends[k]);
            k++;
          end
          exp_ends_of_tx.push_back(el);
        end
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (bq.size() == 0 && tq.size() == 0 && eq.size() == 0);
    repeat (10) @(posedge clk);
    check(ntx_seen == exp_info.size(), $sformatf("issued %0d of %0d", ntx_seen, exp_info.size()));
    check(nblk_seen == exp_blk.size(), "all blocks forwarded");
    for (int v = 0; v < NTXV; v++) begin
      ends_fifo_t want [$];
      want.delete();
      for (int t = 0; t < tx_to_v.size(); t++)
        if (tx_to_v[t] == v)
          for (int j = 0; j < exp_ends_of_tx[t].size(); j++) want.push_back(exp_ends_of_tx[t][j]);
      check(want.size() == got_ends[v].size(), $sformatf("validator %0d endorsement count %0d vs %0d", v, want.size(), got_ends[v].size()));
      foreach (want[i]) if (i < got_ends[v].size()) check(want[i] == got_ends[v][i], "endorsement routing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

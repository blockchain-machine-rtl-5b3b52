// tb_workloads: runs the evaluated workloads on two block_processor
// configurations side by side, 8x2 (8 tx_validators, 2 engines per tx_vscc)
// and 5x3, with engine models whose latency (LAT = 2000 cycles) dwarfs every
// other operation, as a real ECDSA core (~90,000 cycles) does. Each block is
// sent into an empty pipeline, all transactions valid, and its
// VALIDATE_CYCLES statistic is the measure. Checked against the expected
// behaviour of the architecture:
//  * policies at 8x2, block 150: 3-of-3 needs a second engine round per
//    transaction, so it takes 1.6x to 2.2x as long as 2-of-3; the complex
//    five-term policy costs the same as 2-of-4 (within 10%); short-circuit
//    evaluation verifies exactly 2 endorsements for 2-of-3 and 2-of-4.
//  * 8x2 against 5x3: 8x2 is at least 30% faster for 2-of-3, 5x3 at least
//    10% faster for 3-of-3 and 3-of-4.
//  * block size 50..250 (2-of-2, 8x2): cycles per transaction do not grow.
//  * 3..13 reads and writes per transaction (block 150, 8x2): MVCC stays
//    hidden behind the engines, cycles within 5% of the 3-rw case.
// Every block's transaction flags are checked as well.
module tb_workloads;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int LAT = 2000;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int blk_no = 0;

  bp_harness #(.NTXV(8), .NENG(2), .LAT(LAT)) h82 (.clk, .rst_n);
  bp_harness #(.NTXV(5), .NENG(3), .LAT(LAT)) h53 (.clk, .rst_n);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one generator, with its own database model, per configuration
  block_gen g, g82, g53;

  // one block into an idle configuration; returns its validate cycles and
  // the number of endorsements verified
  task automatic run(int cfg, int cc, int ntx, int rw, output int cyc, output int nver);
    int v0;
    res_fifo_t r;
    blk_no++;
    g = (cfg == 0) ? g82 : g53;
    g.cc_list = '{cc};
    g.fixed_rw = rw;
    g.gen(blk_no, ntx);
    if (cfg == 0) begin
      v0 = h82.ends_verified;
      h82.bq.push_back(g.blk);
      foreach (g.txs[i])  h82.tq.push_back(g.txs[i]);
      foreach (g.ends[i]) h82.eq.push_back(g.ends[i]);
      foreach (g.rds[i])  h82.rq.push_back(g.rds[i]);
      foreach (g.wrs[i])  h82.wq.push_back(g.wrs[i]);
      wait (h82.res_q.size() != 0);
      r = h82.res_q.pop_front();
      nver = h82.ends_verified - v0;
    end else begin
      v0 = h53.ends_verified;
      h53.bq.push_back(g.blk);
      foreach (g.txs[i])  h53.tq.push_back(g.txs[i]);
      foreach (g.ends[i]) h53.eq.push_back(g.ends[i]);
      foreach (g.rds[i])  h53.rq.push_back(g.rds[i]);
      foreach (g.wrs[i])  h53.wq.push_back(g.wrs[i]);
      wait (h53.res_q.size() != 0);
      r = h53.res_q.pop_front();
      nver = h53.ends_verified - v0;
    end
    cyc = int'(r.stats.validate_cycles);
    check(r.block_num == 32'(blk_no) && r.block_valid && r.tx_flags == g.exp_flags
          && r.stats.valid_txs == 32'(ntx), $sformatf("block %0d result", blk_no));
    repeat (20) @(posedge clk);
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c23, c33, c24, ccx, c34, d23, d33, d34, n, nv;
    int cs [5];
    int rw3;
    g82 = new();
    g53 = new();
    g82.pct_bad_block = 0; g82.pct_bad_tx = 0; g82.pct_bad_ends = 0; g82.pct_stale = 0; g82.key_range = 4096;
    g53.pct_bad_block = 0; g53.pct_bad_tx = 0; g53.pct_bad_ends = 0; g53.pct_stale = 0; g53.key_range = 4096;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (h82.u_bp.u_validate.u_db.init_done && h53.u_bp.u_validate.u_db.init_done);

    // policies, 8x2, block 150
    run(0, 4, 150, 2, c23, nv); check(nv == 150 * 2, $sformatf("2of3 verifies 2 per tx (%0d)", nv));
    run(0, 5, 150, 2, c33, nv); check(nv == 150 * 3, "3of3 verifies 3 per tx");
    run(0, 6, 150, 2, c24, nv); check(nv == 150 * 2, "2of4 verifies 2 per tx");
    run(0, 9, 150, 2, ccx, nv);
    run(0, 7, 150, 2, c34, nv);
    $display("8x2 block 150: 2of3 %0d  3of3 %0d  2of4 %0d  complex %0d  3of4 %0d cycles", c23, c33, c24, ccx, c34);
    check(c33 * 10 >= c23 * 16 && c33 * 10 <= c23 * 22, "3of3 about twice 2of3");
    check(ccx * 10 <= c24 * 11 && ccx * 10 >= c24 * 9, "complex policy costs as 2of4");

    // 5x3 against 8x2
    run(1, 4, 150, 2, d23, nv);
    run(1, 5, 150, 2, d33, nv);
    run(1, 7, 150, 2, d34, nv);
    $display("5x3 block 150: 2of3 %0d  3of3 %0d  3of4 %0d cycles", d23, d33, d34);
    check(d23 * 10 >= c23 * 13, "8x2 at least 30% faster for 2of3");
    check(c33 * 10 >= d33 * 11, "5x3 at least 10% faster for 3of3");
    check(c34 * 10 >= d34 * 11, "5x3 at least 10% faster for 3of4");

    // block sizes, 8x2, 2of2
    for (int k = 0; k < 5; k++) begin
      run(0, 0, 50 * (k + 1), 2, n, nv);
      cs[k] = n;
      $display("8x2 2of2 block %0d: %0d cycles, %0d per tx", 50 * (k + 1), n, n / (50 * (k + 1)));
      if (k > 0) check(cs[k] * 50 * k <= cs[k-1] * 50 * (k + 1) * 102 / 100,
                       $sformatf("cycles per tx do not grow at block %0d", 50 * (k + 1)));
    end

    // reads/writes per transaction, 8x2, 2of2, block 150
    for (int w = 3; w <= 13; w += 2) begin
      run(0, 0, 150, w, n, nv);
      if (w == 3) rw3 = n;
      $display("8x2 2of2 block 150 %0drw: %0d cycles", w, n);
      check(n * 100 <= rw3 * 105, $sformatf("%0d rw hidden behind the engines", w));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

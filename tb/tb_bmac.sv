// tb_bmac: end-to-end test of the Blockchain Machine top at its default
// parameters (8 tx_validators x 2 engines, 25 engine models, 256-entry
// transaction buffer, 8192-entry database). A protocol-processor model writes
// generated blocks into the five input buffers; a host model polls the
// AXI4-Lite STATUS register, reads the block result and every TX_FLAGS word,
// compares them with the reference model and releases the registers.
// Counts each mechanism and fails for any that never happened: block
// signature rejection, client-signature skip, endorsement short-circuit,
// policy failure, MVCC conflict, empty block, result hold-off in reg_map,
// out-of-order completion of transactions across validators, and a
// 256-transaction block, and a digest from each of the three SHA-256 hash
// calculators ("abc", known answer). For the 256-transaction block it also checks that
// the validators work in parallel: validation must take less than a third
// of the cycles a single validator would need.
module tb_bmac;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int NTXV = 8;
  localparam int NENG = 2;
  localparam int NE   = 1 + NTXV * (1 + NENG);
  localparam int LAT  = 20;
  localparam int NB   = 20;
  logic clk = 0, rst_n = 0;
  logic blk_in_valid, blk_in_ready, tx_in_valid, tx_in_ready, ends_in_valid, ends_in_ready;
  logic rd_in_valid, rd_in_ready, wr_in_valid, wr_in_ready;
  blk_fifo_t blk_in;
  tx_fifo_t tx_in;
  ends_fifo_t ends_in;
  rdset_fifo_t rd_in;
  wrset_fifo_t wr_in;
  logic [NE-1:0] eng_req_valid, eng_req_ready, eng_resp_valid, eng_resp_ok;
  ecdsa_req_t [NE-1:0] eng_req;
  int served [NE];
  bp_events_t ev;
  int checks = 0, failures = 0;
  int n_ends_issued = 0, n_ends_skipped = 0, n_tx_skipped = 0, n_conflict = 0;
  int n_bad_block = 0, n_empty = 0, n_policy_fail = 0, n_ooo = 0, n_big = 0, total_ends = 0;
  logic [7:0]  s_axi_awaddr = 0, s_axi_araddr = 0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [31:0] s_axi_wdata = 0, s_axi_rdata;
  logic [3:0]  s_axi_wstrb = 0;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  int n_holdoff = 0;
  logic [2:0] hash_in_valid = '0, hash_in_ready, hash_in_last = '0, hash_out_valid, hash_out_ready = '0;
  logic [2:0][31:0] hash_in_data = '0;
  logic [2:0][2:0] hash_in_bytes = '0;
  logic [2:0][255:0] hash_out_digest;
  int n_hash = 0;

  // the three hash calculators: "abc" in each, one after another
  initial begin
    wait (rst_n);
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      hash_in_valid[i] = 1; hash_in_data[i] = 32'h61626300; hash_in_last[i] = 1; hash_in_bytes[i] = 3'd3;
      @(posedge clk);
      while (!hash_in_ready[i]) @(posedge clk);
      @(negedge clk);
      hash_in_valid[i] = 0;
      while (!hash_out_valid[i]) @(negedge clk);
      check(hash_out_digest[i] == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
            $sformatf("hash calculator %0d digest", i));
      hash_out_ready[i] = 1;
      @(negedge clk);
      hash_out_ready[i] = 0;
      n_hash++;
    end
  end

  blk_fifo_t bq [$];
  tx_fifo_t    tq [$];
  ends_fifo_t  eq [$];
  rdset_fifo_t rq [$];
  wrset_fifo_t wq [$];
  res_fifo_t   expq [$];
  int          exp_vtx [$];
  int          nres = 0;
  int          big_blk = -1, big_validate = 0;

  bmac  dut (.*);
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
  assign blk_in_valid  = bq.size() != 0;  assign blk_in  = blk_in_valid  ? bq[0] : '0;
  assign tx_in_valid   = tq.size() != 0;  assign tx_in   = tx_in_valid   ? tq[0] : '0;
  assign ends_in_valid = eq.size() != 0;  assign ends_in = ends_in_valid ? eq[0] : '0;
  assign rd_in_valid   = rq.size() != 0;  assign rd_in   = rd_in_valid   ? rq[0] : '0;
  assign wr_in_valid   = wq.size() != 0;  assign wr_in   = wr_in_valid   ? wq[0] : '0;
  logic fb = 0, ft = 0, fe = 0, fr = 0, fw = 0;
  always @(posedge clk) begin
    fb <= rst_n && blk_in_valid && blk_in_ready;
    ft <= rst_n && tx_in_valid && tx_in_ready;
    fe <= rst_n && ends_in_valid && ends_in_ready;
    fr <= rst_n && rd_in_valid && rd_in_ready;
    fw <= rst_n && wr_in_valid && wr_in_ready;
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
      if (dut.u_bp.u_validate.col_valid[v] && !dut.u_bp.u_validate.col_ready[v]) begin
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
    check(r.stats.valid_txs == 32'(exp_vtx[nres]), "valid_txs");
    check(r.stats.verify_cycles >= 32'(LAT), $sformatf("verify_cycles %0d", r.stats.verify_cycles));
    check(r.stats.total_cycles >= r.stats.validate_cycles && r.stats.total_cycles >= r.stats.verify_cycles,
          "total covers verify and validate");
    if (nres == big_blk) big_validate = int'(r.stats.validate_cycles);
    nres++;
  endtask

  always @(posedge clk) if (rst_n && dut.s_valid && !dut.s_ready) n_holdoff++;

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1; s_axi_rready = 1;
    @(posedge clk);
    while (!s_axi_arready) @(posedge clk);
    @(negedge clk);
    s_axi_arvalid = 0;
    @(posedge clk);
    while (!s_axi_rvalid) @(posedge clk);
    d = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_awvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hf; s_axi_wvalid = 1;
    s_axi_bready = 1;
    @(posedge clk);
    while (!(s_axi_awready && s_axi_wready)) @(posedge clk);
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    @(posedge clk);
    while (!s_axi_bvalid) @(posedge clk);
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  // host model: poll, read the result, release
  initial begin
    logic [31:0] d;
    wait (rst_n);
    forever begin
      res_fifo_t r;
      r = '0;
      do begin
        axi_read(8'h00, d);
        repeat ($urandom_range(0, 20)) @(negedge clk);
      end while (d[0] != 1'b1);
      axi_read(8'h08, d); r.block_num = d;
      axi_read(8'h0C, d); r.block_valid = d[0];
      axi_read(8'h10, d); r.num_txs = NTX_W'(d);
      axi_read(8'h14, d); r.stats.verify_cycles = d;
      axi_read(8'h18, d); r.stats.validate_cycles = d;
      axi_read(8'h1C, d); r.stats.total_cycles = d;
      axi_read(8'h20, d); r.stats.valid_txs = d;
      for (int w = 0; w < MAX_TXS / 32; w++) begin
        axi_read(8'(8'h40 + 4 * w), d);
        r.tx_flags[w*32 +: 32] = d;
      end
      check_res(r);
      axi_write(8'h04, 32'h1);
    end
  end

  initial begin
    repeat (600000) @(posedge clk);
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
    g.key_range = 64; g.max_rw = 3;
    g.cc_list = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9};
    for (int b = 0; b < NB; b++) begin
      res_fifo_t r;
      blk_info_t bi;
      int ntx;
      ntx = (b == 3) ? 0 : (b == 6) ? 256 : $urandom_range(1, 40);
      if (b == 6) begin g.pct_bad_block = 0; g.pct_bad_tx = 0; g.pct_bad_ends = 0; g.pct_stale = 0; g.cc_list = '{0}; end
      g.gen(b + 1, ntx);
      if (b == 6) begin g.pct_bad_block = 15; g.pct_bad_tx = 10; g.pct_bad_ends = 15; g.pct_stale = 5;
                        g.cc_list = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9}; big_blk = b; end
      if (b == 1) begin g.blk.orderer = mk_req(0, 99); g.exp_valid = 0; g.exp_flags = '0; g.exp_valid_txs = 0; end
      bq.push_back(g.blk);
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
    check(n_holdoff > 0, "result held off in reg_map");
    check(n_big > 0, "256-transaction block");
    check(n_hash == 3, "all three hash calculators produced a digest");
    // a single validator needs per transaction at least client verify plus
    // two endorsements: 2 rounds of LAT+3 cycles; require a 3x speed-up
    check(big_validate > 0 && big_validate * 3 < 256 * 2 * (LAT + 3),
          $sformatf("256-tx block validated in %0d cycles", big_validate));
    begin
      int tot;
      tot = 0;
      for (int e = 0; e < NE; e++) tot += served[e];
      check(tot > 0, "engines used");
      $display("engine requests %0d", tot);
    end
    $display("mechanisms: bad_block=%0d empty=%0d tx_skipped=%0d ends_issued=%0d ends_skipped=%0d policy_or_mvcc=%0d conflicts=%0d ooo=%0d",
             n_bad_block, n_empty, n_tx_skipped, n_ends_issued, n_ends_skipped, n_policy_fail, n_conflict, n_ooo);
    $display("holdoff=%0d big_block_validate_cycles=%0d", n_holdoff, big_validate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tx_vscc: drives transactions and their endorsements into one tx_vscc
// with two model ECDSA engines. Directed cases check short-circuit
// evaluation (2-of-3 with all endorsements good verifies 2 and discards 1;
// 3-of-3 verifies 3 and needs a second engine round, about twice the
// latency), discarding for transactions already invalid, and a failed
// endorsement that makes a policy unsatisfiable. A random phase compares every
// result with the reference policy evaluation.
module tb_tx_vscc;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int LAT = 30, NENG = 2;
  logic clk = 0, rst_n = 0;
  logic tx_in_valid, tx_in_ready, ends_in_valid, ends_in_ready, out_valid, out_ready;
  tx_info_t tx_in, out;
  ends_fifo_t ends_in;
  logic [NENG-1:0] eng_req_valid, eng_req_ready, eng_resp_valid, eng_resp_ok;
  ecdsa_req_t [NENG-1:0] eng_req;
  logic ev_issue, ev_skip;
  int served [NENG];
  int n_issue = 0, n_skip = 0;
  int checks = 0, failures = 0;
  ends_fifo_t eq [$];

  tx_vscc #(.NENG(NENG), .ENDS_DEPTH(16)) dut (.*);
  for (genvar e = 0; e < NENG; e++) begin : g_eng
    ecdsa_engine_model #(.LAT(LAT)) eng (.clk, .rst_n, .req_valid(eng_req_valid[e]), .req_ready(eng_req_ready[e]),
      .req(eng_req[e]), .resp_valid(eng_resp_valid[e]), .resp_ok(eng_resp_ok[e]), .served(served[e]));
  end
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (ev_issue) n_issue++;
    if (ev_skip) n_skip++;
  end
  // endorsement feeder
  assign ends_in_valid = eq.size() != 0;
  assign ends_in = (eq.size() != 0) ? eq[0] : '0;
  // pop on the falling edge after a transfer, so the design samples stable data
  logic fire_e = 0;
  always @(posedge clk) fire_e <= ends_in_valid && ends_in_ready;
  always @(negedge clk) if (fire_e) void'(eq.pop_front());

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one transaction; returns cycles from acceptance to result
  task automatic run_tx(int cc, bit tv, bit [4:1] good, int seq, output int cycles,
                        output int issued, output int skipped);
    int t0, i0, s0, norg;
    norg = policy_orgs(cc);
    for (int o = 1; o <= norg; o++) begin
      ends_fifo_t e;
      e.endorser_id = mk_id(o, ROLE_PEER, 0);
      e.endorser    = mk_req(good[o], seq * 8 + o);
      eq.push_back(e);
    end
    @(negedge clk);
    tx_in = '0;
    tx_in.seq = SEQ_W'(seq);
    tx_in.valid = tv;
    tx_in.cc_id = CC_W'(cc);
    tx_in.num_ends = NENDS_W'(norg);
    tx_in.rdset_size = 8'd3;
    tx_in_valid = 1;
    i0 = n_issue; s0 = n_skip;
    do @(posedge clk); while (!tx_in_ready);
    t0 = $time;
    @(negedge clk); tx_in_valid = 0;
    while (!out_valid) @(negedge clk);
    cycles = ($time - t0 + 5) / 10;
    check(out.valid == (tv && policy_ref(cc, good)),
          $sformatf("cc=%0d tv=%b good=%b got %b", cc, tv, good, out.valid));
    check(out.seq == SEQ_W'(seq) && out.rdset_size == 8'd3, "fields pass");
    out_ready = 1;
    @(negedge clk); out_ready = 0;
    issued = n_issue - i0; skipped = n_skip - s0;
    check(issued + skipped == norg, "every endorsement consumed once");
  endtask

  initial begin
    int c23, c33, iss, skp;
    tx_in_valid = 0; out_ready = 0; tx_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 2of3, all good: short-circuit after two
    run_tx(4, 1, 4'b0111, 1, c23, iss, skp);
    check(iss == 2 && skp == 1, $sformatf("2of3 short-circuit: issued %0d skipped %0d", iss, skp));
    // 3of3, all good: three verifications, two engine rounds
    run_tx(5, 1, 4'b0111, 2, c33, iss, skp);
    check(iss == 3 && skp == 0, "3of3 verifies all three");
    check(c33 >= 2 * (LAT + 1) && c23 < 2 * (LAT + 1), $sformatf("rounds: 2of3 %0d, 3of3 %0d cycles", c23, c33));
    // invalid transaction: everything discarded, nothing verified
    run_tx(6, 0, 4'b1111, 3, c23, iss, skp);
    check(iss == 0 && skp == 4, "invalid tx discards all endorsements");
    check(c23 <= 6, "invalid tx passes quickly");
    // 2of2 with Org2 failing: both verified, invalid
    run_tx(0, 1, 4'b0001, 4, c23, iss, skp);
    check(iss == 2, "2of2 failing verifies both");
    // 1of2 with Org1 good: second discarded once the first result is in
    run_tx(3, 1, 4'b0011, 5, c23, iss, skp);
    check(iss == 2 || (iss == 1 && skp == 1), "1of2");
    // random
    for (int i = 0; i < 150; i++) begin
      int cc;
      cc = $urandom_range(0, 9);
      run_tx(cc, $urandom_range(0, 9) != 0, 4'($urandom), 6 + i, c23, iss, skp);
    end
    $display("issued %0d skipped %0d", n_issue, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

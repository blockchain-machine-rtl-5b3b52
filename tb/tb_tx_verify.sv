// tb_tx_verify: transactions with a good or a bad client signature in a valid
// block, and transactions of an invalid block. Checks the resulting valid bit,
// that bookkeeping fields pass unchanged, that an invalid block's transaction
// never reaches the engine and leaves after one cycle, and that a verified
// transaction takes LAT + 3 cycles with the model engine (its response comes LAT + 1
// cycles after it accepts a request).
module tb_tx_verify;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int LAT = 12;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, ev_skip;
  vfy_req_t in;
  tx_info_t out;
  logic eng_req_valid, eng_req_ready, eng_resp_valid, eng_resp_ok;
  ecdsa_req_t eng_req;
  int served;
  int checks = 0, failures = 0;

  tx_verify dut (.*);
  ecdsa_engine_model #(.LAT(LAT)) eng (.clk, .rst_n, .req_valid(eng_req_valid), .req_ready(eng_req_ready),
    .req(eng_req), .resp_valid(eng_resp_valid), .resp_ok(eng_resp_ok), .served);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      bit bv, cv;
      int t0, n0;
      bv = (i % 4) != 3;
      cv = (i % 3) != 2;
      n0 = served;
      @(negedge clk);
      in.info = '0;
      in.info.seq = SEQ_W'(i);
      in.info.valid = bv;
      in.info.cc_id = CC_W'(i % 10);
      in.info.num_ends = NENDS_W'(i % 5);
      in.info.rdset_size = SZ_W'(i);
      in.info.wrset_size = SZ_W'(2 * i);
      in.client = mk_req(cv, i);
      in_valid = 1;
      check(in_ready, "free when idle");
      @(posedge clk); t0 = $time;
      @(negedge clk); in_valid = 0;
      while (!out_valid) @(negedge clk);
      check(out.valid == (bv && cv), $sformatf("tx %0d valid", i));
      check(out.seq == SEQ_W'(i) && out.cc_id == CC_W'(i % 10) && out.num_ends == NENDS_W'(i % 5)
            && out.rdset_size == SZ_W'(i) && out.wrset_size == SZ_W'(2 * i), "fields pass");
      if (!bv) begin
        check(served == n0, "no engine request for an invalid block");
        check(($time - t0) / 10 == 0, "skip latency");
      end else begin
        check(served == n0 + 1, "one engine request");
        check(($time - t0 + 5) / 10 == LAT + 3, $sformatf("latency %0d", ($time - t0 + 5) / 10));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

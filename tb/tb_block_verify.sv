// tb_block_verify: blocks with good and bad orderer signatures. Checks
// block_valid, block_num/num_txs pass-through, one engine request per block,
// the latency (LAT + 3 cycles with the model engine)
// and the start/done event pulses.
module tb_block_verify;
  import bmac_pkg::*;
  import tb_pkg::*;
  localparam int LAT = 15;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, ev_start, ev_done;
  blk_fifo_t in;
  blk_info_t out;
  logic eng_req_valid, eng_req_ready, eng_resp_valid, eng_resp_ok;
  ecdsa_req_t eng_req;
  int served, nstart = 0, ndone = 0;
  int checks = 0, failures = 0;

  block_verify dut (.*);
  ecdsa_engine_model #(.LAT(LAT)) eng (.clk, .rst_n, .req_valid(eng_req_valid), .req_ready(eng_req_ready),
    .req(eng_req), .resp_valid(eng_resp_valid), .resp_ok(eng_resp_ok), .served);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (ev_start) nstart++;
    if (ev_done) ndone++;
  end

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
    in_valid = 0; out_ready = 0; in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      bit g;
      int t0;
      g = (i % 3) != 1;
      @(negedge clk);
      in.block_num = 32'(1000 + i);
      in.num_txs   = NTX_W'(i * 13);
      in.orderer   = mk_req(g, i + 77);
      in_valid = 1;
      @(posedge clk); t0 = $time;
      check(in_ready, "accepts when idle");
      @(negedge clk); in_valid = 0;
      while (!out_valid) @(negedge clk);
      check(($time - t0 + 5) / 10 == LAT + 3, $sformatf("latency %0d", ($time - t0 + 5) / 10));
      repeat (i % 3) begin
        @(negedge clk);
        check(out_valid && !in_ready, "holds result until taken");
      end
      check(out.block_valid == g, "block_valid");
      check(out.block_num == 32'(1000 + i) && out.num_txs == NTX_W'(i * 13), "fields");
      out_ready = 1;
      @(negedge clk); out_ready = 0;
    end
    check(served == 20, "one request per block");
    check(nstart == 20 && ndone == 20, "event pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

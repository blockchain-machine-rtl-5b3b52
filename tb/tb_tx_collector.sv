// tb_tx_collector: four sources each hold transactions of several blocks and
// offer them after random delays, so they finish out of order. The block
// sizes are small so two blocks with the same sequence numbers are in flight
// together. Checks that the output is exactly the original order (sequence
// number and block tag) and that nothing is lost or duplicated.
module tb_tx_collector;
  import bmac_pkg::*;
  localparam int NTXV = 4;
  logic clk = 0, rst_n = 0;
  logic [NTXV-1:0] in_valid, in_ready;
  tx_info_t [NTXV-1:0] in;
  logic out_valid, out_ready;
  tx_info_t out;
  int checks = 0, failures = 0;
  tx_info_t src [NTXV][$];
  int delay [NTXV];
  tx_info_t expq [$];
  int nout = 0;

  tx_collector #(.NTXV(NTXV)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always_comb for (int v = 0; v < NTXV; v++) begin
    in_valid[v] = src[v].size() != 0 && delay[v] == 0;
    in[v]       = (src[v].size() != 0) ? src[v][0] : '0;
  end
  logic [NTXV-1:0] fire = '0;
  logic fo = 0;
  always @(posedge clk) begin
    fire <= in_valid & in_ready;
    fo   <= out_valid && out_ready;
    if (rst_n && out_valid && out_ready) begin
      check(nout < expq.size() && out == expq[nout], $sformatf("item %0d in order", nout));
      nout++;
    end
  end
  always @(negedge clk) begin
    for (int v = 0; v < NTXV; v++) begin
      if (fire[v]) begin void'(src[v].pop_front()); delay[v] = $urandom_range(0, 6); end
      else if (delay[v] > 0) delay[v]--;
    end
    out_ready <= ($urandom_range(0, 4) != 0);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [EPOCH_W-1:0] ep;
    int v;
    ep = 0; v = 0;
    for (int v2 = 0; v2 < NTXV; v2++) delay[v2] = $urandom_range(0, 20);
    for (int b = 0; b < 60; b++) begin
      int n;
      n = $urandom_range(1, 6);
      for (int t = 0; t < n; t++) begin
        tx_info_t x;
        x = '0;
        x.seq = SEQ_W'(t); x.last = (t == n - 1); x.epoch = ep;
        x.valid = 1'($urandom); x.cc_id = CC_W'(b); x.rdset_size = SZ_W'($urandom);
        expq.push_back(x);
        // round-robin-ish distribution keeps each source in order
        src[v].push_back(x);
        v = (v + 1 + $urandom_range(0, 1)) % NTXV;
      end
      ep = ep + 1'b1;
    end
    out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nout == expq.size());
    repeat (5) @(posedge clk);
    check(out_valid == 0, "nothing left over");
    check(nout == expq.size(), "all collected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

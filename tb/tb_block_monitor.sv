// tb_block_monitor: drives the three time-stamp events and block results on
// a random but legal schedule (blocks overlap: block k+1 starts verification
// while block k is still validating) with random backpressure on the output,
// and checks that every result leaves with verify, validate and total cycle
// counts equal to the distances between its own events, and the number of
// valid transactions equal to the popcount of its flags.
module tb_block_monitor;
  import bmac_pkg::*;
  localparam int NB = 40;
  logic clk = 0, rst_n = 0;
  logic ev_vstart = 0, ev_vdone = 0, ev_val_start = 0;
  logic res_in_valid = 0, res_in_ready, res_out_valid, res_out_ready = 0;
  res_fifo_t res_in = '0, res_out;
  int checks = 0, failures = 0;
  int cyc = 0;
  int t_vs[NB], t_vd[NB], t_sv[NB], t_rs[NB];
  logic [MAX_TXS-1:0] fl[NB];
  int nout = 0, nin = 0;

  block_monitor dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // schedule
  initial begin
    int t = 5, last_res = 0;
    for (int k = 0; k < NB; k++) begin
      t_vs[k] = t + $urandom_range(1, 4);
      t_vd[k] = t_vs[k] + $urandom_range(1, 30);
      t_sv[k] = ((t_vd[k] > last_res) ? t_vd[k] : last_res) + $urandom_range(1, 5);
      t_rs[k] = t_sv[k] + $urandom_range(1, 40);
      last_res = t_rs[k] + 40;       // leave room for output backpressure
      t = t_vd[k];
      // at most a few blocks in flight, as block_fifo and block_validate allow
      if (k >= 3 && t < t_rs[k-3] + 40) t = t_rs[k-3] + 40;
      for (int w = 0; w < MAX_TXS / 32; w++) fl[k][w*32 +: 32] = $urandom;
    end
  end

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  logic fired = 0;
  always @(posedge clk) fired <= res_in_valid && res_in_ready && res_out_valid && res_out_ready;

  always @(negedge clk) if (rst_n) begin
    ev_vstart = 0; ev_vdone = 0; ev_val_start = 0;
    for (int k = 0; k < NB; k++) begin
      if (t_vs[k] == cyc) ev_vstart = 1;
      if (t_vd[k] == cyc) ev_vdone = 1;
      if (t_sv[k] == cyc) ev_val_start = 1;
    end
    if (fired) begin res_in_valid = 0; nin++; end
    if (!res_in_valid && nin < NB && cyc >= t_rs[nin]) begin
      res_in_valid = 1;
      res_in = '0;
      res_in.block_num = 32'(nin);
      res_in.tx_flags = fl[nin];
    end
    res_out_ready = ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n && res_out_valid && res_out_ready) begin
    int k;
    k = int'(res_out.block_num);
    check(k == nout, "result order");
    check(res_out.stats.verify_cycles == 32'(t_vd[k] - t_vs[k]), $sformatf("blk %0d verify %0d", k, res_out.stats.verify_cycles));
    check(res_out.stats.validate_cycles == 32'(cyc - t_sv[k]), $sformatf("blk %0d validate %0d want %0d", k, res_out.stats.validate_cycles, cyc - t_sv[k]));
    check(res_out.stats.total_cycles == 32'(cyc - t_vs[k]), $sformatf("blk %0d total", k));
    check(res_out.stats.valid_txs == 32'($countones(fl[k])), "valid_txs");
    check(res_out.tx_flags == fl[k], "flags pass through");
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      wait (nout == NB);
      begin repeat (20000) @(posedge clk); failures++; $display("FAIL: watchdog"); end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

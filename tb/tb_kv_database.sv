// tb_kv_database: a 256-entry database. Checks the clear sweep after reset
// (ready low for exactly ENTRIES cycles, then every entry reads zero), random
// writes and reads against a model with a one-cycle read latency, and the
// lock: a read of a key written in the previous cycle is held off for one
// cycle while a read of another key is not.
module tb_kv_database;
  import bmac_pkg::*;
  localparam int N = 256, AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic rd_valid, rd_ready, rd_resp_valid, wr_valid, wr_ready, init_done, ev_lock;
  logic [AW-1:0] rd_key, wr_key;
  db_entry_t rd_resp, wr_data;
  int checks = 0, failures = 0;
  db_entry_t model [N];
  int locks = 0;

  kv_database #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (ev_lock) locks++;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_read(int k, output db_entry_t d, output int waited);
    @(negedge clk); rd_valid = 1; rd_key = AW'(k); waited = 0;
    #1;
    while (!rd_ready) begin @(negedge clk); waited++; #1; end
    @(negedge clk); rd_valid = 0;
    check(rd_resp_valid, "response one cycle after the read");
    d = rd_resp;
  endtask

  initial begin
    int cyc, w;
    db_entry_t d;
    rd_valid = 0; wr_valid = 0; rd_key = 0; wr_key = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!init_done) begin @(posedge clk); cyc++; end
    check(cyc == N, $sformatf("clear sweep %0d cycles", cyc));
    for (int k = 0; k < N; k++) model[k] = '0;
    for (int k = 0; k < N; k += 17) begin do_read(k, d, w); check(d == '0, "cleared"); end
    for (int i = 0; i < 600; i++) begin
      int k;
      k = $urandom_range(0, 31);
      if ($urandom_range(0, 1)) begin
        @(negedge clk);
        wr_valid = 1; wr_key = AW'(k);
        wr_data.value = {$urandom, $urandom}; wr_data.version = {$urandom, 8'($urandom)};
        model[k] = wr_data;
        @(negedge clk); wr_valid = 0;
      end else begin
        do_read(k, d, w);
        check(d == model[k], $sformatf("read key %0d", k));
      end
    end
    // lock: write key 5, read key 5 in the next cycle
    @(negedge clk); wr_valid = 1; wr_key = 5; wr_data = '{value: 64'h1234, version: 40'h77};
    model[5] = wr_data;
    @(negedge clk); wr_valid = 0; rd_valid = 1; rd_key = 5;
    #1 check(!rd_ready, "read of a key being written is held off");
    rd_key = 6;
    #1 check(rd_ready, "read of another key is not");
    rd_key = 5;
    @(negedge clk);
    #1 check(rd_ready, "lock released after the write");
    @(negedge clk); rd_valid = 0;
    check(rd_resp == model[5], "read after write returns new data");
    check(locks >= 1, "lock event seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

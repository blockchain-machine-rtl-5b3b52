// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, occupancy, full/empty flags and zero read latency.
module tb_sync_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int saw_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      check(count == model.size(), "count");
      check(out_valid == (model.size() != 0), "out_valid");
      check(in_ready == (model.size() != D), "in_ready");
      if (model.size() != 0) check(out_data == model[0], "data order");
      if (model.size() == D) saw_full++;
      in_valid  = ($urandom_range(0, 99) < (i < 500 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (i < 500 ? 30 : 70));
      in_data   = W'($urandom);
      @(posedge clk);
      #1;
    end
    check(saw_full > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) void'(model.pop_front());
    if (in_valid && in_ready) model.push_back(in_data);
  end
endmodule

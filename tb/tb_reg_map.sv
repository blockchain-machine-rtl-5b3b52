// tb_reg_map: a host model polls STATUS over AXI4-Lite, reads every register
// of the held result (block fields, the four statistics, all eight TX_FLAGS
// words) and compares them with what was pushed into res, then releases the
// result. Checks that reg_map refuses new results while one is held, that
// writing 0 to RELEASE or writing another address does not release, that
// unused addresses read 0, and that a read answers one cycle after ARVALID.
module tb_reg_map;
  import bmac_pkg::*;
  localparam int NB = 12;
  logic clk = 0, rst_n = 0;
  logic res_valid, res_ready;
  res_fifo_t res;
  logic [7:0]  s_axi_awaddr = 0, s_axi_araddr = 0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [31:0] s_axi_wdata = 0, s_axi_rdata;
  logic [3:0]  s_axi_wstrb = 0;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  int checks = 0, failures = 0, holdoff = 0;
  res_fifo_t q [$];
  res_fifo_t sent [$];

  reg_map dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  assign res_valid = q.size() != 0;
  assign res = res_valid ? q[0] : '0;
  logic fire = 0;
  always @(posedge clk) begin
    fire <= rst_n && res_valid && res_ready;
    if (rst_n && res_valid && !res_ready) holdoff++;
  end
  always @(negedge clk) if (fire) sent.push_back(q.pop_front());

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    int lat;
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1;
    @(posedge clk);
    while (!s_axi_arready) @(posedge clk);
    @(negedge clk);
    s_axi_arvalid = 0;
    check(s_axi_rvalid === 1'b1, "read data one cycle after address");
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axi_rready = 1;
    @(posedge clk);
    while (!s_axi_rvalid) @(posedge clk);
    d = s_axi_rdata;
    check(s_axi_rresp == 2'b00, "rresp OKAY");
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_awvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hf; s_axi_wvalid = 1;
    @(posedge clk);
    while (!(s_axi_awready && s_axi_wready)) @(posedge clk);
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axi_bready = 1;
    @(posedge clk);
    while (!s_axi_bvalid) @(posedge clk);
    check(s_axi_bresp == 2'b00, "bresp OKAY");
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    for (int b = 0; b < NB; b++) begin
      res_fifo_t r;
      r.block_num = $urandom; r.block_valid = 1'($urandom); r.num_txs = NTX_W'($urandom_range(0, 256));
      r.stats.verify_cycles = $urandom; r.stats.validate_cycles = $urandom;
      r.stats.total_cycles = $urandom; r.stats.valid_txs = $urandom;
      for (int w = 0; w < MAX_TXS / 32; w++) r.tx_flags[w*32 +: 32] = $urandom;
      q.push_back(r);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      res_fifo_t e;
      int polls = 0;
      do begin axi_read(8'h00, d); polls++; end while (d[0] != 1'b1 && polls < 100);
      check(d[0] == 1'b1, "STATUS ready");
      e = sent[b];
      check(sent.size() == b + 1, "only one result taken while held");
      axi_read(8'h08, d); check(d == e.block_num, "BLOCK_NUM");
      axi_read(8'h0C, d); check(d == {31'b0, e.block_valid}, "BLOCK_VALID");
      axi_read(8'h10, d); check(d == 32'(e.num_txs), "NUM_TXS");
      axi_read(8'h14, d); check(d == e.stats.verify_cycles, "VERIFY_CYCLES");
      axi_read(8'h18, d); check(d == e.stats.validate_cycles, "VALIDATE_CYCLES");
      axi_read(8'h1C, d); check(d == e.stats.total_cycles, "TOTAL_CYCLES");
      axi_read(8'h20, d); check(d == e.stats.valid_txs, "VALID_TXS");
      for (int w = 0; w < MAX_TXS / 32; w++) begin
        axi_read(8'(8'h40 + 4 * w), d);
        check(d == e.tx_flags[w*32 +: 32], $sformatf("TX_FLAGS[%0d]", w));
      end
      axi_read(8'h30, d); check(d == 0, "unused address reads 0");
      if (b == 0) begin
        axi_write(8'h04, 32'h0);          // RELEASE with 0: no effect
        axi_write(8'h08, 32'h1);          // read-only register: no effect
        repeat (5) @(posedge clk);
        axi_read(8'h00, d); check(d[0] == 1'b1, "still held after non-release writes");
        check(sent.size() == 1, "no new result after non-release writes");
      end
      axi_write(8'h04, 32'h1);
      if (b == NB - 1) begin
        repeat (3) @(posedge clk);
        axi_read(8'h00, d); check(d[0] == 1'b0, "STATUS empty after last release");
      end
    end
    check(holdoff > 0, "result held off while registers full");
    $display("hold-off cycles %0d", holdoff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

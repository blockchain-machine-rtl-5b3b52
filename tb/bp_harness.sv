// bp_harness: test harness around one block_processor, used by the workload
// testbench to run several configurations side by side. It holds the five
// buffer queues (the testbench pushes generated blocks into them), one
// ecdsa_engine_model per engine port with latency LAT, and collects every
// block result into res_q. Queue entries are popped on the falling edge after
// a transfer, so the design samples stable inputs. The result port is always
// ready. Parameters NTXV/NENG/LAT select the configuration; nothing here is
// part of the design.
module bp_harness
  import bmac_pkg::*;
#(
  parameter int NTXV = 8,
  parameter int NENG = 2,
  parameter int LAT  = 20
) (
  input logic clk,
  input logic rst_n
);
  localparam int NE = 1 + NTXV * (1 + NENG);
  logic blk_valid, blk_ready, tx_valid, tx_ready, ends_valid, ends_ready;
  logic rd_valid, rd_ready, wr_valid, wr_ready, res_valid;
  blk_fifo_t   blk;
  tx_fifo_t    tx;
  ends_fifo_t  ends;
  rdset_fifo_t rd;
  wrset_fifo_t wr;
  res_fifo_t   res;
  bp_events_t  ev;
  logic [NE-1:0] eng_req_valid, eng_req_ready, eng_resp_valid, eng_resp_ok;
  ecdsa_req_t [NE-1:0] eng_req;
  int served [NE];

  blk_fifo_t   bq [$];
  tx_fifo_t    tq [$];
  ends_fifo_t  eq [$];
  rdset_fifo_t rq [$];
  wrset_fifo_t wq [$];
  res_fifo_t   res_q [$];
  int          ends_verified = 0, ends_skipped = 0;

  block_processor #(.NTXV(NTXV), .NENG(NENG)) u_bp (
    .clk, .rst_n,
    .blk_valid, .blk_ready, .blk, .tx_valid, .tx_ready, .tx,
    .ends_valid, .ends_ready, .ends, .rd_valid, .rd_ready, .rd, .wr_valid, .wr_ready, .wr,
    .eng_req_valid, .eng_req_ready, .eng_req, .eng_resp_valid, .eng_resp_ok,
    .res_valid, .res_ready (1'b1), .res, .ev
  );

  for (genvar e = 0; e < NE; e++) begin : g_eng
    ecdsa_engine_model #(.LAT(LAT)) u_eng (.clk, .rst_n,
      .req_valid (eng_req_valid[e]), .req_ready (eng_req_ready[e]), .req (eng_req[e]),
      .resp_valid (eng_resp_valid[e]), .resp_ok (eng_resp_ok[e]), .served (served[e]));
  end

  assign blk_valid  = bq.size() != 0;  assign blk  = blk_valid  ? bq[0] : '0;
  assign tx_valid   = tq.size() != 0;  assign tx   = tx_valid   ? tq[0] : '0;
  assign ends_valid = eq.size() != 0;  assign ends = ends_valid ? eq[0] : '0;
  assign rd_valid   = rq.size() != 0;  assign rd   = rd_valid   ? rq[0] : '0;
  assign wr_valid   = wq.size() != 0;  assign wr   = wr_valid   ? wq[0] : '0;
  logic fb = 0, ft = 0, fe = 0, fr = 0, fw = 0;
  always @(posedge clk) begin
    fb <= rst_n && blk_valid && blk_ready;
    ft <= rst_n && tx_valid && tx_ready;
    fe <= rst_n && ends_valid && ends_ready;
    fr <= rst_n && rd_valid && rd_ready;
    fw <= rst_n && wr_valid && wr_ready;
    if (rst_n && res_valid) res_q.push_back(res);
    if (rst_n) begin
      ends_verified += int'(ev.ends_issued);
      ends_skipped  += int'(ev.ends_skipped);
    end
  end
  always @(negedge clk) begin
    if (fb) void'(bq.pop_front());
    if (ft) void'(tq.pop_front());
    if (fe) void'(eq.pop_front());
    if (fr) void'(rq.pop_front());
    if (fw) void'(wq.pop_front());
  end
endmodule

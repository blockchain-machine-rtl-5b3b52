// block_monitor: measures where a block's time goes and attaches the numbers
// to the block result on its way into res_fifo.
//
// A free-running cycle counter is sampled at four points: when block_verify
// takes a block from block_fifo (ev_vstart), when it hands the verified block
// on (ev_vdone), when block_validate starts the block (ev_val_start) and when
// the result enters res_fifo. Because the block-level pipeline holds several
// blocks at once, the samples wait in small FIFOs and are matched to results
// in order. The statistics are: verify cycles, validate cycles, total cycles
// from block_fifo to res_fifo, and the number of valid transactions.
//
// Interface: res_in (from tx_mvcc_commit) passes to res_out combinationally
// with its stats field replaced; valid/ready pass straight through. Which
// statistics are kept is this implementation's choice; the design only says
// the monitor tracks the time spent in the operations.
//
// The FIFO occupancy counts are not needed (lint: unused signals). Lint
// notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the assertions, which lint reports as a net used both
// ways; that is intended.
module block_monitor
  import bmac_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ev_vstart,
  input  logic       ev_vdone,
  input  logic       ev_val_start,
  input  logic       res_in_valid,
  output logic       res_in_ready,
  input  res_fifo_t  res_in,
  output logic       res_out_valid,
  input  logic       res_out_ready,
  output res_fifo_t  res_out
);
  logic [STAT_W-1:0] now, t_vstart;
  logic [2*STAT_W-1:0] vq_out;
  logic [STAT_W-1:0]   sq_out;
  logic vq_valid, sq_valid, vq_in_ready, sq_in_ready;
  logic [$clog2(DEPTH+1)-1:0] vq_count, sq_count;

  wire done = res_out_valid && res_out_ready;

  sync_fifo #(.WIDTH(2*STAT_W), .DEPTH(DEPTH)) u_vq (
    .clk, .rst_n,
    .in_valid (ev_vdone), .in_ready (vq_in_ready), .in_data ({t_vstart, now}),
    .out_valid (vq_valid), .out_ready (done), .out_data (vq_out),
    .count (vq_count)
  );
  sync_fifo #(.WIDTH(STAT_W), .DEPTH(DEPTH)) u_sq (
    .clk, .rst_n,
    .in_valid (ev_val_start), .in_ready (sq_in_ready), .in_data (now),
    .out_valid (sq_valid), .out_ready (done), .out_data (sq_out),
    .count (sq_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now      <= '0;
      t_vstart <= '0;
    end else begin
      now <= now + 1'b1;
      if (ev_vstart) t_vstart <= now;
    end
  end

  wire [STAT_W-1:0] vs = vq_out[2*STAT_W-1:STAT_W];
  wire [STAT_W-1:0] vd = vq_out[STAT_W-1:0];

  always_comb begin
    res_out                       = res_in;
    res_out.stats.verify_cycles   = vd - vs;
    res_out.stats.validate_cycles = now - sq_out;
    res_out.stats.total_cycles    = now - vs;
    res_out.stats.valid_txs       = STAT_W'($countones(res_in.tx_flags));
  end
  assign res_out_valid = res_in_valid;
  assign res_in_ready  = res_out_ready;

  // Every result must have been time-stamped, and no time stamp may be lost.
  a_matched:  assert property (@(posedge clk) disable iff (!rst_n) done |-> (vq_valid && sq_valid));
  a_no_loss:  assert property (@(posedge clk) disable iff (!rst_n)
                               (ev_vdone -> vq_in_ready) && (ev_val_start -> sq_in_ready));
endmodule

// block_processor: the 2-stage block-level pipeline of the Blockchain
// Machine. block_verify checks the orderer signature of block n+1 on its own
// ECDSA engine while block_validate validates and commits the transactions of
// block n; a two-entry FIFO of verified blocks sits between them.
// block_monitor stamps the stage interfaces and adds statistics to each
// result before it leaves on res.
//
// Inputs are the read sides of block_fifo, tx_fifo, ends_fifo, rdset_fifo and
// wrset_fifo; the output is the write side of res_fifo. ECDSA engines are
// outside: engine 0 belongs to block_verify, engines 1.. to block_validate
// (see block_validate for their order). ev counts pipeline events per cycle.
//
// The verified-block FIFO's occupancy is not needed (lint: unused signal).
// Lint notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the assertions, which lint reports as a net used both
// ways; that is intended.
module block_processor
  import bmac_pkg::*;
#(
  parameter int NTXV       = 8,
  parameter int NENG       = 2,
  parameter int ENDS_DEPTH = 16,
  parameter int DB_SIZE    = DB_ENTRIES,
  localparam int NE        = 1 + NTXV * (1 + NENG)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    blk_valid,
  output logic                    blk_ready,
  input  blk_fifo_t               blk,
  input  logic                    tx_valid,
  output logic                    tx_ready,
  input  tx_fifo_t                tx,
  input  logic                    ends_valid,
  output logic                    ends_ready,
  input  ends_fifo_t              ends,
  input  logic                    rd_valid,
  output logic                    rd_ready,
  input  rdset_fifo_t             rd,
  input  logic                    wr_valid,
  output logic                    wr_ready,
  input  wrset_fifo_t             wr,
  output logic [NE-1:0]           eng_req_valid,
  input  logic [NE-1:0]           eng_req_ready,
  output ecdsa_req_t [NE-1:0]     eng_req,
  input  logic [NE-1:0]           eng_resp_valid,
  input  logic [NE-1:0]           eng_resp_ok,
  output logic                    res_valid,
  input  logic                    res_ready,
  output res_fifo_t               res,
  output bp_events_t              ev
);
  logic       vb_valid, vb_ready, vq_valid, vq_ready;
  blk_info_t  vb, vq;
  logic [1:0] vq_count;
  logic       ev_vstart, ev_vdone, ev_val_start;
  logic       r_valid, r_ready;
  res_fifo_t  r;

  block_verify u_verify (
    .clk, .rst_n,
    .in_valid (blk_valid), .in_ready (blk_ready), .in (blk),
    .eng_req_valid (eng_req_valid[0]), .eng_req_ready (eng_req_ready[0]),
    .eng_req (eng_req[0]),
    .eng_resp_valid (eng_resp_valid[0]), .eng_resp_ok (eng_resp_ok[0]),
    .out_valid (vb_valid), .out_ready (vb_ready), .out (vb),
    .ev_start (ev_vstart), .ev_done (ev_vdone)
  );

  sync_fifo #(.WIDTH($bits(blk_info_t)), .DEPTH(2)) u_vblk_fifo (
    .clk, .rst_n,
    .in_valid (vb_valid), .in_ready (vb_ready), .in_data (vb),
    .out_valid (vq_valid), .out_ready (vq_ready), .out_data (vq),
    .count (vq_count)
  );

  block_validate #(.NTXV(NTXV), .NENG(NENG), .ENDS_DEPTH(ENDS_DEPTH), .DB_SIZE(DB_SIZE)) u_validate (
    .clk, .rst_n,
    .blk_valid (vq_valid), .blk_ready (vq_ready), .blk (vq),
    .tx_valid, .tx_ready, .tx,
    .ends_valid, .ends_ready, .ends,
    .rd_valid, .rd_ready, .rd,
    .wr_valid, .wr_ready, .wr,
    .eng_req_valid (eng_req_valid[NE-1:1]), .eng_req_ready (eng_req_ready[NE-1:1]),
    .eng_req (eng_req[NE-1:1]),
    .eng_resp_valid (eng_resp_valid[NE-1:1]), .eng_resp_ok (eng_resp_ok[NE-1:1]),
    .res_valid (r_valid), .res_ready (r_ready), .res (r),
    .ev_start (ev_val_start),
    .ev
  );

  block_monitor u_monitor (
    .clk, .rst_n,
    .ev_vstart, .ev_vdone, .ev_val_start,
    .res_in_valid (r_valid), .res_in_ready (r_ready), .res_in (r),
    .res_out_valid (res_valid), .res_out_ready (res_ready), .res_out (res)
  );
endmodule

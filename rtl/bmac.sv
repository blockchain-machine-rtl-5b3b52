// bmac: top level of the Blockchain Machine hardware, the accelerator that
// validates Hyperledger Fabric blocks for a validator peer.
//
// The protocol processor (not part of this RTL) parses blocks arriving as
// self-contained UDP packets and writes five buffers: block_fifo (one entry
// per block), tx_fifo (per transaction), ends_fifo (per endorsement),
// rdset_fifo and wrset_fifo (per database read/write). Their write ports are
// the *_in ports here. The block_processor reads them and, per block,
// verifies the orderer signature, verifies each transaction's client
// signature, verifies endorsements against the chaincode's endorsement
// policy, runs the MVCC check against the on-chip state database and commits
// the write sets. The result of each block goes through res_fifo to reg_map,
// which software reads over AXI4-Lite before committing the block to its
// ledger.
//
// ECDSA verification engines are external IP; their NE = 1 + NTXV*(1+NENG)
// request/response ports are brought out (engine 0: block_verify; 1..NTXV:
// tx_verify; then NENG per tx_vscc). The default configuration is 8
// tx_validators with 2 engines per tx_vscc ("8x2"), blocks of up to 256
// transactions and an 8192-entry database. Buffer depths are this
// implementation's choice. All inputs are valid/ready streams; ev counts
// pipeline events per cycle for observation.
//
// Of the protocol processor, the three SHA-256 hash calculators (block,
// transaction and endorsement data) are included: hash_* ports, index 0..2,
// each a word stream in and a digest out. The extractor that would feed
// them and the writer that would put the digests into the buffers are not
// part of this RTL, so their streams are top ports too.
//
// The occupancy outputs of the buffer FIFOs are left unread (lint: unused
// signals); they are kept for debug visibility. Lint notes: rst_n is both
// the asynchronous reset of the flip-flops and the disable condition of the
// assertions, which lint reports as a net used both ways; that is intended.
module bmac
  import bmac_pkg::*;
#(
  parameter int NTXV       = 8,
  parameter int NENG       = 2,
  parameter int ENDS_DEPTH = 16,
  parameter int DB_SIZE    = DB_ENTRIES,
  parameter int BLK_DEPTH  = 4,
  parameter int TX_DEPTH   = 256,
  parameter int ENDS_FDEPTH = 512,
  parameter int RW_DEPTH   = 1024,
  localparam int NE        = 1 + NTXV * (1 + NENG)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // protocol processor side: buffer write ports
  input  logic                    blk_in_valid,
  output logic                    blk_in_ready,
  input  blk_fifo_t               blk_in,
  input  logic                    tx_in_valid,
  output logic                    tx_in_ready,
  input  tx_fifo_t                tx_in,
  input  logic                    ends_in_valid,
  output logic                    ends_in_ready,
  input  ends_fifo_t              ends_in,
  input  logic                    rd_in_valid,
  output logic                    rd_in_ready,
  input  rdset_fifo_t             rd_in,
  input  logic                    wr_in_valid,
  output logic                    wr_in_ready,
  input  wrset_fifo_t             wr_in,
  // ECDSA engines
  output logic [NE-1:0]           eng_req_valid,
  input  logic [NE-1:0]           eng_req_ready,
  output ecdsa_req_t [NE-1:0]     eng_req,
  input  logic [NE-1:0]           eng_resp_valid,
  input  logic [NE-1:0]           eng_resp_ok,
  // host AXI4-Lite
  input  logic [7:0]              s_axi_awaddr,
  input  logic                    s_axi_awvalid,
  output logic                    s_axi_awready,
  input  logic [31:0]             s_axi_wdata,
  input  logic [3:0]              s_axi_wstrb,
  input  logic                    s_axi_wvalid,
  output logic                    s_axi_wready,
  output logic [1:0]              s_axi_bresp,
  output logic                    s_axi_bvalid,
  input  logic                    s_axi_bready,
  input  logic [7:0]              s_axi_araddr,
  input  logic                    s_axi_arvalid,
  output logic                    s_axi_arready,
  output logic [31:0]             s_axi_rdata,
  output logic [1:0]              s_axi_rresp,
  output logic                    s_axi_rvalid,
  input  logic                    s_axi_rready,
  output bp_events_t              ev,
  // protocol processor hash calculators: 0 block, 1 transaction, 2 endorsement
  input  logic [2:0]              hash_in_valid,
  output logic [2:0]              hash_in_ready,
  input  logic [2:0][31:0]        hash_in_data,
  input  logic [2:0]              hash_in_last,
  input  logic [2:0][2:0]         hash_in_bytes,
  output logic [2:0]              hash_out_valid,
  input  logic [2:0]              hash_out_ready,
  output logic [2:0][255:0]       hash_out_digest
);
  logic        b_valid, b_ready, t_valid, t_ready, e_valid, e_ready;
  logic        r_valid, r_ready, w_valid, w_ready, q_valid, q_ready, s_valid, s_ready;
  blk_fifo_t   b;
  tx_fifo_t    t;
  ends_fifo_t  e;
  rdset_fifo_t r;
  wrset_fifo_t w;
  res_fifo_t   q, s;
  logic [$clog2(BLK_DEPTH+1)-1:0]   b_cnt;
  logic [$clog2(TX_DEPTH+1)-1:0]    t_cnt;
  logic [$clog2(ENDS_FDEPTH+1)-1:0] e_cnt;
  logic [$clog2(RW_DEPTH+1)-1:0]    r_cnt, w_cnt;
  logic [1:0]                       s_cnt;

  sync_fifo #(.WIDTH($bits(blk_fifo_t)), .DEPTH(BLK_DEPTH)) u_block_fifo (
    .clk, .rst_n, .in_valid(blk_in_valid), .in_ready(blk_in_ready), .in_data(blk_in),
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b), .count(b_cnt));
  sync_fifo #(.WIDTH($bits(tx_fifo_t)), .DEPTH(TX_DEPTH)) u_tx_fifo (
    .clk, .rst_n, .in_valid(tx_in_valid), .in_ready(tx_in_ready), .in_data(tx_in),
    .out_valid(t_valid), .out_ready(t_ready), .out_data(t), .count(t_cnt));
  sync_fifo #(.WIDTH($bits(ends_fifo_t)), .DEPTH(ENDS_FDEPTH)) u_ends_fifo (
    .clk, .rst_n, .in_valid(ends_in_valid), .in_ready(ends_in_ready), .in_data(ends_in),
    .out_valid(e_valid), .out_ready(e_ready), .out_data(e), .count(e_cnt));
  sync_fifo #(.WIDTH($bits(rdset_fifo_t)), .DEPTH(RW_DEPTH)) u_rdset_fifo (
    .clk, .rst_n, .in_valid(rd_in_valid), .in_ready(rd_in_ready), .in_data(rd_in),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r), .count(r_cnt));
  sync_fifo #(.WIDTH($bits(wrset_fifo_t)), .DEPTH(RW_DEPTH)) u_wrset_fifo (
    .clk, .rst_n, .in_valid(wr_in_valid), .in_ready(wr_in_ready), .in_data(wr_in),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w), .count(w_cnt));

  block_processor #(.NTXV(NTXV), .NENG(NENG), .ENDS_DEPTH(ENDS_DEPTH), .DB_SIZE(DB_SIZE)) u_bp (
    .clk, .rst_n,
    .blk_valid(b_valid), .blk_ready(b_ready), .blk(b),
    .tx_valid(t_valid), .tx_ready(t_ready), .tx(t),
    .ends_valid(e_valid), .ends_ready(e_ready), .ends(e),
    .rd_valid(r_valid), .rd_ready(r_ready), .rd(r),
    .wr_valid(w_valid), .wr_ready(w_ready), .wr(w),
    .eng_req_valid, .eng_req_ready, .eng_req, .eng_resp_valid, .eng_resp_ok,
    .res_valid(q_valid), .res_ready(q_ready), .res(q),
    .ev
  );

  sync_fifo #(.WIDTH($bits(res_fifo_t)), .DEPTH(2)) u_res_fifo (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_data(q),
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s), .count(s_cnt));

  reg_map u_reg_map (
    .clk, .rst_n,
    .res_valid(s_valid), .res_ready(s_ready), .res(s),
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready
  );
  for (genvar i = 0; i < 3; i++) begin : g_hash
    hash_calculator u_hash (
      .clk, .rst_n,
      .in_valid (hash_in_valid[i]), .in_ready (hash_in_ready[i]), .in_data (hash_in_data[i]),
      .in_last (hash_in_last[i]), .in_bytes (hash_in_bytes[i]),
      .out_valid (hash_out_valid[i]), .out_ready (hash_out_ready[i]), .out_digest (hash_out_digest[i])
    );
  end
endmodule

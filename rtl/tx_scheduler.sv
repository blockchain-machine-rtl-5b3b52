// tx_scheduler: hands the transactions of the current block to the
// tx_validators (tx_verify + tx_vscc pairs).
//
// For each verified block it takes from block_verify it reads exactly num_txs
// descriptors from tx_fifo; because the protocol processor writes the buffers
// in arrival order, no transaction ids are needed. Each transaction goes to
// the lowest-numbered tx_verify that is free, together with its position in
// the block (seq), a last flag, a block tag (epoch, the count of non-empty
// blocks modulo 64) and the block
// verification result as its initial valid bit. The scheduler then copies the
// transaction's num_ends endorsements from ends_fifo into the endorsement
// FIFO of the tx_vscc connected to that tx_verify. The block's
// {block_num, num_txs, block_valid} is also passed to tx_mvcc_commit (binfo),
// which assembles the block result.
//
// Interfaces are valid/ready. A transaction is issued in one cycle, each
// endorsement copy takes one cycle, and the first transaction of a block can
// be issued the cycle after the block is accepted. ev_start pulses when a
// block is accepted (block_monitor time-stamps it).
//
// Only the transaction count and block_valid of the held block are used;
// lint lists the block number bits as unused.
module tx_scheduler
  import bmac_pkg::*;
#(
  parameter int NTXV = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // verified blocks
  input  logic              blk_valid,
  output logic              blk_ready,
  input  blk_info_t         blk,
  // tx_fifo / ends_fifo read sides
  input  logic              tx_valid,
  output logic              tx_ready,
  input  tx_fifo_t          tx,
  input  logic              ends_valid,
  output logic              ends_ready,
  input  ends_fifo_t        ends,
  // to the tx_verify instances
  output logic [NTXV-1:0]   vfy_valid,
  input  logic [NTXV-1:0]   vfy_ready,
  output vfy_req_t          vfy,
  // to the endorsement FIFOs of the tx_vscc instances
  output logic [NTXV-1:0]   vends_valid,
  input  logic [NTXV-1:0]   vends_ready,
  output ends_fifo_t        vends,
  // block information to tx_mvcc_commit
  output logic              binfo_valid,
  input  logic              binfo_ready,
  output blk_info_t         binfo,
  output logic              ev_start
);
  localparam int IW = (NTXV > 1) ? $clog2(NTXV) : 1;
  typedef enum logic [1:0] {S_BLK, S_TX, S_ENDS} state_t;
  state_t state;

  blk_info_t          cur;
  logic [EPOCH_W-1:0] epoch;
  logic [NTX_W-1:0]   cnt;       // transactions issued in this block
  logic [IW-1:0]      sel;       // validator receiving the endorsements
  logic [NENDS_W-1:0] left;      // endorsements still to copy
  logic               last_tx;   // the transaction being copied is the last

  logic          any_free;
  logic [IW-1:0] free_idx;
  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int v = NTXV - 1; v >= 0; v--) begin
      if (vfy_ready[v]) begin
        any_free = 1'b1;
        free_idx = IW'(v);
      end
    end
  end

  wire issue    = (state == S_TX) && tx_valid && any_free;
  wire is_last  = (cnt == cur.num_txs - 1'b1);
  wire copy     = (state == S_ENDS) && ends_valid && vends_ready[sel];

  assign blk_ready   = (state == S_BLK) && binfo_ready;
  assign binfo_valid = (state == S_BLK) && blk_valid;
  assign binfo       = blk;
  assign ev_start    = blk_valid && blk_ready;
  assign tx_ready    = issue;
  assign ends_ready  = copy;
  assign vends       = ends;

  always_comb begin
    vfy.info.seq        = cnt[SEQ_W-1:0];
    vfy.info.last       = is_last;
    vfy.info.epoch      = epoch;
    vfy.info.valid      = cur.block_valid;
    vfy.info.cc_id      = tx.cc_id;
    vfy.info.num_ends   = tx.num_ends;
    vfy.info.rdset_size = tx.rdset_size;
    vfy.info.wrset_size = tx.wrset_size;
    vfy.client          = tx.client;
    for (int v = 0; v < NTXV; v++) begin
      vfy_valid[v]   = issue && (free_idx == IW'(v));
      vends_valid[v] = (state == S_ENDS) && ends_valid && (sel == IW'(v));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_BLK;
      cur     <= '0;
      epoch   <= '0;
      cnt     <= '0;
      sel     <= '0;
      left    <= '0;
      last_tx <= 1'b0;
    end else begin
      case (state)
        S_BLK: if (blk_valid && binfo_ready) begin
          cur <= blk;
          cnt <= '0;
          if (blk.num_txs != '0) state <= S_TX;
        end
        S_TX: if (issue) begin
          cnt     <= cnt + 1'b1;
          sel     <= free_idx;
          left    <= tx.num_ends;
          last_tx <= is_last;
          if (tx.num_ends != '0) state <= S_ENDS;
          else if (is_last) begin
            state <= S_BLK;
            epoch <= epoch + 1'b1;
          end
        end
        S_ENDS: if (copy) begin
          left <= left - 1'b1;
          if (left == NENDS_W'(1)) begin
            if (last_tx) begin
              state <= S_BLK;
              epoch <= epoch + 1'b1;
            end else begin
              state <= S_TX;
            end
          end
        end
        default: state <= S_BLK;
      endcase
    end
  end
endmodule

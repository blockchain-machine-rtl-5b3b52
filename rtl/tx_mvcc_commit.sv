// tx_mvcc_commit: third stage of the transaction-level pipeline; the MVCC
// (multi-version concurrency control) check and the state-database commit.
//
// Per block it first takes {block_num, num_txs, block_valid} from
// tx_scheduler, then the block's transactions in order from tx_collector.
// For each transaction it pops rdset_size entries {key, expected_version}
// from rdset_fifo and reads each key from the database; the transaction stays
// valid only if every stored version equals the expected one. A valid
// transaction then writes each of its wrset_size entries {key, value} from
// wrset_fifo with version {block_num, tx_seq}. Transactions already invalid
// on arrival skip both steps, and after the first version mismatch the
// remaining reads are skipped; skipped entries are still popped so the FIFOs
// stay aligned with tx_fifo. Because each transaction's writes are done
// before the next transaction's reads, conflicts inside a block are caught.
// After the transaction flagged last, the block result (tx_flags bit i =
// transaction i valid) is offered on res; the statistics are added by
// block_monitor.
//
// Timing: a database read costs 2 cycles (request, response), a write or a
// skipped entry 1 cycle, plus 2 cycles per transaction and 2 per block.
//
// Only the version of a database read response is compared and only seq,
// last, valid and the set sizes of a transaction are used; lint lists the
// other struct bits as unused.
module tx_mvcc_commit
  import bmac_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             binfo_valid,
  output logic             binfo_ready,
  input  blk_info_t        binfo,
  input  logic             tx_valid,
  output logic             tx_ready,
  input  tx_info_t         tx,
  input  logic             rd_valid,
  output logic             rd_ready,
  input  rdset_fifo_t      rd,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  wrset_fifo_t      wr,
  output logic             db_rd_valid,
  input  logic             db_rd_ready,
  output logic [KEY_W-1:0] db_rd_key,
  input  logic             db_rd_resp_valid,
  input  db_entry_t        db_rd_resp,
  output logic             db_wr_valid,
  input  logic             db_wr_ready,
  output logic [KEY_W-1:0] db_wr_key,
  output db_entry_t        db_wr_data,
  output logic             res_valid,
  input  logic             res_ready,
  output res_fifo_t        res,
  output logic             ev_conflict
);
  typedef enum logic [2:0] {S_BLK, S_TX, S_RD, S_RDW, S_WR, S_RES} state_t;
  state_t state;

  blk_info_t          blk;
  tx_info_t           cur;
  logic               ok;
  logic [SZ_W-1:0]    rd_left, wr_left;
  logic [VER_W-1:0]   exp_ver;
  logic [MAX_TXS-1:0] flags;

  wire rd_skip  = (state == S_RD) && rd_left != '0 && rd_valid && !ok;
  wire rd_issue = (state == S_RD) && rd_left != '0 && rd_valid && ok && db_rd_ready;
  wire wr_take  = (state == S_WR) && wr_left != '0 && wr_valid && db_wr_ready;

  assign binfo_ready = (state == S_BLK);
  assign tx_ready    = (state == S_TX);
  assign rd_ready    = rd_skip || rd_issue;
  assign db_rd_valid = (state == S_RD) && rd_left != '0 && rd_valid && ok;
  assign db_rd_key   = rd.key;
  assign wr_ready    = wr_take;
  assign db_wr_valid = wr_take && ok;
  assign db_wr_key   = wr.key;
  assign db_wr_data  = '{value: wr.value, version: {blk.block_num, cur.seq}};
  assign ev_conflict = (state == S_RDW) && db_rd_resp_valid && (db_rd_resp.version != exp_ver);

  assign res_valid         = (state == S_RES);
  assign res.block_num     = blk.block_num;
  assign res.block_valid   = blk.block_valid;
  assign res.num_txs       = blk.num_txs;
  assign res.tx_flags      = flags;
  assign res.stats         = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_BLK;
      blk     <= '0;
      cur     <= '0;
      ok      <= 1'b0;
      rd_left <= '0;
      wr_left <= '0;
      exp_ver <= '0;
      flags   <= '0;
    end else begin
      case (state)
        S_BLK: if (binfo_valid) begin
          blk   <= binfo;
          flags <= '0;
          state <= (binfo.num_txs == '0) ? S_RES : S_TX;
        end
        S_TX: if (tx_valid) begin
          cur     <= tx;
          ok      <= tx.valid;
          rd_left <= tx.rdset_size;
          wr_left <= tx.wrset_size;
          state   <= S_RD;
        end
        S_RD: begin
          if (rd_left == '0) state <= S_WR;
          else if (rd_skip) rd_left <= rd_left - 1'b1;
          else if (rd_issue) begin
            exp_ver <= rd.expected_version;
            state   <= S_RDW;
          end
        end
        S_RDW: if (db_rd_resp_valid) begin
          if (db_rd_resp.version != exp_ver) ok <= 1'b0;
          rd_left <= rd_left - 1'b1;
          state   <= S_RD;
        end
        S_WR: begin
          if (wr_left == '0) begin
            flags[cur.seq] <= ok;
            state          <= cur.last ? S_RES : S_TX;
          end else if (wr_take) wr_left <= wr_left - 1'b1;
        end
        S_RES: if (res_ready) state <= S_BLK;
        default: state <= S_BLK;
      endcase
    end
  end
endmodule

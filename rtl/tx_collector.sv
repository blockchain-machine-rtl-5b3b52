// tx_collector: restores transaction order between the parallel tx_vscc
// instances and tx_mvcc_commit.
//
// Transactions finish tx_vscc out of order (fewer endorsements, earlier
// policy satisfaction). The MVCC check must see them in block order, so the
// collector keeps the expected sequence number and block tag (epoch) and
// takes an output only from the instance whose waiting transaction matches;
// the others keep waiting. After an item marked last, the expected sequence
// number returns to 0 and the tag advances. The tag is needed because with
// small blocks a later block's transaction with the same sequence number can
// finish before the expected one. At most 2*NTXV transactions are in flight
// (one in each tx_verify and one in each tx_vscc), so a 6-bit tag cannot
// alias for NTXV up to 31.
//
// Interface: NTXV valid/ready inputs, one valid/ready output; the output is a
// combinational selection of the matching input (no added latency).
//
// Lint notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the assertions, which lint reports as a net used both
// ways; that is intended.
module tx_collector
  import bmac_pkg::*;
#(
  parameter int NTXV = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NTXV-1:0]       in_valid,
  output logic [NTXV-1:0]       in_ready,
  input  tx_info_t [NTXV-1:0]   in,
  output logic                  out_valid,
  input  logic                  out_ready,
  output tx_info_t              out
);
  logic [SEQ_W-1:0] exp_seq;
  logic [EPOCH_W-1:0] exp_epoch;
  logic [NTXV-1:0]  match;

  always_comb begin
    out_valid = 1'b0;
    out       = '0;
    for (int v = 0; v < NTXV; v++) begin
      match[v] = in_valid[v] && (in[v].seq == exp_seq) && (in[v].epoch == exp_epoch);
      if (match[v]) begin
        out_valid = 1'b1;
        out       = in[v];
      end
      in_ready[v] = match[v] && out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exp_seq   <= '0;
      exp_epoch <= '0;
    end else if (out_valid && out_ready) begin
      if (out.last) begin
        exp_seq   <= '0;
        exp_epoch <= exp_epoch + 1'b1;
      end else begin
        exp_seq   <= exp_seq + 1'b1;
      end
    end
  end

  // At most one instance may hold the expected transaction.
  a_unique: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(match));
endmodule

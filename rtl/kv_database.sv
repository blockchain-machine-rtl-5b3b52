// kv_database: the in-hardware state database, a versioned key-value store.
//
// Each of the DB_ENTRIES entries holds a value and its version
// {block_num, tx_seq}. The key is the entry index (keys are assumed to be
// mapped to slots before they reach the hardware). A read returns the entry
// one cycle after it is accepted. A write is accepted at once, held for one
// cycle in a pending register and then stored; while it is pending, a read of
// the same key is refused (rd_ready low), which is the locking rule "no read
// of a key that is being written". After reset the memory is cleared by a
// sweep of DB_ENTRIES cycles; init_done and both ready signals stay low until
// it ends. The memory is a plain array with one synchronous read and one write
// port, so it maps to block RAM.
module kv_database
  import bmac_pkg::*;
#(
  parameter int ENTRIES = DB_ENTRIES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rd_valid,
  output logic                        rd_ready,
  input  logic [$clog2(ENTRIES)-1:0]  rd_key,
  output logic                        rd_resp_valid,
  output db_entry_t                   rd_resp,
  input  logic                        wr_valid,
  output logic                        wr_ready,
  input  logic [$clog2(ENTRIES)-1:0]  wr_key,
  input  db_entry_t                   wr_data,
  output logic                        init_done,
  output logic                        ev_lock
);
  localparam int AW = $clog2(ENTRIES);

  db_entry_t       mem [ENTRIES];
  logic [AW-1:0]   init_cnt;
  logic            pend_v;
  logic [AW-1:0]   pend_key;
  db_entry_t       pend_data;

  wire locked = pend_v && (pend_key == rd_key);
  assign rd_ready = init_done && !locked;
  assign wr_ready = init_done;
  assign ev_lock  = rd_valid && init_done && locked;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done     <= 1'b0;
      init_cnt      <= '0;
      pend_v        <= 1'b0;
      pend_key      <= '0;
      pend_data     <= '0;
      rd_resp_valid <= 1'b0;
    end else begin
      if (!init_done) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == AW'(ENTRIES - 1)) init_done <= 1'b1;
      end
      pend_v        <= wr_valid && wr_ready;
      pend_key      <= wr_key;
      pend_data     <= wr_data;
      rd_resp_valid <= rd_valid && rd_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (!init_done)  mem[init_cnt] <= '0;
    else if (pend_v) mem[pend_key] <= pend_data;
    if (rd_valid && rd_ready) rd_resp <= mem[rd_key];
  end
endmodule

// bmac_pkg: types and constants shared by the block processor of the
// Blockchain Machine (a network-attached validator for Hyperledger Fabric).
//
// The FIFO element structs follow the buffer table of the design (which field
// lives in which buffer). The field widths are this implementation's choice
// except where the design fixes them: signatures, keys and hashes are 256 bit
// values (ECDSA P-256 / SHA-256), endorser ids are 16 bit encoded ids made of
// an 8 bit organisation, a 4 bit role and a 4 bit node sequence number. The
// default sizes (256 transactions per block, 8192 database entries) are the
// configuration the design was evaluated with.
//
// Some constants (role codes, NUM_ROLES, ID_W) document the encoded id
// format and are used by testbenches only, so lint lists them as unused in
// the RTL.
package bmac_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int MAX_TXS    = 256;   // transactions per block
  localparam int DB_ENTRIES = 8192;  // state database entries
  localparam int NUM_ORGS   = 4;     // organisations known to the policy file
  localparam int NUM_ROLES  = 4;     // orderer, admin, peer, client

  localparam int BLKNUM_W = 32;
  localparam int NTX_W    = $clog2(MAX_TXS + 1);  // 0..256
  localparam int SEQ_W    = $clog2(MAX_TXS);      // 0..255
  localparam int CC_W     = 4;
  localparam int NENDS_W  = 4;
  localparam int SZ_W     = 8;                    // rdset/wrset sizes
  localparam int ID_W     = 16;
  localparam int KEY_W    = $clog2(DB_ENTRIES);
  localparam int VAL_W    = 64;
  localparam int VER_W    = BLKNUM_W + SEQ_W;     // {block_num, tx_seq}
  localparam int STAT_W   = 32;
  localparam int EPOCH_W  = 6;                    // block tag, see tx_collector

  // ---------------------------------------------------- encoded identities
  localparam logic [3:0] ROLE_ORDERER = 4'd0;
  localparam logic [3:0] ROLE_ADMIN   = 4'd1;
  localparam logic [3:0] ROLE_PEER    = 4'd2;
  localparam logic [3:0] ROLE_CLIENT  = 4'd3;

  typedef struct packed {
    logic [7:0] org;   // organisation number, Org1 = 1
    logic [3:0] role;  // ROLE_*
    logic [3:0] seq;   // node number inside its organisation
  } enc_id_t;

  // ------------------------------------------- ECDSA verification request
  typedef struct packed {
    logic [255:0] sig_r;
    logic [255:0] sig_s;
    logic [255:0] key_x;
    logic [255:0] key_y;
    logic [255:0] hash;
  } ecdsa_req_t;

  // ------------------------------------------------------ buffer elements
  typedef struct packed {
    logic [BLKNUM_W-1:0] block_num;
    logic [NTX_W-1:0]    num_txs;
    ecdsa_req_t          orderer;   // {orderer_{sig,key}, block_hash}
  } blk_fifo_t;

  typedef struct packed {
    logic [CC_W-1:0]    cc_id;
    ecdsa_req_t         client;     // {client_{sig,key}, tx_hash}
    logic [NENDS_W-1:0] num_ends;
    logic [SZ_W-1:0]    rdset_size;
    logic [SZ_W-1:0]    wrset_size;
  } tx_fifo_t;

  typedef struct packed {
    enc_id_t    endorser_id;
    ecdsa_req_t endorser;           // {endorser_{sig,key}, ends_hash}
  } ends_fifo_t;

  typedef struct packed {
    logic [KEY_W-1:0] key;
    logic [VER_W-1:0] expected_version;
  } rdset_fifo_t;

  typedef struct packed {
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] value;
  } wrset_fifo_t;

  typedef struct packed {
    logic [STAT_W-1:0] verify_cycles;    // block_verify: pop of block_fifo to result
    logic [STAT_W-1:0] validate_cycles;  // block_validate: start to result
    logic [STAT_W-1:0] total_cycles;     // pop of block_fifo to res_fifo
    logic [STAT_W-1:0] valid_txs;        // number of valid transactions
  } blk_stats_t;

  typedef struct packed {
    logic [BLKNUM_W-1:0] block_num;
    logic                block_valid;
    logic [NTX_W-1:0]    num_txs;
    logic [MAX_TXS-1:0]  tx_flags;       // bit i: transaction i valid
    blk_stats_t          stats;
  } res_fifo_t;

  // ------------------------------------------------- internal pipeline data
  // Verified block, from block_verify to block_validate.
  typedef struct packed {
    logic [BLKNUM_W-1:0] block_num;
    logic [NTX_W-1:0]    num_txs;
    logic                block_valid;
  } blk_info_t;

  // Per-transaction bookkeeping that travels with a transaction.
  typedef struct packed {
    logic [SEQ_W-1:0]   seq;        // position in the block
    logic               last;       // last transaction of its block
    logic [EPOCH_W-1:0] epoch;      // block tag (count mod 64), tells blocks apart
    logic               valid;      // still valid after the stages so far
    logic [CC_W-1:0]    cc_id;
    logic [NENDS_W-1:0] num_ends;
    logic [SZ_W-1:0]    rdset_size;
    logic [SZ_W-1:0]    wrset_size;
  } tx_info_t;

  // tx_scheduler -> tx_verify: valid carries the block verification result.
  typedef struct packed {
    tx_info_t   info;
    ecdsa_req_t client;
  } vfy_req_t;

  typedef struct packed {
    logic [VAL_W-1:0] value;
    logic [VER_W-1:0] version;
  } db_entry_t;

  // Per-cycle event counts brought out of the block processor so that the
  // mechanisms of the pipeline can be observed (early aborts, short-circuit
  // policy evaluation, MVCC conflicts, database lock stalls).
  typedef struct packed {
    logic [7:0] ends_issued;   // endorsements sent to an ECDSA engine
    logic [7:0] ends_skipped;  // endorsements discarded unverified
    logic [7:0] tx_skipped;    // client signatures not verified (block invalid)
    logic       mvcc_conflict; // version mismatch found
    logic       db_lock;       // read held off by a pending write
  } bp_events_t;

endpackage

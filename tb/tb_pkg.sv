// tb_pkg: helpers shared by the testbenches.
//
// * mk_req/req_ok: the toy signature convention understood by
//   ecdsa_engine_model (a request is "valid" when sig_r == hash ^ key_x).
// * policy_ref: reference endorsement-policy evaluation, written as counts
//   and pair lists independently of the circuits in ends_policy_evaluator.
// * block_gen: generates random blocks (buffer contents) together with the
//   expected validation result, using its own model of the state database.
package tb_pkg;
  import bmac_pkg::*;

  function automatic ecdsa_req_t mk_req(bit good, int unsigned seed);
    ecdsa_req_t r;
    r.key_x = {8{seed * 32'd2654435761}};
    r.key_y = {8{seed ^ 32'h5a5a_1234}};
    r.hash  = {8{seed * 32'd40503 + 32'd17}};
    r.sig_s = {8{~seed}};
    r.sig_r = r.hash ^ r.key_x;
    if (!good) r.sig_r[7:0] = ~r.sig_r[7:0];
    return r;
  endfunction

  function automatic bit req_ok(ecdsa_req_t r);
    return r.sig_r == (r.hash ^ r.key_x);
  endfunction

  function automatic enc_id_t mk_id(int org, int role, int seq);
    enc_id_t id;
    id.org  = 8'(org);
    id.role = 4'(role);
    id.seq  = 4'(seq);
    return id;
  endfunction

  // Number of organisations that endorse a transaction of chaincode cc
  // (one endorsement per organisation, Org1..OrgM).
  function automatic int policy_orgs(int cc);
    case (cc)
      0, 1: return 2;
      2:    return 1;
      3:    return 2;
      4:    return 3;
      5:    return 3;
      default: return 4;
    endcase
  endfunction

  // good[o] = Org o has a valid peer endorsement (o = 1..4)
  function automatic bit policy_ref(int cc, bit [4:1] good);
    int n;
    int pairs [5][2] = '{'{1,2}, '{1,4}, '{2,3}, '{2,4}, '{3,4}};
    n = 0;
    case (cc)
      0, 1: return good[1] && good[2];
      2: return good[1];
      3: for (int o = 1; o <= 2; o++) n += good[o];
      4: for (int o = 1; o <= 3; o++) n += good[o];
      5: for (int o = 1; o <= 3; o++) n += good[o];
      6, 7, 8: for (int o = 1; o <= 4; o++) n += good[o];
      9: begin
        foreach (pairs[i]) if (good[pairs[i][0]] && good[pairs[i][1]]) return 1;
        return 0;
      end
      default: return 0;
    endcase
    case (cc)
      3: return n >= 1;
      4: return n >= 2;
      5: return n >= 3;
      6: return n >= 2;
      7: return n >= 3;
      8: return n >= 4;
      default: return 0;
    endcase
  endfunction

  class block_gen;
    // state-database model: version per key
    logic [VER_W-1:0] db [int];
    int unsigned      seed = 1;
    int               key_range = 16;
    int               pct_bad_block = 0;
    int               pct_bad_tx = 10;
    int               pct_bad_ends = 10;
    int               pct_stale = 10;
    int               max_rw = 3;
    int               fixed_rw = -1;  // >= 0: every transaction reads and writes this many keys
    int               cc_list [$] = '{0};

    // one block
    blk_fifo_t        blk;
    tx_fifo_t         txs  [$];
    ends_fifo_t       ends [$];
    rdset_fifo_t      rds  [$];
    wrset_fifo_t      wrs  [$];
    bit               exp_valid;
    logic [MAX_TXS-1:0] exp_flags;
    int               exp_valid_txs;

    function int unsigned rnd(int unsigned n);
      seed = seed * 32'd1103515245 + 32'd12345;
      return (seed >> 8) % n;
    endfunction

    function logic [VER_W-1:0] ver(int key);
      return db.exists(key) ? db[key] : '0;
    endfunction

    function void gen(int block_num, int ntx);
      bit bv;
      txs.delete(); ends.delete(); rds.delete(); wrs.delete();
      bv = (rnd(100) >= pct_bad_block);
      blk.block_num = BLKNUM_W'(block_num);
      blk.num_txs   = NTX_W'(ntx);
      blk.orderer   = mk_req(bv, rnd(1 << 20));
      exp_valid     = bv;
      exp_flags     = '0;
      exp_valid_txs = 0;
      for (int t = 0; t < ntx; t++) begin
        tx_fifo_t tx;
        bit v, cv;
        bit [4:1] good;
        int cc, norg, nrd, nwr;
        int wkeys [$];
        cc   = cc_list[rnd(cc_list.size())];
        norg = policy_orgs(cc);
        cv   = (rnd(100) >= pct_bad_tx);
        nrd  = rnd(max_rw + 1);
        nwr  = rnd(max_rw + 1);
        if (fixed_rw >= 0) begin nrd = fixed_rw; nwr = fixed_rw; end
        tx.cc_id      = CC_W'(cc);
        tx.client     = mk_req(cv, rnd(1 << 20));
        tx.num_ends   = NENDS_W'(norg);
        tx.rdset_size = SZ_W'(nrd);
        tx.wrset_size = SZ_W'(nwr);
        txs.push_back(tx);
        good = '0;
        for (int o = 1; o <= norg; o++) begin
          ends_fifo_t e;
          bit g;
          g = (rnd(100) >= pct_bad_ends);
          e.endorser_id = mk_id(o, ROLE_PEER, 0);
          e.endorser    = mk_req(g, rnd(1 << 20));
          ends.push_back(e);
          good[o] = g;
        end
        v = bv && cv && policy_ref(cc, good);
        for (int r = 0; r < nrd; r++) begin
          rdset_fifo_t rd;
          int k;
          k = rnd(key_range);
          rd.key = KEY_W'(k);
          rd.expected_version = ver(k);
          if (rnd(100) < pct_stale) rd.expected_version = rd.expected_version ^ VER_W'(1 << rnd(8));
          if (rd.expected_version != ver(k)) v = 0;
          rds.push_back(rd);
        end
        for (int w = 0; w < nwr; w++) begin
          wrset_fifo_t wr;
          int k;
          k = rnd(key_range);
          wr.key   = KEY_W'(k);
          wr.value = {32'(block_num), 32'(t * 16 + w)};
          wrs.push_back(wr);
          wkeys.push_back(k);
        end
        if (v) begin
          foreach (wkeys[i]) db[wkeys[i]] = {BLKNUM_W'(block_num), SEQ_W'(t)};
          exp_valid_txs++;
        end
        exp_flags[t] = v;
      end
    endfunction
  endclass
endpackage

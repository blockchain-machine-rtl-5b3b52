// ends_policy_evaluator: evaluates a chaincode's endorsement policy from the
// endorsements verified so far.
//
// A register file holds one register per organisation with one bit per role
// (orderer, admin, peer, client). When an endorsement has been verified, the
// organisation and role fields of its 16 bit encoded endorser id select the
// bit to set; a failed endorsement sets nothing, so a cleared register file
// means "policy not satisfied". Each chaincode's policy is a fixed boolean
// expression over these bits, built as a plain combinational circuit
// (AND/OR of register bits), and cc_id selects which circuit drives
// policy_ok. All sub-expressions are therefore evaluated in parallel.
//
// Interface/timing: clear and the NWR write ports act on the clock edge;
// policy_ok is combinational from the registers and cc_id, so a result written
// in cycle t shows on policy_ok in cycle t+1. clear has priority over writes.
//
// In the design the module is generated from a configuration file listing the
// chaincodes and their policies. The set compiled in here holds the policies
// the design was evaluated with, all on the peer role; the cc_id numbering is
// this implementation's choice:
//   0 smallbank "2-outof-2 orgs"   1 drm "2-outof-2 orgs"
//   2 1of1   3 1of2   4 2of3   5 3of3   6 2of4   7 3of4   8 4of4
//   9 (Org1&Org2)|(Org1&Org4)|(Org2&Org3)|(Org2&Org4)|(Org3&Org4)
// "NofM" means N of Org1..OrgM. Other cc_id values are never satisfied.
module ends_policy_evaluator
  import bmac_pkg::*;
#(
  parameter int NORG = NUM_ORGS,
  parameter int NWR  = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [NWR-1:0]      wr_en,
  input  enc_id_t [NWR-1:0]   wr_id,
  input  logic [NWR-1:0]      wr_ok,
  input  logic [CC_W-1:0]     cc_id,
  output logic                policy_ok
);
  logic [NUM_ROLES-1:0] regs [NORG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NORG; o++) regs[o] <= '0;
    end else if (clear) begin
      for (int o = 0; o < NORG; o++) regs[o] <= '0;
    end else begin
      for (int w = 0; w < NWR; w++) begin
        if (wr_en[w] && wr_ok[w] && wr_id[w].org >= 8'd1 && wr_id[w].org <= 8'(NORG)
            && wr_id[w].role < 4'(NUM_ROLES))
          regs[int'(wr_id[w].org) - 1][wr_id[w].role[1:0]] <= 1'b1;
      end
    end
  end

  // Peer-role bit of organisation o (1-based); 0 for an organisation the
  // register file does not have.
  logic p1, p2, p3, p4;
  assign p1 = (NORG >= 1) ? regs[0][ROLE_PEER[1:0]] : 1'b0;
  assign p2 = (NORG >= 2) ? regs[(NORG >= 2) ? 1 : 0][ROLE_PEER[1:0]] : 1'b0;
  assign p3 = (NORG >= 3) ? regs[(NORG >= 3) ? 2 : 0][ROLE_PEER[1:0]] : 1'b0;
  assign p4 = (NORG >= 4) ? regs[(NORG >= 4) ? 3 : 0][ROLE_PEER[1:0]] : 1'b0;

  // One circuit per chaincode.
  logic [9:0] circ;
  assign circ[0] = p1 & p2;                                           // smallbank 2of2
  assign circ[1] = p1 & p2;                                           // drm 2of2
  assign circ[2] = p1;                                                // 1of1
  assign circ[3] = p1 | p2;                                           // 1of2
  assign circ[4] = (p1 & p2) | (p1 & p3) | (p2 & p3);                 // 2of3
  assign circ[5] = p1 & p2 & p3;                                      // 3of3
  assign circ[6] = (p1 & p2) | (p1 & p3) | (p1 & p4)
                 | (p2 & p3) | (p2 & p4) | (p3 & p4);                 // 2of4
  assign circ[7] = (p1 & p2 & p3) | (p1 & p2 & p4)
                 | (p1 & p3 & p4) | (p2 & p3 & p4);                   // 3of4
  assign circ[8] = p1 & p2 & p3 & p4;                                 // 4of4
  assign circ[9] = (p1 & p2) | (p1 & p4) | (p2 & p3) | (p2 & p4) | (p3 & p4); // complex

  always_comb begin
    policy_ok = 1'b0;
    if (cc_id < CC_W'(10)) policy_ok = circ[cc_id];
  end
endmodule

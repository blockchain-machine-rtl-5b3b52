// tb_ends_policy_evaluator: for every compiled-in policy and every subset of
// valid peer endorsements from Org1..Org4, writes the subset through the
// write ports and compares policy_ok with the reference evaluation. Also
// checks that failed endorsements, other roles and unknown organisations set
// nothing, that clear empties the register file and that a result shows one
// cycle after its write.
module tb_ends_policy_evaluator;
  import bmac_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0, clear;
  logic [1:0] wr_en, wr_ok;
  enc_id_t [1:0] wr_id;
  logic [CC_W-1:0] cc_id;
  logic policy_ok;
  int checks = 0, failures = 0;

  ends_policy_evaluator #(.NWR(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_clear();
    @(negedge clk); clear = 1; wr_en = 0;
    @(negedge clk); clear = 0;
  endtask

  initial begin
    clear = 0; wr_en = 0; wr_ok = 0; wr_id = '0; cc_id = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cc = 0; cc < 11; cc++) begin
      for (int s = 0; s < 16; s++) begin
        bit [4:1] good;
        good = 4'(s);
        do_clear();
        cc_id = CC_W'(cc);
        #1 check(policy_ok == 1'b0, "cleared register file is unsatisfied");
        // failed endorsements and non-peer roles, both ports in one cycle
        @(negedge clk);
        wr_en = 2'b11; wr_ok = 2'b01;
        wr_id[0] = mk_id(1, 1, 0);   // Org1 admin, valid
        wr_id[1] = mk_id(2, 2, 0);   // Org2 peer, failed
        @(negedge clk);
        wr_en = 2'b01; wr_ok = 2'b01; wr_id[0] = mk_id(5, 2, 0); // unknown org
        @(negedge clk);
        wr_en = 0;
        #1 check(policy_ok == policy_ref(cc, 4'b0000), "noise sets nothing");
        // valid endorsements, two per cycle
        for (int o = 1; o <= 4; o += 2) begin
          @(negedge clk);
          wr_en = {good[o+1], good[o]}; wr_ok = 2'b11;
          wr_id[0] = mk_id(o, 2, 0); wr_id[1] = mk_id(o + 1, 2, 1);
        end
        @(negedge clk);
        wr_en = 0;
        #1 check(policy_ok == policy_ref(cc, good),
                 $sformatf("cc=%0d good=%b ok=%b", cc, good, policy_ok));
      end
    end
    // timing: written in cycle t, visible in t+1
    do_clear(); cc_id = 2;
    @(negedge clk); wr_en = 2'b01; wr_ok = 2'b01; wr_id[0] = mk_id(1, 2, 0);
    #1 check(policy_ok == 0, "not visible in the write cycle");
    @(negedge clk); wr_en = 0;
    #1 check(policy_ok == 1, "visible one cycle later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

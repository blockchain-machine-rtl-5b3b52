// tb_hash_calculator: hashes the FIPS 180-4 example messages and compares
// with their published digests: "" (padding only), "abc" (one block), the
// 56-byte "abcdbcde...mnopnopq" message (length in a second block), and
// a 64-byte message of 'a' (a full data block, then one padding block), with
// random gaps on the input and random output backpressure. Checks the
// latency of "abc": last word accepted to digest valid within 1 + 14 + 1 + 64
// cycles (14 padding words written one per cycle, one compression).
module tb_hash_calculator;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0;
  logic [31:0] in_data = 0;
  logic [2:0] in_bytes = 0;
  logic [255:0] out_digest;
  int checks = 0, failures = 0;

  hash_calculator dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // hash a message of n bytes given as a byte queue; returns the digest and
  // the cycles from the last word's transfer to out_valid
  task automatic hash(input byte unsigned m [$], output logic [255:0] dig, output int lat);
    int nw, t0;
    nw = (m.size() + 3) / 4;
    if (nw == 0) nw = 1;
    for (int i = 0; i < nw; i++) begin
      logic [31:0] wd;
      int nb;
      wd = '0;
      for (int k = 0; k < 4; k++) if (4 * i + k < m.size()) wd[31 - 8*k -: 8] = m[4*i + k];
      nb = m.size() - 4 * i;
      if (nb > 4) nb = 4;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      in_valid = 1; in_data = wd; in_last = (i == nw - 1); in_bytes = 3'(nb);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    t0 = 0;
    while (!out_valid) begin @(negedge clk); t0++; end
    lat = t0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    check(out_valid, "digest held until taken");
    dig = out_digest;
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned m [$];
    logic [255:0] d;
    string s;
    int lat;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      m.delete();
      hash(m, d, lat);
      check(d == 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, $sformatf("empty %h", d));
      m = '{8'h61, 8'h62, 8'h63};
      hash(m, d, lat);
      check(d == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, $sformatf("abc %h", d));
      check(lat >= 64 && lat <= 1 + 14 + 1 + 64, $sformatf("abc latency %0d", lat));
      s = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
      m.delete();
      for (int i = 0; i < s.len(); i++) m.push_back(s[i]);
      hash(m, d, lat);
      check(d == 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, $sformatf("abcdbcd.. %h", d));
      m.delete();
      for (int i = 0; i < 64; i++) m.push_back(8'h61);
      hash(m, d, lat);
      check(d == 256'hffe054fe7ae0cb6dc65c3af9b61d5209f439851db43d0ba5997337df154668eb, $sformatf("64 x a %h", d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

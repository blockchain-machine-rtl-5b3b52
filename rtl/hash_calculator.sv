// hash_calculator: one streaming SHA-256 unit (FIPS 180-4) of the protocol
// processor, which hashes block, transaction and endorsement data so that
// the ECDSA engines receive a 256-bit digest instead of the data itself.
//
// Input is a stream of 32-bit big-endian words with valid/ready. The word
// flagged in_last carries in_bytes (0..4) valid bytes, left-aligned; every
// other word is full. The unit collects 16 words, compresses the 512-bit
// block in 64 cycles (one round per cycle, message schedule computed in a
// 16-word sliding window), and after the last word appends the standard
// padding (a 1 bit, zeros, the 64-bit message length), which takes one or
// two more blocks. The digest is then held on out_digest with out_valid until
// out_ready; the unit then starts a new message.
//
// Timing: 64 compression cycles per 512-bit block, plus 1 cycle per padding
// word; in_ready is low while a block is compressed, so a long message
// streams at 16 words per 81 cycles.
//
// The design names three such calculators (block, transaction and
// endorsement hash) inside the protocol processor; which bytes of a Fabric
// block feed each of them is not described, so the stream interface and
// the word/byte-count format are this implementation's choice. SHA-256 itself
// is the standard algorithm.
module hash_calculator (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [31:0]  in_data,
  input  logic         in_last,
  input  logic [2:0]   in_bytes,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [255:0] out_digest
);
  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
  localparam logic [255:0] IV = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  typedef enum logic [1:0] {S_FILL, S_PAD, S_COMP, S_DONE} state_t;
  state_t state;

  logic [31:0]  w [16];
  logic [4:0]   widx;       // words in the block buffer, 0..16
  logic [63:0]  len;        // message length in bits
  logic         pad80;      // the 1 bit still has to be appended as a new word
  logic         final_blk;  // the block being compressed carries the length
  logic         padding;    // the last word has been taken
  logic [5:0]   rnd;
  logic [255:0] h;          // chaining value H0..H7
  logic [31:0]  a, b, c, d, e, f, g, hh;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  // last word: keep in_bytes bytes and place the 1 bit right after them
  logic [31:0] last_word;
  always_comb begin
    case (in_bytes)
      3'd0:    last_word = 32'h8000_0000;
      3'd1:    last_word = {in_data[31:24], 24'h80_0000};
      3'd2:    last_word = {in_data[31:16], 16'h8000};
      3'd3:    last_word = {in_data[31:8], 8'h80};
      default: last_word = in_data;
    endcase
  end
  wire [5:0] last_bits = (in_bytes > 3'd4) ? 6'd32 : {in_bytes, 3'b000};

  // one compression round
  wire [31:0] s0  = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
  wire [31:0] s1  = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
  wire [31:0] wn  = w[0] + s0 + w[9] + s1;
  wire [31:0] S1  = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
  wire [31:0] ch  = (e & f) ^ (~e & g);
  wire [31:0] t1  = hh + S1 + ch + K[rnd] + w[0];
  wire [31:0] S0  = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
  wire [31:0] maj = (a & b) ^ (a & c) ^ (b & c);
  wire [31:0] t2  = S0 + maj;

  assign in_ready   = (state == S_FILL) && (widx != 5'd16);
  assign out_valid  = (state == S_DONE);
  assign out_digest = h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FILL;
      for (int i = 0; i < 16; i++) w[i] <= '0;
      widx <= '0; len <= '0; pad80 <= 1'b0; final_blk <= 1'b0; padding <= 1'b0; rnd <= '0;
      h <= IV;
      {a, b, c, d, e, f, g, hh} <= '0;
    end else begin
      case (state)
        S_FILL: begin
          if (widx == 5'd16) begin
            {a, b, c, d, e, f, g, hh} <= h;
            rnd   <= '0;
            state <= S_COMP;
          end else if (in_valid) begin
            w[widx[3:0]] <= in_last ? last_word : in_data;
            widx         <= widx + 1'b1;
            len          <= len + (in_last ? 64'(last_bits) : 64'd32);
            if (in_last) begin
              pad80   <= (in_bytes >= 3'd4);
              padding <= 1'b1;
              state <= S_PAD;
            end
          end
        end
        S_PAD: begin
          if (widx == 5'd16) begin
            {a, b, c, d, e, f, g, hh} <= h;
            rnd   <= '0;
            state <= S_COMP;
          end else if (pad80) begin
            w[widx[3:0]] <= 32'h8000_0000;
            widx         <= widx + 1'b1;
            pad80        <= 1'b0;
          end else if (widx == 5'd14) begin
            w[14]     <= len[63:32];
            w[15]     <= len[31:0];
            widx      <= 5'd16;
            final_blk <= 1'b1;
          end else begin
            w[widx[3:0]] <= '0;
            widx         <= widx + 1'b1;
          end
        end
        S_COMP: begin
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wn;
          {a, b, c, d, e, f, g, hh} <= {t1 + t2, a, b, c, d + t1, e, f, g};
          rnd <= rnd + 1'b1;
          if (rnd == 6'd63) begin
            h <= {h[255:224] + t1 + t2, h[223:192] + a, h[191:160] + b, h[159:128] + c,
                  h[127:96] + d + t1,  h[95:64] + e,    h[63:32] + f,    h[31:0] + g};
            widx <= '0;
            if (final_blk) state <= S_DONE;
            else if (padding) state <= S_PAD;
            else state <= S_FILL;
          end
        end
        S_DONE: if (out_ready) begin
          h         <= IV;
          len       <= '0;
          final_blk <= 1'b0;
          padding   <= 1'b0;
          state     <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end
endmodule

// sha256_core: SHA-256 engine for the timer-triggered hash callback.
//
// Computes the FIPS 180-4 SHA-256 digest of a message of `msg_bytes` bytes that
// arrives as a stream of 32-bit words, first byte of the message in bits 31:24.
// The message length must be a multiple of 4 bytes (the 1920x1080x3-byte image of
// the hash callback is). Padding (the 0x80 marker, zeros, the 64-bit bit count) is
// generated inside.
//
// How it works: for each 512-bit block the core first fills a 16-word schedule
// window (from the stream, or from the padding generator once the message is
// used up), then runs the 64 compression rounds, one per clock, extending the
// schedule in the same window, and finally adds the working variables into the
// chaining value.
//
// Interface: pulse `start` with `msg_bytes` valid; feed words on `in_*`
// (valid/ready); `done` pulses when `digest` (H0 in bits 255:224) is final.
// Timing: 16 fill cycles (fewer stream words in the padding blocks still take one
// cycle each) plus 64 round cycles plus one finalisation cycle per block.
//
// From the paper: SHA-256 over a 1920x1080 24-bit image, result published as 8
// unsigned integers. Own choices: word interface, one round per clock, no overlap
// of fill and rounds.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [31:0]  msg_bytes,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [31:0]  in_data,
  output logic [255:0] digest,
  output logic         busy,
  output logic         done
);
  typedef logic [31:0] word_t;

  localparam word_t K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };

  localparam word_t H_INIT [8] = '{
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19
  };

  function automatic word_t rotr(input word_t x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_ROUND, S_ADD} state_t;
  state_t state;

  word_t        hs [8];   // chaining value
  word_t        v  [8];   // working variables a..h
  word_t        w  [16];  // schedule window
  logic [5:0]   t;        // round / fill index
  logic [29:0]  k;        // word index in the padded message
  logic [29:0]  msg_words, total_words;
  logic [63:0]  bit_len;

  // Padded-message word generator.
  logic  from_msg;
  word_t pad_word;
  assign from_msg = (k < msg_words);
  always_comb begin
    if (k == msg_words)             pad_word = 32'h8000_0000;
    else if (k == total_words - 2)  pad_word = bit_len[63:32];
    else if (k == total_words - 1)  pad_word = bit_len[31:0];
    else                            pad_word = '0;
  end

  logic fill_step;
  assign in_ready  = (state == S_FILL) && from_msg;
  assign fill_step = (state == S_FILL) && (!from_msg || in_valid);

  // One compression round.
  word_t s0, s1, ch, maj, t1, t2, ws0, ws1, wnew;
  always_comb begin
    s1   = rotr(v[4], 6) ^ rotr(v[4], 11) ^ rotr(v[4], 25);
    ch   = (v[4] & v[5]) ^ (~v[4] & v[6]);
    t1   = v[7] + s1 + ch + K[t] + w[0];
    s0   = rotr(v[0], 2) ^ rotr(v[0], 13) ^ rotr(v[0], 22);
    maj  = (v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]);
    t2   = s0 + maj;
    ws0  = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    ws1  = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    wnew = ws1 + w[9] + ws0 + w[0];
  end

  assign busy = (state != S_IDLE);
  always_comb
    for (int i = 0; i < 8; i++) digest[255 - 32*i -: 32] = hs[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      t           <= '0;
      k           <= '0;
      msg_words   <= '0;
      total_words <= '0;
      bit_len     <= '0;
      for (int i = 0; i < 8; i++) begin
        hs[i] <= H_INIT[i];
        v[i]  <= '0;
      end
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          msg_words   <= msg_bytes[31:2];
          // message words + marker + 2 length words, rounded up to 16
          total_words <= ((msg_bytes[31:2] + 30'd3 + 30'd15) >> 4) << 4;
          bit_len     <= {29'd0, msg_bytes, 3'b000};
          k           <= '0;
          t           <= '0;
          hs          <= H_INIT;
          state       <= S_FILL;
        end
        S_FILL: if (fill_step) begin
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= from_msg ? in_data : pad_word;
          k     <= k + 1'b1;
          t     <= t + 1'b1;
          if (t == 6'd15) begin
            t     <= '0;
            v     <= hs;
            state <= S_ROUND;
          end
        end
        S_ROUND: begin
          v[7] <= v[6]; v[6] <= v[5]; v[5] <= v[4]; v[4] <= v[3] + t1;
          v[3] <= v[2]; v[2] <= v[1]; v[1] <= v[0]; v[0] <= t1 + t2;
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wnew;
          t     <= t + 1'b1;
          if (t == 6'd63) state <= S_ADD;
        end
        S_ADD: begin
          for (int i = 0; i < 8; i++) hs[i] <= hs[i] + v[i];
          t <= '0;
          if (k == total_words) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_FILL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

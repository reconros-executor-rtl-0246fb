// tb_sha256_core: self-checking test of the SHA-256 engine against published
// test vectors.
//
// The vectors are word-aligned messages with well-known digests: the empty message, "abcd"
// (4 bytes), and the 56-byte message
// "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq" (FIPS 180-2
// example, two padding blocks). Also checks the timing when the stream never
// stalls: 81 clocks per block (16 fill, 64 rounds, 1 add) plus 1 from start to
// the first fill and the registered done.
module tb_sha256_core;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;

  logic start, in_valid, in_ready, busy, done;
  logic [31:0] msg_bytes, in_data;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);

  logic [31:0] words [16];
  int nwords;
  int cycles;

  task automatic run(int nbytes, logic [255:0] expect_d, int expect_cycles, bit stalls);
    int i = 0;
    msg_bytes = 32'(nbytes);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin
      in_valid = (i < nbytes / 4) && (!stalls || $urandom % 2 == 0);
      in_data  = words[i];
      @(posedge clk);
      if (in_valid && in_ready) i++;
      cycles++;
      #1;
    end
    in_valid = 0;
    checks++;
    if (digest !== expect_d) begin
      failures++;
      $display("len %0d: digest %h expected %h", nbytes, digest, expect_d);
    end
    if (expect_cycles > 0) begin
      checks++;
      if (cycles != expect_cycles) begin
        failures++; $display("len %0d: %0d cycles, expected %0d", nbytes, cycles, expect_cycles);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    string s;
    start = 0; in_valid = 0; in_data = 0; msg_bytes = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, 82, 0);
    words[0] = "abcd";
    run(4, 256'h88d4266fd4e6338d13b845fcf289579d209c897823b9217da3e161936f031589, 0, 1);
    s = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
    for (int w = 0; w < 14; w++)
      words[w] = {s[4*w], s[4*w+1], s[4*w+2], s[4*w+3]};
    run(56, 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, 163, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

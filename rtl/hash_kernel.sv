// hash_kernel: stream wrapper that turns sha256_core into a callback kernel.
//
// The hash callback reads the image from memory as 32-bit little-endian words
// (byte 0 of the image in bits 7:0) and publishes its SHA-256 digest as an array
// of 8 unsigned 32-bit integers. This wrapper swaps each input word into the
// byte order SHA-256 consumes (first byte in bits 31:24), starts the core with
// the fixed message length MSG_BYTES, and after the digest is final offers it as
// 8 output words, H0 first.
//
// Interface: `start` pulse, in/out valid/ready streams of 32-bit words. Timing:
// that of sha256_core, then 8 output words at one per clock.
// From the paper: hash of a 1920x1080 24-bit image, 8-element result. Own
// choices: memory byte order, output order.
module hash_kernel #(
  parameter int unsigned MSG_BYTES = 1920 * 1080 * 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data
);
  logic [255:0] digest;
  logic         busy, done;
  logic [3:0]   left;   // digest words still to send

  sha256_core u_sha (
    .clk, .rst_n,
    .start    (start),
    .msg_bytes(32'(MSG_BYTES)),
    .in_valid,
    .in_ready,
    .in_data  ({in_data[7:0], in_data[15:8], in_data[23:16], in_data[31:24]}),
    .digest,
    .busy,
    .done
  );

  assign out_valid = (left != '0);
  assign out_data  = digest[32*left - 1 -: 32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) left <= '0;
    else if (done) left <= 4'd8;
    else if (out_valid && out_ready) left <= left - 1'b1;
  end

endmodule

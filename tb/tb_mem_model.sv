// tb_mem_model: behavioural model of main memory behind the memory controller,
// for testbenches only.
//
// Word-addressed storage of SIZE_WORDS words (byte addresses wrap), zeroed at
// time 0, with the reconros_pkg request/response convention. Requests are accepted
// when `req_ready` is high (randomly throttled when STALL_PCT > 0); a read returns
// its word LATENCY clocks later, in order. Testbenches preload and inspect the
// contents through `mem` hierarchically.
module tb_mem_model
  import reconros_pkg::*;
#(
  parameter int LATENCY   = 4,
  parameter int STALL_PCT = 0,
  parameter int SIZE_WORDS = 65536
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  mem_req_t    req,
  output logic        rsp_valid,
  output logic [31:0] rsp_data
);
  logic [31:0] mem [SIZE_WORDS];
  int unsigned n_reads = 0, n_writes = 0;

  logic        pipe_v [LATENCY];
  logic [31:0] pipe_d [LATENCY];

  initial begin
    for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 0; pipe_d[i] = 0; end
    req_ready = 1;
    for (int i = 0; i < SIZE_WORDS; i++) mem[i] = '0;
  end

  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_data  = pipe_d[LATENCY-1];

  function automatic logic [31:0] rd(logic [31:0] byte_addr);
    return mem[int'(byte_addr[31:2]) % SIZE_WORDS];
  endfunction

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req.we) begin
        mem[int'(req.addr[31:2]) % SIZE_WORDS] = req.wdata;
        n_writes++;
      end else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= rd(req.addr);
        n_reads++;
      end
    end
    req_ready <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
  end
endmodule

// tb_mem_arbiter: self-checking test of the MEMIF arbiter.
//
// Four requesters each issue a random mix of writes and reads to their own
// address range, with random pauses, through the arbiter into a memory model
// with latency and random stalls. Each requester checks every read response
// against its own shadow copy of what it wrote, and that responses come back
// only for its own reads. A phase with all four requesting continuously checks
// the round-robin grant order (each requester served once in every four
// grants).
module tb_mem_arbiter;
  import reconros_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req_valid, req_ready, rsp_valid;
  mem_req_t [N-1:0] req;
  logic [31:0] rsp_data;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [31:0] m_rsp_data;

  mem_arbiter #(.N(N), .MAX_OUT(8)) dut (.*);
  tb_mem_model #(.LATENCY(5), .STALL_PCT(25)) u_mem (
    .clk, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  bit phase_rr = 0;
  bit stop = 0;
  int grants [$];
  int issued [N];
  int pend [N];

  for (genvar r = 0; r < N; r++) begin : g_req
    logic [31:0] shadow [16];
    logic [31:0] expq [$];
    logic     v = 1'b0;
    mem_req_t q = '0;
    assign req_valid[r] = v;
    assign req[r]       = q;
    initial for (int i = 0; i < 16; i++) shadow[i] = 0;
    always @(posedge clk) if (rst_n) begin
      if (req_valid[r] && req_ready[r]) begin
        if (req[r].we) shadow[req[r].addr[5:2]] = req[r].wdata;
        else expq.push_back(shadow[req[r].addr[5:2]]);
        issued[r]++;
      end
      if (rsp_valid[r]) begin
        checks++;
        if (expq.size() == 0) begin failures++; $display("req %0d: stray response", r); end
        else begin
          logic [31:0] e;
          e = expq.pop_front();
          if (rsp_data !== e) begin failures++; $display("req %0d: read %h expected %h", r, rsp_data, e); end
        end
      end
      pend[r] = expq.size();
    end
    always @(negedge clk) begin
      if (!rst_n) v <= 0;
      else if (!v || req_ready[r]) begin
        if (!stop && issued[r] < 200 && (phase_rr || $urandom % 3 == 0)) begin
          v       <= 1;
          q.we    <= phase_rr ? 1'b1 : 1'($urandom);
          q.addr  <= 32'h1000 * (r + 1) + 4 * ($urandom % 16);
          q.wdata <= $urandom;
        end else v <= 0;
      end
    end
  end

  always @(posedge clk) if (phase_rr && m_req_valid && m_req_ready)
    grants.push_back(m_req.addr[15:12] - 1);

  initial begin
    for (int r = 0; r < N; r++) begin issued[r] = 0; pend[r] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (1500) @(posedge clk);
    // continuous phase: every requester always has a write pending
    @(negedge clk); phase_rr = 1;
    for (int r = 0; r < N; r++) issued[r] = 0;
    repeat (300) @(posedge clk);
    @(negedge clk); phase_rr = 0; stop = 1;
    repeat (50) @(posedge clk);
    for (int i = 8; i + N <= grants.size(); i += N) begin
      logic [N-1:0] seen;
      seen = '0;
      for (int j = 0; j < N; j++) seen[grants[i+j]] = 1'b1;
      checks++;
      if (seen != '1) begin failures++; $display("grants %0d..%0d not round-robin", i, i+N-1); end
    end
    for (int r = 0; r < N; r++) begin
      checks++;
      if (pend[r] != 0) begin failures++; $display("req %0d: responses missing", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_zycap_dma: self-checking test of the reconfiguration DMA.
//
// A pseudo-random "bitstream" is placed in the memory model; the host programs
// source and length over the register port and starts the engine. Every word
// strobed into the ICAP port is compared, in order, with memory; the number of
// words, the done/irq flag, and the register read-back are checked. The first
// transfer runs on a memory with random stalls, the second on a memory without,
// where the transfer must finish within words + 12 clocks (one word per clock
// after the memory latency).
module tb_zycap_dma;
  import reconros_pkg::*;
  localparam int WORDS = 300;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic reg_wr, reg_rd, irq;
  logic [1:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [31:0] m_rsp_data;
  logic icap_csib, icap_rdwrb;
  logic [31:0] icap_data;

  // memory with stalls for the first transfer, without for the second
  logic ready_a, ready_b, rv_a, rv_b;
  logic [31:0] rd_a, rd_b;
  bit use_b = 0;
  tb_mem_model #(.LATENCY(6), .STALL_PCT(40)) u_mem_a (
    .clk, .req_valid(m_req_valid && !use_b), .req_ready(ready_a), .req(m_req),
    .rsp_valid(rv_a), .rsp_data(rd_a));
  tb_mem_model #(.LATENCY(6), .STALL_PCT(0)) u_mem_b (
    .clk, .req_valid(m_req_valid && use_b), .req_ready(ready_b), .req(m_req),
    .rsp_valid(rv_b), .rsp_data(rd_b));
  assign m_req_ready = use_b ? ready_b : ready_a;
  assign m_rsp_valid = use_b ? rv_b : rv_a;
  assign m_rsp_data  = use_b ? rd_b : rd_a;

  zycap_dma dut (.*);

  logic [31:0] bits [WORDS];
  int n_icap;
  always @(posedge clk) if (rst_n && !icap_csib) begin
    checks++;
    if (icap_rdwrb !== 1'b0) begin failures++; $display("ICAP strobe without write"); end
    if (n_icap >= WORDS || icap_data !== bits[n_icap]) begin
      failures++; $display("ICAP word %0d: %h", n_icap, icap_data);
    end
    n_icap++;
  end

  task automatic wr(logic [1:0] a, logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(logic [1:0] a, output logic [31:0] d);
    @(negedge clk); reg_rd = 1; reg_addr = a;
    @(negedge clk); reg_rd = 0; d = reg_rdata;
  endtask

  task automatic transfer(logic [31:0] base, output int cycles);
    logic [31:0] st;
    for (int i = 0; i < WORDS; i++) begin
      bits[i] = $urandom;
      if (use_b) u_mem_b.mem[30'(base/4 + i)] = bits[i];
      else       u_mem_a.mem[30'(base/4 + i)] = bits[i];
    end
    n_icap = 0;
    wr(1, base);
    wr(2, WORDS * 4);
    rd(1, st); checks++; if (st !== base) begin failures++; $display("src readback"); end
    wr(0, 32'h1);
    cycles = 0;
    while (!irq) begin @(posedge clk); cycles++; end
    repeat (3) @(posedge clk);
    rd(3, st);
    checks += 2;
    if (st !== 32'h2) begin failures++; $display("status %h", st); end
    if (n_icap != WORDS) begin failures++; $display("%0d ICAP words", n_icap); end
    wr(0, 32'h2);
    rd(3, st); checks++; if (st !== 32'h0) begin failures++; $display("done not cleared"); end
  endtask

  initial begin
    int cyc;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    transfer(32'h0010_0000, cyc);
    use_b = 1;
    transfer(32'h0020_0000, cyc);
    checks++;
    if (cyc > WORDS + 12) begin failures++; $display("transfer took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

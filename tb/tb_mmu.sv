// tb_mmu: self-checking test of the memory management unit.
//
// The test builds ARM short-descriptor page tables in a memory model with
// latency and random stalls. One requester issues random reads and writes to
// virtual addresses in five regions:
//   * 16 small pages mapped to physical pages in reverse order;
//   * a 64 KB large page;
//   * a 1 MB section;
//   * a page whose second-level entry is empty at first (fault);
//   * a 1 MB region with no first-level entry at first (fault).
// A host process answers each fault: it writes the missing descriptor and
// pulses `retry`.
//
// Halfway through, the traffic stops and the page-table base is switched to a
// second first-level table. That table maps the small-page region without the
// reversal, so a TLB that was not emptied shows up as wrong data: the
// traffic right before and after the switch stays in that region.
//
// A shadow copy keyed by *physical* word is kept from the testbench's own
// address map. Every read is compared with it. At the end every written word
// is looked up at its physical place in the memory model. The test also counts
// table walks, faults and TLB hits, and fails if any of them never happened.
module tb_mmu;
  import reconros_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int MEMW = 1 << 18;          // 1 MB of physical memory (model wraps above)
  localparam logic [31:0] L1_A = 32'h0001_0000, L1_B = 32'h0001_8000;
  localparam logic [31:0] L2_SMALL_A = 32'h0001_4000, L2_SMALL_B = 32'h0001_4400;
  localparam logic [31:0] L2_LARGE = 32'h0001_4800, L2_FAULT = 32'h0001_4C00;
  localparam logic [31:0] VA_SMALL = 32'h4000_0000, VA_LARGE = 32'h4010_0000,
                          VA_SECT  = 32'h4020_0000, VA_FP    = 32'h4030_0000,
                          VA_FS    = 32'h4040_0000;

  logic        pgd_retry, fault;
  logic [31:0] pgd, fault_addr;
  logic        s_req_valid, s_req_ready, s_rsp_valid, m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t    s_req, m_req;
  logic [31:0] s_rsp_data, m_rsp_data;

  mmu dut (
    .clk, .rst_n, .pgd_base(pgd), .fault, .fault_addr, .retry(pgd_retry),
    .s_req_valid, .s_req_ready, .s_req, .s_rsp_valid, .s_rsp_data,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp_data);

  tb_mem_model #(.LATENCY(6), .STALL_PCT(25), .SIZE_WORDS(MEMW)) u_mem (
    .clk, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  // ---- the testbench's own address map ----
  bit table_b = 0;       // page-table base B in use
  bit fp_fixed = 0, fs_fixed = 0;

  function automatic logic [31:0] va2pa(logic [31:0] va);
    logic [31:0] off;
    off = va & 32'h000F_FFFF;
    if (va[31:20] == VA_SMALL[31:20])
      return table_b ? 32'h0002_0000 + off
                     : 32'h0002_0000 + ((32'd15 - (off >> 12)) << 12) + (off & 32'hFFF);
    if (va[31:20] == VA_LARGE[31:20]) return 32'h0004_0000 + off;
    if (va[31:20] == VA_SECT[31:20])  return 32'h0010_0000 + off;
    if (va[31:20] == VA_FP[31:20])    return 32'h0003_0000 + off;
    return 32'h0020_0000 + off;       // VA_FS, mapped as a section once fixed
  endfunction

  function automatic int widx(logic [31:0] pa);
    return int'(pa[31:2]) % MEMW;
  endfunction

  function automatic logic [31:0] pattern(logic [31:0] pa);
    return pa ^ 32'h5A5A_0000;
  endfunction

  task automatic wr_word(logic [31:0] pa, logic [31:0] d);
    u_mem.mem[widx(pa)] = d;
  endtask

  task automatic build_tables();
    for (int i = 0; i < MEMW; i++) u_mem.mem[i] = pattern(32'(i) << 2);
    for (int i = 0; i < 4096; i++) begin
      wr_word(L1_A + 32'(4 * i), 32'h0);
      wr_word(L1_B + 32'(4 * i), 32'h0);
    end
    for (int i = 0; i < 256; i++) begin
      wr_word(L2_SMALL_A + 32'(4 * i), 32'h0);
      wr_word(L2_SMALL_B + 32'(4 * i), 32'h0);
      wr_word(L2_LARGE + 32'(4 * i), 32'h0004_0000 | 32'h1);   // large page, 16 copies
      wr_word(L2_FAULT + 32'(4 * i), 32'h0);
    end
    for (int p = 0; p < 16; p++) begin
      wr_word(L2_SMALL_A + 32'(4 * p), (32'h0002_0000 + (32'(15 - p) << 12)) | 32'h2);
      wr_word(L2_SMALL_B + 32'(4 * p), (32'h0002_0000 + (32'(p) << 12)) | 32'h2);
    end
    // first-level entries: coarse tables (type 01) and a section (type 10)
    wr_word(L1_A + (VA_SMALL >> 18), L2_SMALL_A | 32'h1);
    wr_word(L1_B + (VA_SMALL >> 18), L2_SMALL_B | 32'h1);
    wr_word(L1_A + (VA_LARGE >> 18), L2_LARGE | 32'h1);
    wr_word(L1_B + (VA_LARGE >> 18), L2_LARGE | 32'h1);
    wr_word(L1_A + (VA_SECT >> 18), 32'h0010_0000 | 32'h2);
    wr_word(L1_B + (VA_SECT >> 18), 32'h0010_0000 | 32'h2);
    wr_word(L1_A + (VA_FP >> 18), L2_FAULT | 32'h1);
    wr_word(L1_B + (VA_FP >> 18), L2_FAULT | 32'h1);
  endtask

  // ---- host: page-fault handler ----
  int n_fault_l1 = 0, n_fault_l2 = 0, n_walks = 0, n_hits = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.state == dut.M_LOOKUP && s_req_valid && !dut.hit && dut.outstanding == 0) n_walks++;
    if (s_req_valid && s_req_ready) n_hits++;
  end

  initial begin
    pgd_retry = 0;
    forever begin
      @(posedge clk);
      if (fault) begin
        repeat (5) @(posedge clk);
        checks++;
        if (fault_addr[31:12] == VA_FP[31:12] && !fp_fixed) begin
          wr_word(L2_FAULT, 32'h0003_0000 | 32'h2);
          fp_fixed = 1; n_fault_l2++;
        end else if (fault_addr[31:20] == VA_FS[31:20] && !fs_fixed) begin
          wr_word(L1_A + (VA_FS >> 18), 32'h0020_0000 | 32'h2);
          wr_word(L1_B + (VA_FS >> 18), 32'h0020_0000 | 32'h2);
          fs_fixed = 1; n_fault_l1++;
        end else begin
          failures++; $display("unexpected fault at %h", fault_addr);
        end
        @(negedge clk); pgd_retry = 1;
        @(negedge clk); pgd_retry = 0;
      end
    end
  end

  // ---- requester ----
  logic [31:0] shadow [int];           // physical word index -> value written
  logic [31:0] expq [$];

  function automatic logic [31:0] rand_va(bit small_only);
    int r = small_only ? 0 : $urandom % 6;
    unique case (r)
      0, 1: return VA_SMALL + (($urandom % 16384) << 2);
      2:    return VA_LARGE + (($urandom % 16384) << 2);
      3:    return VA_SECT  + (32'h8_0000 + (($urandom % 8192) << 2));
      4:    return VA_FP    + (($urandom % 1024) << 2);
      default: return VA_FS + (($urandom % 1024) << 2);
    endcase
  endfunction

  always @(posedge clk) if (rst_n && s_rsp_valid) begin
    logic [31:0] e;
    e = expq.pop_front();
    checks++;
    if (s_rsp_data !== e) begin
      failures++;
      if (failures < 10) $display("read: got %h expected %h", s_rsp_data, e);
    end
  end

  task automatic traffic(int n, bit small_only);
    for (int k = 0; k < n; k++) begin
      logic [31:0] va, pa, d;
      bit we;
      va = rand_va(small_only);
      we = ($urandom % 3) == 0;
      d  = $urandom;
      @(negedge clk);
      s_req_valid = 1; s_req.we = we; s_req.addr = va; s_req.wdata = d;
      do @(posedge clk); while (!s_req_ready);
      // the request is accepted at this edge; its physical place follows the map in force
      pa = va2pa(va);
      if (we) shadow[widx(pa)] = d;
      else expq.push_back(shadow.exists(widx(pa)) ? shadow[widx(pa)] : pattern(32'(widx(pa)) << 2));
      @(negedge clk); s_req_valid = 0;
      if (($urandom % 4) == 0) repeat ($urandom % 4) @(negedge clk);
    end
  endtask

  initial begin
    s_req_valid = 0; s_req = '0;
    pgd = L1_A;
    #1;   // after the memory model has cleared itself
    build_tables();
    repeat (3) @(posedge clk);
    rst_n = 1;

    traffic(200, 1);               // fill the TLB with small-page translations
    traffic(2800, 0);
    traffic(200, 1);
    repeat (40) @(posedge clk);
    @(negedge clk); pgd = L1_B; table_b = 1;
    traffic(200, 1);               // stale translations would be used here
    traffic(2800, 0);
    repeat (40) @(posedge clk);

    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d reads unanswered", expq.size()); end
    foreach (shadow[w]) begin
      checks++;
      if (u_mem.mem[w] !== shadow[w]) begin
        failures++;
        if (failures < 20) $display("word %h: %h expected %h", w * 4, u_mem.mem[w], shadow[w]);
      end
    end
    $display("mechanisms: table walks %0d, TLB-hit transfers %0d, L2 faults %0d, L1 faults %0d",
             n_walks, n_hits, n_fault_l2, n_fault_l1);
    checks++;
    if (n_walks == 0 || n_hits == 0 || n_fault_l1 != 1 || n_fault_l2 != 1) begin
      failures++; $display("a mechanism did not occur as expected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

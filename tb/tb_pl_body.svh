// tb_pl_body.svh: shared body of the end-to-end testbenches of reconros_pl.
//
// The including module defines W, H, SN, HB (callback sizes), MEMW (words of
// the threads' virtual data window), HPW (bitstream memory words), BS_WORDS (partial bitstream words per slot),
// ROUNDS, and instantiates `dut` on the signals declared here.
//
// The testbench plays the executor's hardware workers: for each slot it checks
// whether the needed callback is loaded; if not it builds a test bitstream in
// the HP memory, programs the reconfiguration DMA (one worker at a time), and
// waits for the ICAP model to report the slot loaded; then it writes the message
// pointer into the slot's OSIF and reads PUBLISH and EXIT back.
//
// The threads see virtual addresses. Data word w of the testbench lives at
// virtual byte VA_BASE + 4w and at physical word w ^ 1024, so neighbouring 4 KB
// pages trade places. The ARM page tables for that map lie in physical memory
// above the data window. The page holding the messages is left unmapped at
// first: the first thread to touch it takes a page fault, which the testbench
// fixes like the kernel would (write the descriptor, pulse retry). Results are
// compared with the reference models of tb_ref_pkg. Round 1 loads all four slots
// (Sobel, sort, hash, sort) and runs them in parallel; round 2 (if ROUNDS > 1)
// reuses the Sobel already in slot 0 while slot 1 and slot 3 are reconfigured
// (to hash and Sobel) next to running slots; round 3 (if ROUNDS > 2) runs all
// four slots with the bitstreams they already hold, at the same time.

  localparam int NRS = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NRS-1:0] osif_wr, osif_rd, osif_addr;
  logic [31:0]    osif_wdata [NRS];
  logic [31:0]    osif_rdata [NRS];
  logic           dma_wr, dma_rd, dma_irq;
  logic [1:0]     dma_addr;
  logic [31:0]    dma_wdata, dma_rdata;
  logic [31:0]    mmu_pgd, mmu_fault_addr;
  logic           mmu_fault, mmu_retry;
  logic           mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t       mem_req;
  logic [31:0]    mem_rsp_data;
  logic           hp_req_valid, hp_req_ready, hp_rsp_valid;
  mem_req_t       hp_req;
  logic [31:0]    hp_rsp_data;
  logic           icap_csib, icap_rdwrb;
  logic [31:0]    icap_data;
  cb_id_t         rs_cfg_id [NRS];
  logic [NRS-1:0] rs_cfg_loading, rs_active;

  tb_mem_model #(.LATENCY(8), .STALL_PCT(10), .SIZE_WORDS(2 * MEMW)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));
  tb_mem_model #(.LATENCY(8), .STALL_PCT(0), .SIZE_WORDS(HPW)) u_hp (
    .clk, .req_valid(hp_req_valid), .req_ready(hp_req_ready), .req(hp_req),
    .rsp_valid(hp_rsp_valid), .rsp_data(hp_rsp_data));
  tb_icap_model #(.N_RS(NRS)) u_icap (
    .clk, .rst_n, .icap_csib, .icap_rdwrb, .icap_data,
    .cfg_id(rs_cfg_id), .cfg_loading(rs_cfg_loading));

  // ---- mechanism counters ----
  int n_reconfig = 0, n_reuse = 0, n_contention = 0, n_load_beside_run = 0;
  int n_cb [4] = '{0, 0, 0, 0};
  int n_walk = 0, n_fault = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mmu.walk_go) n_walk++;
    if ($countones(dut.s_req_valid) > 1) n_contention++;
    if (rs_cfg_loading != '0 && (rs_active & ~rs_cfg_loading) != '0) n_load_beside_run++;
  end

  // ---- host register access ----
  task automatic osif_write(int s, logic [31:0] w);
    @(negedge clk); osif_wr[s] = 1; osif_addr[s] = 0; osif_wdata[s] = w;
    @(negedge clk); osif_wr[s] = 0;
  endtask
  task automatic osif_read(int s, logic a, output logic [31:0] w);
    @(negedge clk); osif_rd[s] = 1; osif_addr[s] = a;
    @(negedge clk); osif_rd[s] = 0; w = osif_rdata[s];
  endtask
  task automatic dma_write(logic [1:0] a, logic [31:0] d);
    @(negedge clk); dma_wr = 1; dma_addr = a; dma_wdata = d;
    @(negedge clk); dma_wr = 0;
  endtask

  bit dma_lock = 0;
  int bs_next = 0;   // next free word in the HP memory

  task automatic reconfigure(int s, cb_id_t id);
    int base, n;
    while (dma_lock) @(posedge clk);
    dma_lock = 1;
    n = BS_WORDS[s];
    base = bs_next;
    bs_next = (bs_next + n) % (HPW - n);
    u_hp.mem[base]     = 32'hAA99_5566;
    u_hp.mem[base + 1] = {16'h5EC7, 8'(s), 8'(id)};
    u_hp.mem[base + 2] = 32'(n);
    for (int i = 3; i < n; i++) u_hp.mem[base + i] = 32'h2000_0000 | 32'(i);
    dma_write(1, 32'(base * 4));
    dma_write(2, 32'(n * 4));
    dma_write(0, 32'h1);
    while (!dma_irq) @(posedge clk);
    dma_write(0, 32'h2);
    dma_lock = 0;
    while (rs_cfg_loading[s] || rs_cfg_id[s] != id) @(posedge clk);
    n_reconfig++;
  endtask

  task automatic hw_worker(int s, cb_id_t id, logic [31:0] msg, output int cycles);
    logic [31:0] st, w;
    int t0;
    if (rs_cfg_id[s] != id) reconfigure(s, id);
    else n_reuse++;
    t0 = $time;
    osif_write(s, msg);
    for (int k = 0; k < 2; k++) begin
      do osif_read(s, 1, st); while (!st[0]);
      osif_read(s, 0, w);
      checks++;
      if (w[31:24] !== (k == 0 ? OSIF_CMD_PUBLISH : OSIF_CMD_EXIT)) begin
        failures++; $display("slot %0d: OSIF word %h", s, w);
      end
    end
    cycles = ($time - t0) / 10;
    n_cb[int'(id)]++;
  endtask

  // ---- virtual memory ----
  localparam logic [31:0] VA_BASE = 32'h4000_0000;
  localparam int PT_WORD = MEMW;                  // first-level table, physical word
  localparam int N_L2 = (MEMW + 262143) / 262144; // 1 MB regions in the window

  function automatic int pw(int w);               // physical word of data word w
    return w ^ 1024;
  endfunction

  function automatic logic [31:0] l2_entry(int vpage);
    return 32'(pw(vpage * 1024) * 4) | 32'h2;      // small page
  endfunction

  task automatic build_page_tables();
    for (int i = 0; i < 4096 + 256 * N_L2; i++) u_mem.mem[PT_WORD + i] = '0;
    for (int r = 0; r < N_L2; r++) begin
      u_mem.mem[PT_WORD + int'(VA_BASE >> 20) + r] = 32'((PT_WORD + 4096 + 256 * r) * 4) | 32'h1;
      for (int p = 0; p < 256; p++)
        if (256 * r + p < MEMW / 1024) u_mem.mem[PT_WORD + 4096 + 256 * r + p] = l2_entry(256 * r + p);
    end
    u_mem.mem[PT_WORD + 4096] = '0;               // page 0 (messages) starts unmapped
  endtask

  initial begin
    mmu_retry = 0;
    forever begin
      @(posedge clk);
      if (mmu_fault) begin
        checks++;
        if (mmu_fault_addr[31:12] != VA_BASE[31:12] || n_fault != 0) begin
          failures++; $display("unexpected page fault at %h", mmu_fault_addr);
        end
        u_mem.mem[PT_WORD + 4096] = l2_entry(0);
        n_fault++;
        repeat (20) @(posedge clk);
        @(negedge clk); mmu_retry = 1;
        @(negedge clk); mmu_retry = 0;
      end
    end
  end

  // ---- data placement ----
  int next_word = 16'h1000 / 4;
  function automatic int alloc(int nwords);
    int b = next_word;
    next_word += nwords + 16;
    return b;
  endfunction

  task automatic put(int base, word_q_t d);
    for (int i = 0; i < d.size(); i++) u_mem.mem[pw(base + i)] = d[i];
  endtask

  task automatic expect_block(int base, word_q_t exp, string what);
    int bad = 0;
    for (int i = 0; i < exp.size(); i++) begin
      checks++;
      if (u_mem.mem[pw(base + i)] !== exp[i]) begin
        failures++;
        if (bad++ < 5) $display("%s word %0d: %h expected %h", what, i, u_mem.mem[pw(base + i)], exp[i]);
      end
    end
  endtask

  // message k lives at data word 16*k + 64 (virtual VA_BASE + 0x100 + 0x40*k);
  // word 0 points to the payload
  function automatic logic [31:0] msg_addr(int k);
    return VA_BASE + 32'(4 * (64 + 16 * k));
  endfunction

  task automatic make_msg(int k, int payload_word);
    u_mem.mem[pw(64 + 16 * k)] = VA_BASE + 32'(payload_word * 4);
  endtask

  function automatic word_q_t gen(int seed, int n);
    word_q_t d;
    d = new[n];
    for (int i = 0; i < n; i++) d[i] = tb_ref_pkg::gen_word(seed, i);
    return d;
  endfunction

  initial begin
    word_q_t imgA, numB, hashC, numD, imgE, imgG;
    int bA, bB, bC, bD, bE, bG;
    int cyc [NRS];
    logic [255:0] dC;
    osif_wr = '0; osif_rd = '0; osif_addr = '0;
    for (int i = 0; i < NRS; i++) osif_wdata[i] = '0;
    dma_wr = 0; dma_rd = 0; dma_addr = 0; dma_wdata = 0;
    mmu_pgd = 32'(PT_WORD * 4);
    #1;   // after the memory model has cleared itself
    build_page_tables();

    imgA = gen(11, W * H);       bA = alloc(W * H);   put(bA, imgA); make_msg(0, bA);
    numB = gen(12, SN);          bB = alloc(SN);      put(bB, numB); make_msg(1, bB);
    hashC = gen(13, HB / 4);     bC = alloc(HB / 4);  put(bC, hashC); make_msg(2, bC);
    numD = gen(14, SN);          bD = alloc(SN);      put(bD, numD); make_msg(3, bD);
    repeat (4) @(posedge clk);
    rst_n = 1;

    // round 1: every slot needs a bitstream
    fork
      hw_worker(0, CB_SOBEL, msg_addr(0), cyc[0]);
      hw_worker(1, CB_SORT,  msg_addr(1), cyc[1]);
      hw_worker(2, CB_HASH,  msg_addr(2), cyc[2]);
      hw_worker(3, CB_SORT,  msg_addr(3), cyc[3]);
    join
    $display("round 1 callback cycles (after load): sobel %0d sort %0d hash %0d sort %0d",
             cyc[0], cyc[1], cyc[2], cyc[3]);
    expect_block(bA, tb_ref_pkg::sobel_ref(imgA, W, H), "sobel A");
    expect_block(bB, tb_ref_pkg::sort_ref(numB), "sort B");
    expect_block(bD, tb_ref_pkg::sort_ref(numD), "sort D");
    dC = tb_ref_pkg::sha256_ref(hashC, HB);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (u_mem.mem[pw(64 + 32 + 1 + i)] !== dC[255 - 32*i -: 32]) begin
        failures++; $display("hash C word %0d: %h", i, u_mem.mem[pw(64 + 32 + 1 + i)]);
      end
    end
    checks++;
    if (hashC[0] !== u_mem.mem[pw(bC)]) begin failures++; $display("hash input overwritten"); end

    if (ROUNDS > 1) begin
      // round 2: slot 0 keeps its Sobel; slots 1 and 3 are reloaded while others run
      imgE = gen(15, W * H);  bE = alloc(W * H);  put(bE, imgE); make_msg(4, bE);
      imgG = gen(16, W * H);  bG = alloc(W * H);  put(bG, imgG); make_msg(5, bG);
      make_msg(6, bC);
      fork
        hw_worker(0, CB_SOBEL, msg_addr(4), cyc[0]);
        hw_worker(1, CB_HASH,  msg_addr(6), cyc[1]);
        hw_worker(3, CB_SOBEL, msg_addr(5), cyc[3]);
      join
      expect_block(bE, tb_ref_pkg::sobel_ref(imgE, W, H), "sobel E");
      expect_block(bG, tb_ref_pkg::sobel_ref(imgG, W, H), "sobel G");
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (u_mem.mem[pw(64 + 96 + 1 + i)] !== dC[255 - 32*i -: 32]) begin
          failures++; $display("hash F word %0d: %h", i, u_mem.mem[pw(64 + 96 + 1 + i)]);
        end
      end
    end

    if (ROUNDS > 2) begin
      // round 3: everything already loaded, four slots busy at once
      make_msg(7, bE); make_msg(8, bG);
      imgE = tb_ref_pkg::sobel_ref(imgE, W, H);
      imgG = tb_ref_pkg::sobel_ref(imgG, W, H);
      fork
        hw_worker(0, CB_SOBEL, msg_addr(7), cyc[0]);
        hw_worker(1, CB_HASH,  msg_addr(6), cyc[1]);
        hw_worker(2, CB_HASH,  msg_addr(2), cyc[2]);
        hw_worker(3, CB_SOBEL, msg_addr(8), cyc[3]);
      join
      expect_block(bE, tb_ref_pkg::sobel_ref(imgE, W, H), "sobel E twice");
      expect_block(bG, tb_ref_pkg::sobel_ref(imgG, W, H), "sobel G twice");
    end

    checks++;
    if (u_icap.errors != 0 || u_icap.n_loads != n_reconfig) begin
      failures++; $display("ICAP model: %0d errors, %0d loads", u_icap.errors, u_icap.n_loads);
    end
    $display("mechanisms: reconfigurations %0d, loaded-bitstream reuse %0d, MEMIF contention cycles %0d, load beside running slot cycles %0d, table walks %0d, page faults %0d, sobel %0d sort %0d hash %0d",
             n_reconfig, n_reuse, n_contention, n_load_beside_run, n_walk, n_fault,
             n_cb[int'(CB_SOBEL)], n_cb[int'(CB_SORT)], n_cb[int'(CB_HASH)]);
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

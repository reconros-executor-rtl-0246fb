// mmu: memory management unit of the memory subsystem, so that hardware threads
// can work with the virtual addresses of the Linux process that runs the
// executor.
//
// It sits between the MEMIF arbiter and the memory controller. A request whose
// 4 KB virtual page is in the TLB is passed on in the same clock, with the page
// number replaced. On a miss the MMU waits until every read it has already
// forwarded has returned. Then it walks the process's page tables in main memory
// itself, in the ARM short-descriptor format of the Cortex-A9:
//   * The first-level entry is at pgd_base[31:14] : va[31:20] : 00.
//     - Type 10 is a 1 MB section: the physical address is e[31:20] : va[19:0].
//     - Type 01 points to a second-level table at e[31:10].
//     - Type 00 is a fault.
//   * The second-level entry is at e1[31:10] : va[19:12] : 00.
//     - Type 1x is a 4 KB small page: the physical address is e[31:12] : va[11:0].
//     - Type 01 is a 64 KB large page: the physical address is e[31:16] : va[15:0].
//     - Type 00 is a fault.
// The result is stored in the TLB as a 4 KB page. The TLB is fully associative
// with TLB_ENTRIES entries and replaces them round-robin. A new pgd_base value
// (another process) empties the TLB.
//
// On a fault, `fault` goes high and `fault_addr` holds the virtual address. The
// MMU waits until the host has fixed the tables and pulsed `retry`, then looks
// the request up again. Access rights (AP/domain bits) are not checked.
//
// Interface:
//   * The slave side takes virtual addresses, the master side gives physical
//     ones. Both use the reconros_pkg valid/ready request and in-order read
//     responses, as mem_arbiter does.
//   * Table walks use the master port, so their reads are ordinary memory reads.
// Timing: a hit costs no extra clock. A miss costs the drain plus one or two
// memory reads.
//
// From the paper: only the function, "a memory management unit to allow the
// hardware threads to work with virtual addresses", as part of the memory
// subsystem behind the MEMIFs. All the insides are this design's choice:
//   * the descriptor format, that of the Cortex-A9 the paper's platform uses;
//   * the TLB and its size;
//   * the fault and retry handshake.
module mmu
  import reconros_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 16,
  parameter int unsigned MAX_OUT     = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] pgd_base,     // physical address of the first-level table (16 KB aligned)
  output logic        fault,
  output logic [31:0] fault_addr,
  input  logic        retry,
  // virtual side (from the MEMIF arbiter)
  input  logic        s_req_valid,
  output logic        s_req_ready,
  input  mem_req_t    s_req,
  output logic        s_rsp_valid,
  output logic [31:0] s_rsp_data,
  // physical side (to the memory controller)
  output logic        m_req_valid,
  input  logic        m_req_ready,
  output mem_req_t    m_req,
  input  logic        m_rsp_valid,
  input  logic [31:0] m_rsp_data
);
  localparam int unsigned EW = (TLB_ENTRIES > 1) ? $clog2(TLB_ENTRIES) : 1;
  localparam int unsigned CW = $clog2(MAX_OUT + 1);

  typedef enum logic [2:0] {M_LOOKUP, M_L1_REQ, M_L1_WAIT, M_L2_REQ, M_L2_WAIT, M_FAULT} mstate_t;
  mstate_t state;

  logic [TLB_ENTRIES-1:0] tlb_v;
  logic [19:0]            tlb_vpn [TLB_ENTRIES];
  logic [19:0]            tlb_ppn [TLB_ENTRIES];
  logic [EW-1:0]          repl;
  logic [31:0]            pgd_q;
  logic [31:10]           l2_base;      // second-level table base
  logic [31:0]            va_q;        // virtual address being walked
  logic [CW-1:0]          outstanding;

  // ---- TLB lookup ----
  logic        hit;
  logic [19:0] hit_ppn;
  always_comb begin
    hit = 1'b0;
    hit_ppn = '0;
    for (int e = 0; e < TLB_ENTRIES; e++)
      if (tlb_v[e] && tlb_vpn[e] == s_req.addr[31:12]) begin
        hit = 1'b1;
        hit_ppn = tlb_ppn[e];
      end
  end

  wire walking   = (state != M_LOOKUP);
  wire pass      = (state == M_LOOKUP) && s_req_valid && hit;
  wire walk_go   = (state == M_LOOKUP) && s_req_valid && !hit && outstanding == '0;
  wire new_pgd   = (pgd_base != pgd_q);

  always_comb begin
    m_req_valid = 1'b0;
    m_req       = s_req;
    unique case (state)
      M_LOOKUP: begin
        m_req_valid = pass;
        m_req.addr  = {hit_ppn, s_req.addr[11:0]};
      end
      M_L1_REQ: begin
        m_req_valid = 1'b1;
        m_req.we    = 1'b0;
        m_req.wdata = '0;
        m_req.addr  = {pgd_q[31:14], va_q[31:20], 2'b00};
      end
      M_L2_REQ: begin
        m_req_valid = 1'b1;
        m_req.we    = 1'b0;
        m_req.wdata = '0;
        m_req.addr  = {l2_base[31:10], va_q[19:12], 2'b00};
      end
      default: ;
    endcase
  end

  assign s_req_ready = pass && m_req_ready;
  assign s_rsp_valid = m_rsp_valid && !walking;
  assign s_rsp_data  = m_rsp_data;
  assign fault       = (state == M_FAULT);
  assign fault_addr  = va_q;

  // ---- table walk ----
  task automatic fill(input logic [19:0] ppn);
    tlb_v[repl]   <= 1'b1;
    tlb_vpn[repl] <= va_q[31:12];
    tlb_ppn[repl] <= ppn;
    repl          <= (32'(repl) == TLB_ENTRIES - 1) ? '0 : repl + 1'b1;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= M_LOOKUP;
      tlb_v       <= '0;
      repl        <= '0;
      pgd_q       <= '0;
      l2_base     <= '0;
      va_q        <= '0;
      outstanding <= '0;
      for (int e = 0; e < TLB_ENTRIES; e++) begin
        tlb_vpn[e] <= '0;
        tlb_ppn[e] <= '0;
      end
    end else begin
      if (!walking)
        outstanding <= outstanding + CW'(s_req_ready && !s_req.we) - CW'(m_rsp_valid);

      unique case (state)
        M_LOOKUP: if (walk_go) begin
          va_q  <= s_req.addr;
          state <= M_L1_REQ;
        end
        M_L1_REQ: if (m_req_ready) state <= M_L1_WAIT;
        M_L1_WAIT: if (m_rsp_valid) begin
          unique case (m_rsp_data[1:0])
            2'b10: begin
              fill({m_rsp_data[31:20], va_q[19:12]});
              state <= M_LOOKUP;
            end
            2'b01: begin
              l2_base <= m_rsp_data[31:10];
              state   <= M_L2_REQ;
            end
            default: state <= M_FAULT;
          endcase
        end
        M_L2_REQ: if (m_req_ready) state <= M_L2_WAIT;
        M_L2_WAIT: if (m_rsp_valid) begin
          if (m_rsp_data[1]) begin
            fill(m_rsp_data[31:12]);
            state <= M_LOOKUP;
          end else if (m_rsp_data[0]) begin
            fill({m_rsp_data[31:16], va_q[15:12]});
            state <= M_LOOKUP;
          end else begin
            state <= M_FAULT;
          end
        end
        M_FAULT: if (retry) state <= M_LOOKUP;
        default: state <= M_LOOKUP;
      endcase

      // a new page table base invalidates every translation
      pgd_q <= pgd_base;
      if (new_pgd) tlb_v <= '0;
    end
  end

  a_no_rsp_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    (m_rsp_valid && !walking) |-> outstanding != '0);

endmodule

// reconros_pl: programmable-logic half of the ReconROS executor platform.
//
// The executor, running on the processor, dispatches ROS 2 callbacks either to
// software workers (processor cores) or to hardware workers, one per
// reconfigurable slot. This module is the hardware those hardware workers
// drive: NUM_RS reconfigurable slots, each with its OSIF (command channel to the
// host) and its MEMIF (access to shared main memory), the arbiter that merges
// the MEMIFs onto one port, the MMU that translates the threads' virtual
// addresses on that port into physical ones for the memory controller, and the
// reconfiguration DMA that copies partial bitstreams from main memory into the
// ICAP.
//
// A hardware worker for slot x runs: if the callback's bitstream is not the one
// loaded in slot x, program the DMA with the bitstream's address and length and
// wait for its interrupt; then write the message pointer into OSIF x; then read
// OSIF x until the thread reports PUBLISH and EXIT. All of that is software;
// this module offers the registers it needs.
//
// Ports: per slot an OSIF register port (see osif) as arrays indexed by slot;
// the DMA register port and interrupt; the MMU's page-table base (set by the
// host to the executor process's tables), page-fault report and retry; the
// memory port behind the MMU and the DMA's
// high-performance memory port (both reconros_pkg request/response convention);
// the ICAP write port; and, per slot, `rs_cfg_id` / `rs_cfg_loading`, which
// report what the configuration memory of each slot holds. These last come from
// the device's configuration logic behind the ICAP, which is not logic of this
// design, and so enter as ports.
//
// From the paper: the block structure of Fig. 3 (OSIF and MEMIF per slot, DMA
// into ICAP, memory controller shared), the memory subsystem with arbitration
// and an MMU (Sec. III-A), four slots as in the evaluation. The DMA bypasses
// the MMU: it is given physical addresses, as a kernel driver would give it. Own
// choices: every signal-level detail, and that all slots can hold all three
// callbacks built here.
module reconros_pl
  import reconros_pkg::*;
#(
  parameter int unsigned N_RS     = NUM_RS,
  parameter int unsigned IMG_W    = SOBEL_W,
  parameter int unsigned IMG_H    = SOBEL_H,
  parameter int unsigned SORT_LEN = SORT_N,
  parameter int unsigned HASH_LEN = HASH_BYTES
) (
  input  logic               clk,
  input  logic               rst_n,
  // OSIF register ports, one per slot
  input  logic  [N_RS-1:0]   osif_wr,
  input  logic  [N_RS-1:0]   osif_rd,
  input  logic  [N_RS-1:0]   osif_addr,
  input  logic  [31:0]       osif_wdata [N_RS],
  output logic  [31:0]       osif_rdata [N_RS],
  // reconfiguration DMA register port
  input  logic               dma_wr,
  input  logic               dma_rd,
  input  logic  [1:0]        dma_addr,
  input  logic  [31:0]       dma_wdata,
  output logic  [31:0]       dma_rdata,
  output logic               dma_irq,
  // memory management unit: page-table base, page fault report and retry
  input  logic  [31:0]       mmu_pgd,
  output logic               mmu_fault,
  output logic  [31:0]       mmu_fault_addr,
  input  logic               mmu_retry,
  // MEMIF side of the memory controller (physical addresses)
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output mem_req_t           mem_req,
  input  logic               mem_rsp_valid,
  input  logic  [31:0]       mem_rsp_data,
  // HP port of the reconfiguration DMA
  output logic               hp_req_valid,
  input  logic               hp_req_ready,
  output mem_req_t           hp_req,
  input  logic               hp_rsp_valid,
  input  logic  [31:0]       hp_rsp_data,
  // ICAP write port
  output logic               icap_csib,
  output logic               icap_rdwrb,
  output logic  [31:0]       icap_data,
  // configuration state of each slot
  input  cb_id_t             rs_cfg_id      [N_RS],
  input  logic  [N_RS-1:0]   rs_cfg_loading,
  output logic  [N_RS-1:0]   rs_active
);
  logic [N_RS-1:0]        s_req_valid, s_req_ready, s_rsp_valid;
  mem_req_t [N_RS-1:0]    s_req;
  logic [31:0]            s_rsp_data;
  logic                   v_req_valid, v_req_ready, v_rsp_valid;
  mem_req_t               v_req;
  logic [31:0]            v_rsp_data;

  for (genvar i = 0; i < N_RS; i++) begin : g_rs
    logic        in_valid, in_ready, out_valid, out_ready;
    logic [31:0] in_data, out_data;

    osif u_osif (
      .clk, .rst_n,
      .reg_wr      (osif_wr[i]),
      .reg_rd      (osif_rd[i]),
      .reg_addr    (osif_addr[i]),
      .reg_wdata   (osif_wdata[i]),
      .reg_rdata   (osif_rdata[i]),
      .hw_in_valid (in_valid),
      .hw_in_ready (in_ready),
      .hw_in_data  (in_data),
      .hw_out_valid(out_valid),
      .hw_out_ready(out_ready),
      .hw_out_data (out_data)
    );

    recon_slot #(
      .IMG_W(IMG_W), .IMG_H(IMG_H), .SORT_LEN(SORT_LEN), .HASH_LEN(HASH_LEN)
    ) u_slot (
      .clk, .rst_n,
      .cfg_id        (rs_cfg_id[i]),
      .cfg_loading   (rs_cfg_loading[i]),
      .osif_in_valid (in_valid),
      .osif_in_ready (in_ready),
      .osif_in_data  (in_data),
      .osif_out_valid(out_valid),
      .osif_out_ready(out_ready),
      .osif_out_data (out_data),
      .mem_req_valid (s_req_valid[i]),
      .mem_req_ready (s_req_ready[i]),
      .mem_req       (s_req[i]),
      .mem_rsp_valid (s_rsp_valid[i]),
      .mem_rsp_data  (s_rsp_data),
      .active        (rs_active[i])
    );
  end

  mem_arbiter #(.N(N_RS)) u_arb (
    .clk, .rst_n,
    .req_valid  (s_req_valid),
    .req_ready  (s_req_ready),
    .req        (s_req),
    .rsp_valid  (s_rsp_valid),
    .rsp_data   (s_rsp_data),
    .m_req_valid(v_req_valid),
    .m_req_ready(v_req_ready),
    .m_req      (v_req),
    .m_rsp_valid(v_rsp_valid),
    .m_rsp_data (v_rsp_data)
  );

  mmu u_mmu (
    .clk, .rst_n,
    .pgd_base   (mmu_pgd),
    .fault      (mmu_fault),
    .fault_addr (mmu_fault_addr),
    .retry      (mmu_retry),
    .s_req_valid(v_req_valid),
    .s_req_ready(v_req_ready),
    .s_req      (v_req),
    .s_rsp_valid(v_rsp_valid),
    .s_rsp_data (v_rsp_data),
    .m_req_valid(mem_req_valid),
    .m_req_ready(mem_req_ready),
    .m_req      (mem_req),
    .m_rsp_valid(mem_rsp_valid),
    .m_rsp_data (mem_rsp_data)
  );

  zycap_dma u_dma (
    .clk, .rst_n,
    .reg_wr     (dma_wr),
    .reg_rd     (dma_rd),
    .reg_addr   (dma_addr),
    .reg_wdata  (dma_wdata),
    .reg_rdata  (dma_rdata),
    .irq        (dma_irq),
    .m_req_valid(hp_req_valid),
    .m_req_ready(hp_req_ready),
    .m_req      (hp_req),
    .m_rsp_valid(hp_rsp_valid),
    .m_rsp_data (hp_rsp_data),
    .icap_csib,
    .icap_rdwrb,
    .icap_data
  );

endmodule

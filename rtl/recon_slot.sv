// recon_slot: one reconfigurable slot (RS) and the hardware callbacks it can hold.
//
// A reconfigurable slot is a region of the fabric into which the executor loads,
// by partial reconfiguration, the hardware thread of whichever callback is to run
// next. Which callback the slot holds is configuration state, not logic: in
// this RTL the slot contains one instance of every callback it can hold (image
// Sobel filter, number sorting, SHA-256 hash) and the input `cfg_id` — the
// identity of the partial bitstream last written into the slot — selects which
// of them is connected to the slot's OSIF and MEMIF. The others are held idle.
// While `cfg_loading` is high (the slot's bitstream is being rewritten) every
// thread is held in reset and the slot's MEMIF request and OSIF outputs are cut
// off, which is the decoupling a partially reconfigured region needs.
//
// A synthesised slot therefore contains all three callbacks at once; on the
// device a slot contains only the one loaded. The behaviour at the slot's
// boundary — one callback, chosen by the last bitstream loaded — is the same.
//
// Interface: thread-side OSIF streams, MEMIF request/response (see hw_thread),
// `cfg_id` (reconros_pkg::cb_id_t), `cfg_loading`, and `active` (a callback is
// running). Timing: that of the selected callback.
//
// From the paper: slots that accommodate hardware threads implementing ROS 2
// callbacks, each with an OSIF and a MEMIF, loaded on demand (Sec. III-A); the
// callbacks and their sizes (Sec. V-A). Own choices: the all-kernels model of
// reconfiguration, the decoupling behaviour.
module recon_slot
  import reconros_pkg::*;
#(
  parameter int unsigned IMG_W      = 640,
  parameter int unsigned IMG_H      = 480,
  parameter int unsigned SORT_LEN   = 2048,
  parameter int unsigned HASH_LEN   = 1920 * 1080 * 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cb_id_t      cfg_id,
  input  logic        cfg_loading,
  // OSIF, thread side
  input  logic        osif_in_valid,
  output logic        osif_in_ready,
  input  logic [31:0] osif_in_data,
  output logic        osif_out_valid,
  input  logic        osif_out_ready,
  output logic [31:0] osif_out_data,
  // MEMIF
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_rsp_valid,
  input  logic [31:0] mem_rsp_data,
  output logic        active
);
  localparam int NK = 3;   // callbacks a slot can hold: sobel, sort, hash

  logic        t_in_valid  [NK], t_in_ready  [NK];
  logic        t_out_valid [NK], t_out_ready [NK];
  logic [31:0] t_out_data  [NK];
  logic        t_req_valid [NK], t_req_ready [NK];
  mem_req_t    t_req       [NK];
  logic        t_rsp_valid [NK];
  logic        t_active    [NK];
  logic        t_hold      [NK];

  logic        k_start     [NK];
  logic        k_in_valid  [NK], k_in_ready  [NK];
  logic [31:0] k_in_data   [NK];
  logic        k_out_valid [NK], k_out_ready [NK];
  logic [31:0] k_out_data  [NK];

  function automatic int sel_index(input cb_id_t id);
    unique case (id)
      CB_SOBEL: return 0;
      CB_SORT:  return 1;
      CB_HASH:  return 2;
      default:  return -1;
    endcase
  endfunction

  int sel;
  assign sel = cfg_loading ? -1 : sel_index(cfg_id);

  always_comb begin
    osif_in_ready  = 1'b0;
    osif_out_valid = 1'b0;
    osif_out_data  = '0;
    mem_req_valid  = 1'b0;
    mem_req        = '0;
    active         = 1'b0;
    for (int k = 0; k < NK; k++) begin
      t_hold[k]      = (sel != k);
      t_in_valid[k]  = (sel == k) && osif_in_valid;
      t_out_ready[k] = (sel == k) && osif_out_ready;
      t_req_ready[k] = (sel == k) && mem_req_ready;
      t_rsp_valid[k] = (sel == k) && mem_rsp_valid;
      if (sel == k) begin
        osif_in_ready  = t_in_ready[k];
        osif_out_valid = t_out_valid[k];
        osif_out_data  = t_out_data[k];
        mem_req_valid  = t_req_valid[k];
        mem_req        = t_req[k];
        active         = t_active[k];
      end
    end
  end

  localparam int unsigned IN_WORDS  [NK] = '{IMG_W * IMG_H, SORT_LEN, HASH_LEN / 4};
  localparam int unsigned OUT_WORDS [NK] = '{IMG_W * IMG_H, SORT_LEN, 8};
  localparam bit          TO_MSG    [NK] = '{1'b0, 1'b0, 1'b1};

  for (genvar k = 0; k < NK; k++) begin : g_thread
    hw_thread #(
      .IN_WORDS  (IN_WORDS[k]),
      .OUT_WORDS (OUT_WORDS[k]),
      .OUT_TO_MSG(TO_MSG[k])
    ) u_thread (
      .clk, .rst_n,
      .in_reset      (t_hold[k]),
      .osif_in_valid (t_in_valid[k]),
      .osif_in_ready (t_in_ready[k]),
      .osif_in_data  (osif_in_data),
      .osif_out_valid(t_out_valid[k]),
      .osif_out_ready(t_out_ready[k]),
      .osif_out_data (t_out_data[k]),
      .mem_req_valid (t_req_valid[k]),
      .mem_req_ready (t_req_ready[k]),
      .mem_req       (t_req[k]),
      .mem_rsp_valid (t_rsp_valid[k]),
      .mem_rsp_data  (mem_rsp_data),
      .core_start    (k_start[k]),
      .core_in_valid (k_in_valid[k]),
      .core_in_ready (k_in_ready[k]),
      .core_in_data  (k_in_data[k]),
      .core_out_valid(k_out_valid[k]),
      .core_out_ready(k_out_ready[k]),
      .core_out_data (k_out_data[k]),
      .active        (t_active[k])
    );
  end

  // Kernels are reset together with their thread while not selected.
  logic krst_n [NK];
  always_comb for (int k = 0; k < NK; k++) krst_n[k] = rst_n && !t_hold[k];

  logic sobel_busy, sobel_done, sort_busy, sort_done;

  sobel_filter #(.W(IMG_W), .H(IMG_H)) u_sobel (
    .clk, .rst_n(krst_n[0]),
    .start    (k_start[0]),
    .in_valid (k_in_valid[0]),
    .in_ready (k_in_ready[0]),
    .in_data  (k_in_data[0]),
    .out_valid(k_out_valid[0]),
    .out_ready(k_out_ready[0]),
    .out_data (k_out_data[0]),
    .busy     (sobel_busy),
    .done     (sobel_done)
  );

  oet_sorter #(.N(SORT_LEN)) u_sort (
    .clk, .rst_n(krst_n[1]),
    .in_valid (k_in_valid[1]),
    .in_ready (k_in_ready[1]),
    .in_data  (k_in_data[1]),
    .out_valid(k_out_valid[1]),
    .out_ready(k_out_ready[1]),
    .out_data (k_out_data[1]),
    .sorting  (sort_busy),
    .done     (sort_done)
  );

  hash_kernel #(.MSG_BYTES(HASH_LEN)) u_hash (
    .clk, .rst_n(krst_n[2]),
    .start    (k_start[2]),
    .in_valid (k_in_valid[2]),
    .in_ready (k_in_ready[2]),
    .in_data  (k_in_data[2]),
    .out_valid(k_out_valid[2]),
    .out_ready(k_out_ready[2]),
    .out_data (k_out_data[2])
  );

endmodule

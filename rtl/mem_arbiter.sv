// mem_arbiter: memory subsystem arbitration between the slots' memory interfaces.
//
// N requesters (the MEMIFs of the reconfigurable slots) share one memory port.
// Each clock at most one request is forwarded; the grant rotates round-robin,
// starting the search after the requester granted last, so no slot can starve
// another. Reads return in order on the shared port; the arbiter remembers, in a
// FIFO, which requester each read belongs to and steers the response back to it.
//
// Interface: per requester valid/ready + reconros_pkg::mem_req_t and rsp_valid
// (rsp_data is shared, qualified by each requester's rsp_valid); memory side the
// same convention. Timing: combinational path request->memory, no added latency.
// Up to MAX_OUT reads may be outstanding; beyond that further reads wait.
//
// From the paper: "the memory subsystem that provides arbitration between the
// MEMIFs" (Sec. III-A). Own choices: round-robin policy, in-order responses,
// MAX_OUT. Address translation is done behind this block, by mmu.
module mem_arbiter
  import reconros_pkg::*;
#(
  parameter int unsigned N       = 4,
  parameter int unsigned MAX_OUT = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req_valid,
  output logic [N-1:0]         req_ready,
  input  mem_req_t [N-1:0]     req,
  output logic [N-1:0]         rsp_valid,
  output logic [31:0]          rsp_data,
  // memory side
  output logic                 m_req_valid,
  input  logic                 m_req_ready,
  output mem_req_t             m_req,
  input  logic                 m_rsp_valid,
  input  logic [31:0]          m_rsp_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned CW = $clog2(MAX_OUT + 1);

  logic [IW-1:0] last, sel;
  logic          found;

  // Round-robin search starting after `last`.
  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = 1; i <= int'(N); i++) begin
      int unsigned idx;
      idx = (int'(last) + i) % N;
      if (!found && req_valid[idx]) begin
        found = 1'b1;
        sel   = IW'(idx);
      end
    end
  end

  // Response routing FIFO.
  logic          tag_in_ready, tag_valid;
  logic [IW-1:0] tag;
  logic [CW-1:0] tag_count;
  logic          fire_rd, fire;

  assign m_req       = req[sel];
  assign m_req_valid = found && (req[sel].we || tag_in_ready);
  assign fire        = m_req_valid && m_req_ready;
  assign fire_rd     = fire && !req[sel].we;

  always_comb begin
    req_ready = '0;
    if (found) req_ready[sel] = m_req_ready && (req[sel].we || tag_in_ready);
  end

  sync_fifo #(.WIDTH(IW), .DEPTH(MAX_OUT)) u_tags (
    .clk, .rst_n,
    .in_valid (fire_rd),
    .in_ready (tag_in_ready),
    .in_data  (sel),
    .out_valid(tag_valid),
    .out_ready(m_rsp_valid),
    .out_data (tag),
    .count    (tag_count)
  );

  always_comb begin
    rsp_valid = '0;
    if (m_rsp_valid) rsp_valid[tag] = 1'b1;
  end
  assign rsp_data = m_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (fire) last <= sel;
  end

  // Memory rule: a read response needs a read waiting for it.
  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n)
    m_rsp_valid |-> tag_valid);

endmodule

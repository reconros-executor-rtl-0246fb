// osif: operating-system interface of one reconfigurable slot.
//
// The OSIF is the channel over which a hardware thread talks to the host
// operating system: the host hands it work (the init data, i.e. the message
// pointer) and the thread asks the host for services (publish a message, exit).
// Here it is a pair of FIFOs, host->thread and thread->host, behind a small
// word-wide register port for the processor: a write to address 0 pushes into the
// host->thread FIFO, a read of address 0 pops the thread->host FIFO, and address
// 1 reads a status word {fill levels, not-full, not-empty}. Reading an empty
// FIFO returns 0 and pops nothing.
//
// Interface: host register port (reg_wr/reg_rd strobes, reg_addr, reg_wdata,
// reg_rdata valid the clock after reg_rd); thread side as two valid/ready
// streams. Timing: one clock from a host write to the thread seeing it.
//
// From the paper: one OSIF per slot connecting it to the host OS (Fig. 3).
// Own choices: everything about its insides; FIFO pairs follow the usual
// ReconOS-style OSIF, the register map is this design's.
module osif #(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic        reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  // thread side
  output logic        hw_in_valid,
  input  logic        hw_in_ready,
  output logic [31:0] hw_in_data,
  input  logic        hw_out_valid,
  output logic        hw_out_ready,
  input  logic [31:0] hw_out_data
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic          s2h_in_ready, h2s_valid;
  logic [31:0]   h2s_data;
  logic [CW-1:0] s2h_count, h2s_count;
  logic          pop;

  assign pop = reg_rd && (reg_addr == 1'b0) && h2s_valid;

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_sw2hw (
    .clk, .rst_n,
    .in_valid (reg_wr && reg_addr == 1'b0),
    .in_ready (s2h_in_ready),
    .in_data  (reg_wdata),
    .out_valid(hw_in_valid),
    .out_ready(hw_in_ready),
    .out_data (hw_in_data),
    .count    (s2h_count)
  );

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_hw2sw (
    .clk, .rst_n,
    .in_valid (hw_out_valid),
    .in_ready (hw_out_ready),
    .in_data  (hw_out_data),
    .out_valid(h2s_valid),
    .out_ready(pop),
    .out_data (h2s_data),
    .count    (h2s_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) reg_rdata <= '0;
    else if (reg_rd) begin
      if (reg_addr == 1'b0) reg_rdata <= h2s_valid ? h2s_data : '0;
      else reg_rdata <= {8'd0, 8'(s2h_count), 8'(h2s_count), 6'd0, s2h_in_ready, h2s_valid};
    end
  end

endmodule

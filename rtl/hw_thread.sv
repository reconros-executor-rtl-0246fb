// hw_thread: control and memory sequencer of one hardware-mapped ROS 2 callback.
//
// A hardware callback runs like the HLS threads of the paper: it receives its
// init data (a pointer to the ROS message in main memory) from the host through
// its OSIF, reads the message's first word to find the payload, streams the
// payload through its compute kernel, writes the kernel's output back to main
// memory, tells the host to publish the result, and exits.
//
// How it works: a small state machine. In RUN it keeps two traffic streams on the
// single MEMIF request port: reads of IN_WORDS payload words (issued only while the
// read-data FIFO has room for every outstanding response, so the memory never has
// to wait for the thread) and writes of the OUT_WORDS words the kernel produces.
// Writes take priority over reads, so a kernel that holds results back never
// deadlocks the thread. Output goes to the payload address (in place, as the image
// and sort callbacks do) or, with OUT_TO_MSG set, to the words following the
// message pointer (where the hash callback's 8-word result array is placed).
//
// Interface: OSIF as two 32-bit valid/ready streams (host->thread init data,
// thread->host command words: PUBLISH then EXIT, command code in bits 31:24);
// MEMIF as request (valid/ready, reconros_pkg::mem_req_t) plus in-order read
// responses; the kernel as `core_start` pulse and in/out valid/ready streams.
// `in_reset` holds the thread idle (used while its slot is reconfigured).
//
// From the paper: GETINITDATA / MEM_READ pointer / MEM_READ payload / compute /
// MEM_WRITE / PUBLISH / EXIT sequence (Listings 2 and 3). Own choices: the
// streaming overlap of reads, compute and writes, the command word encoding and
// the FIFO depth.
module hw_thread
  import reconros_pkg::*;
#(
  parameter int unsigned IN_WORDS   = 640 * 480,
  parameter int unsigned OUT_WORDS  = 640 * 480,
  parameter bit          OUT_TO_MSG = 1'b0,
  parameter int unsigned RD_DEPTH   = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_reset,
  // OSIF
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
  // kernel
  output logic        core_start,
  output logic        core_in_valid,
  input  logic        core_in_ready,
  output logic [31:0] core_in_data,
  input  logic        core_out_valid,
  output logic        core_out_ready,
  input  logic [31:0] core_out_data,
  output logic        active
);
  localparam int unsigned NW = $clog2(IN_WORDS + OUT_WORDS + 1);
  localparam int unsigned FC = $clog2(RD_DEPTH + 1);

  typedef enum logic [2:0] {S_IDLE, S_PTR_RD, S_PTR_WAIT, S_RUN, S_PUBLISH, S_EXIT} state_t;
  state_t state;

  logic [31:0]   msg_ptr, pay_ptr;
  logic [NW-1:0] rd_issued, wr_done;
  logic [FC-1:0] outstanding, fifo_count;

  // Read data FIFO in front of the kernel.
  logic fifo_in_ready;
  sync_fifo #(.WIDTH(32), .DEPTH(RD_DEPTH)) u_rdfifo (
    .clk, .rst_n,
    .in_valid (mem_rsp_valid && state == S_RUN),
    .in_ready (fifo_in_ready),
    .in_data  (mem_rsp_data),
    .out_valid(core_in_valid),
    .out_ready(core_in_ready),
    .out_data (core_in_data),
    .count    (fifo_count)
  );

  logic want_wr, want_rd, rd_fire, wr_fire;
  assign want_wr = (state == S_RUN) && core_out_valid && (wr_done < NW'(OUT_WORDS));
  assign want_rd = (state == S_RUN) && (rd_issued < NW'(IN_WORDS)) &&
                   ((FC+1)'(outstanding) + (FC+1)'(fifo_count) < (FC+1)'(RD_DEPTH));

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    if (state == S_PTR_RD) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = msg_ptr;
    end else if (want_wr) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = (OUT_TO_MSG ? msg_ptr + 32'd4 : pay_ptr) + 32'({wr_done, 2'b00});
      mem_req.wdata = core_out_data;
    end else if (want_rd) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = pay_ptr + 32'({rd_issued, 2'b00});
    end
  end

  assign wr_fire        = want_wr && mem_req_ready;
  assign rd_fire        = !want_wr && want_rd && mem_req_ready;
  assign core_out_ready = wr_fire;

  assign osif_in_ready  = (state == S_IDLE) && !in_reset;
  assign osif_out_valid = (state == S_PUBLISH) || (state == S_EXIT);
  assign osif_out_data  = (state == S_PUBLISH) ? {OSIF_CMD_PUBLISH, 24'd0} : {OSIF_CMD_EXIT, 24'd0};
  assign active         = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      msg_ptr     <= '0;
      pay_ptr     <= '0;
      rd_issued   <= '0;
      wr_done     <= '0;
      outstanding <= '0;
      core_start  <= 1'b0;
    end else if (in_reset) begin
      state       <= S_IDLE;
      rd_issued   <= '0;
      wr_done     <= '0;
      outstanding <= '0;
      core_start  <= 1'b0;
    end else begin
      core_start <= 1'b0;
      unique case (state)
        S_IDLE: if (osif_in_valid) begin
          msg_ptr <= osif_in_data;
          state   <= S_PTR_RD;
        end
        S_PTR_RD: if (mem_req_ready) state <= S_PTR_WAIT;
        S_PTR_WAIT: if (mem_rsp_valid) begin
          pay_ptr     <= mem_rsp_data;
          rd_issued   <= '0;
          wr_done     <= '0;
          outstanding <= '0;
          core_start  <= 1'b1;
          state       <= S_RUN;
        end
        S_RUN: begin
          if (rd_fire) rd_issued <= rd_issued + 1'b1;
          if (wr_fire) wr_done   <= wr_done + 1'b1;
          outstanding <= outstanding + FC'(rd_fire) - FC'(mem_rsp_valid);
          if (wr_fire && wr_done == NW'(OUT_WORDS - 1)) state <= S_PUBLISH;
        end
        S_PUBLISH: if (osif_out_ready) state <= S_EXIT;
        S_EXIT:    if (osif_out_ready) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  // MEMIF rule: responses only arrive for reads that were issued.
  a_no_spurious_rsp: assert property (@(posedge clk) disable iff (!rst_n || in_reset)
    (state == S_RUN && mem_rsp_valid) |-> (outstanding != '0));
  // The read FIFO is sized so that a response always finds room.
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n || in_reset)
    (state == S_RUN && mem_rsp_valid) |-> fifo_in_ready);

endmodule

// zycap_dma: DMA engine that streams a partial bitstream from memory into the ICAP.
//
// Partial reconfiguration of a slot is done by copying the slot's partial
// bitstream from external memory into the internal configuration access port
// (ICAP) without the processor moving the data. The host programs the source
// address and the length in bytes and starts the transfer; the engine reads the
// bitstream word by word over its own memory port (the high-performance port to
// the memory controller) and writes each word to the ICAP, one word per clock
// when memory keeps up. It raises `irq` (and the status done bit) at the end.
//
// How it works: reads are issued while a small FIFO has room for every
// outstanding response; the FIFO drains into the ICAP write port (CSIB low,
// RDWRB low for a write). Words go to the ICAP unchanged: any bit reordering the
// configuration port needs is assumed to be in the stored bitstream.
//
// Register port (word addresses): 0 control (write bit 0 = 1 to start; write
// bit 1 = 1 to clear done), 1 source byte address, 2 length in bytes (multiple
// of 4), 3 status (read: bit 0 busy, bit 1 done). reg_rdata is valid the clock
// after reg_rd. Peak rate: 4 bytes per clock.
//
// From the paper: ZyCAP's DMA block feeding the ICAP, set up by the host
// through an AXI-Lite port and reading the bitstream over an HP port (Sec. III-A,
// Fig. 3). Own choices: the register map (a plain strobe port stands in for
// AXI-Lite), FIFO depth, word-per-clock ICAP writes.
module zycap_dma
  import reconros_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register port
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [1:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // memory (HP) port
  output logic        m_req_valid,
  input  logic        m_req_ready,
  output mem_req_t    m_req,
  input  logic        m_rsp_valid,
  input  logic [31:0] m_rsp_data,
  // ICAP write port
  output logic        icap_csib,
  output logic        icap_rdwrb,
  output logic [31:0] icap_data
);
  localparam int unsigned FC = $clog2(FIFO_DEPTH + 1);

  logic [31:0]   src, len;
  logic [29:0]   words, issued, written;
  logic          busy, done;
  logic [FC-1:0] outstanding, fifo_count;
  logic          fifo_valid, fifo_in_ready;
  logic [31:0]   fifo_data;

  assign m_req_valid = busy && (issued < words) &&
                       ((FC+1)'(outstanding) + (FC+1)'(fifo_count) < (FC+1)'(FIFO_DEPTH));
  assign m_req.we    = 1'b0;
  assign m_req.addr  = src + {issued, 2'b00};
  assign m_req.wdata = '0;

  logic rd_fire;
  assign rd_fire = m_req_valid && m_req_ready;

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (m_rsp_valid),
    .in_ready (fifo_in_ready),
    .in_data  (m_rsp_data),
    .out_valid(fifo_valid),
    .out_ready(1'b1),
    .out_data (fifo_data),
    .count    (fifo_count)
  );

  // ICAP side: registered, one word per clock.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      icap_csib  <= 1'b1;
      icap_rdwrb <= 1'b1;
      icap_data  <= '0;
    end else begin
      icap_csib  <= !fifo_valid;
      icap_rdwrb <= !fifo_valid;
      icap_data  <= fifo_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src         <= '0;
      len         <= '0;
      words       <= '0;
      issued      <= '0;
      written     <= '0;
      busy        <= 1'b0;
      done        <= 1'b0;
      outstanding <= '0;
      reg_rdata   <= '0;
    end else begin
      if (reg_wr) begin
        unique case (reg_addr)
          2'd0: begin
            if (reg_wdata[0] && !busy && len[31:2] != '0) begin
              busy    <= 1'b1;
              done    <= 1'b0;
              words   <= len[31:2];
              issued  <= '0;
              written <= '0;
            end
            if (reg_wdata[1]) done <= 1'b0;
          end
          2'd1: src <= reg_wdata;
          2'd2: len <= reg_wdata;
          default: ;
        endcase
      end
      if (reg_rd) begin
        unique case (reg_addr)
          2'd1:    reg_rdata <= src;
          2'd2:    reg_rdata <= len;
          2'd3:    reg_rdata <= {30'd0, done, busy};
          default: reg_rdata <= '0;
        endcase
      end
      if (busy) begin
        if (rd_fire) issued <= issued + 1'b1;
        outstanding <= outstanding + FC'(rd_fire) - FC'(m_rsp_valid);
        if (fifo_valid) begin
          written <= written + 1'b1;
          if (written == words - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assign irq = done;

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n)
    m_rsp_valid |-> fifo_in_ready);

endmodule

// tb_osif: self-checking test of the OSIF register/FIFO channel.
//
// Host writes are checked to arrive in order on the thread side (which accepts
// them with random back-pressure); thread words are checked to be read back in
// order by the host; the status word is checked for its fill levels and flags,
// including a full host->thread FIFO refusing a fifth word and a read of an
// empty FIFO returning 0.
module tb_osif;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic reg_wr, reg_rd, reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic hw_in_valid, hw_in_ready, hw_out_valid, hw_out_ready;
  logic [31:0] hw_in_data, hw_out_data;

  osif #(.DEPTH(4)) dut (.*);

  task automatic host_write(logic [31:0] w);
    @(negedge clk); reg_wr = 1; reg_addr = 0; reg_wdata = w;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic host_read(logic a, output logic [31:0] w);
    @(negedge clk); reg_rd = 1; reg_addr = a;
    @(negedge clk); reg_rd = 0; w = reg_rdata;
  endtask
  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] w;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0;
    hw_in_ready = 0; hw_out_valid = 0; hw_out_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    host_read(1, w); check(w, 32'h0000_0002, "empty status");
    host_read(0, w); check(w, 0, "empty read");
    for (int i = 0; i < 5; i++) host_write(32'hC0DE_0000 + i);
    host_read(1, w); check(w, 32'h0004_0000, "full status");
    // thread drains with back-pressure; the fifth word was dropped
    for (int i = 0; i < 4; ) begin
      @(negedge clk); hw_in_ready = ($urandom % 2);
      @(posedge clk);
      if (hw_in_valid && hw_in_ready) begin check(hw_in_data, 32'hC0DE_0000 + i, "to thread"); i++; end
    end
    @(negedge clk); hw_in_ready = 0;
    @(posedge clk); check(32'(hw_in_valid), 0, "drained");
    // thread sends three words
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); hw_out_valid = 1; hw_out_data = 32'hAB00_0000 | i;
      @(posedge clk); check(32'(hw_out_ready), 1, "room");
    end
    @(negedge clk); hw_out_valid = 0;
    host_read(1, w); check(w, 32'h0000_0303, "three pending");
    for (int i = 0; i < 3; i++) begin host_read(0, w); check(w, 32'hAB00_0000 | i, "to host"); end
    host_read(1, w); check(w, 32'h0000_0002, "empty again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

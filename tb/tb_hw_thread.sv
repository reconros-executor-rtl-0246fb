// tb_hw_thread: self-checking test of the hardware-thread sequencer.
//
// The thread is connected to a memory model and to a stand-in kernel defined
// here that outputs each input word plus one, delayed through a 3-deep FIFO
// (so outputs lag inputs like a real kernel's would). The host side sends a
// message pointer; the test checks the pointer indirection, that every payload
// word is rewritten in place as word+1, that the command words PUBLISH then EXIT
// come back, and that memory stalls do not lose data. A second run uses
// OUT_TO_MSG with 2 output words (sum and count of the payload, given only
// after the whole payload was read) to check writes next to the message.
module tb_hw_thread;
  import reconros_pkg::*;
  localparam int NIN = 40;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // two threads: A in-place, B results after the message
  logic        oi_v [2], oi_r [2], oo_v [2], oo_r [2];
  logic [31:0] oi_d [2], oo_d [2];
  logic        rq_v [2], rq_r [2], rs_v [2];
  mem_req_t    rq   [2];
  logic [31:0] rs_d [2];
  logic        cs [2], ci_v [2], ci_r [2], co_v [2], co_r [2], act [2];
  logic [31:0] ci_d [2], co_d [2];

  hw_thread #(.IN_WORDS(NIN), .OUT_WORDS(NIN), .OUT_TO_MSG(1'b0)) dut_a (
    .clk, .rst_n, .in_reset(1'b0),
    .osif_in_valid(oi_v[0]), .osif_in_ready(oi_r[0]), .osif_in_data(oi_d[0]),
    .osif_out_valid(oo_v[0]), .osif_out_ready(oo_r[0]), .osif_out_data(oo_d[0]),
    .mem_req_valid(rq_v[0]), .mem_req_ready(rq_r[0]), .mem_req(rq[0]),
    .mem_rsp_valid(rs_v[0]), .mem_rsp_data(rs_d[0]),
    .core_start(cs[0]), .core_in_valid(ci_v[0]), .core_in_ready(ci_r[0]), .core_in_data(ci_d[0]),
    .core_out_valid(co_v[0]), .core_out_ready(co_r[0]), .core_out_data(co_d[0]), .active(act[0]));

  hw_thread #(.IN_WORDS(NIN), .OUT_WORDS(2), .OUT_TO_MSG(1'b1)) dut_b (
    .clk, .rst_n, .in_reset(1'b0),
    .osif_in_valid(oi_v[1]), .osif_in_ready(oi_r[1]), .osif_in_data(oi_d[1]),
    .osif_out_valid(oo_v[1]), .osif_out_ready(oo_r[1]), .osif_out_data(oo_d[1]),
    .mem_req_valid(rq_v[1]), .mem_req_ready(rq_r[1]), .mem_req(rq[1]),
    .mem_rsp_valid(rs_v[1]), .mem_rsp_data(rs_d[1]),
    .core_start(cs[1]), .core_in_valid(ci_v[1]), .core_in_ready(ci_r[1]), .core_in_data(ci_d[1]),
    .core_out_valid(co_v[1]), .core_out_ready(co_r[1]), .core_out_data(co_d[1]), .active(act[1]));

  for (genvar k = 0; k < 2; k++) begin : g_env
    tb_mem_model #(.LATENCY(3 + k), .STALL_PCT(30)) u_mem (
      .clk, .req_valid(rq_v[k]), .req_ready(rq_r[k]), .req(rq[k]),
      .rsp_valid(rs_v[k]), .rsp_data(rs_d[k]));

    // stand-in kernel, registered so that it cannot race the thread:
    // A returns in + 1 through a 3-deep FIFO; B returns sum and count of its input
    if (k == 0) begin : g_inc
      sync_fifo #(.WIDTH(32), .DEPTH(3)) u_q (
        .clk, .rst_n,
        .in_valid(ci_v[k]), .in_ready(ci_r[k]), .in_data(ci_d[k] + 32'd1),
        .out_valid(co_v[k]), .out_ready(co_r[k]), .out_data(co_d[k]), .count());
    end else begin : g_sum
      logic [31:0] sum;
      int          cnt, oidx;
      always @(posedge clk or negedge rst_n) begin
        if (!rst_n || cs[k]) begin sum <= 0; cnt <= 0; oidx <= 0; end
        else begin
          if (ci_v[k] && ci_r[k]) begin sum <= sum + ci_d[k]; cnt <= cnt + 1; end
          if (co_v[k] && co_r[k]) oidx <= oidx + 1;
        end
      end
      assign ci_r[k] = (cnt < NIN);
      assign co_v[k] = (cnt == NIN) && (oidx < 2);
      assign co_d[k] = (oidx == 0) ? sum : 32'(cnt);
    end
  end

  task automatic host_send(int k, logic [31:0] w);
    @(negedge clk); oi_v[k] = 1; oi_d[k] = w;
    do @(posedge clk); while (!oi_r[k]);
    @(negedge clk); oi_v[k] = 0;
  endtask

  task automatic host_expect(int k, logic [7:0] cmd);
    @(negedge clk); oo_r[k] = 1;
    do @(posedge clk); while (!oo_v[k]);
    checks++;
    if (oo_d[k][31:24] !== cmd) begin
      failures++; $display("thread %0d: command %h expected %h", k, oo_d[k][31:24], cmd);
    end
    @(negedge clk); oo_r[k] = 0;
  endtask

  initial begin
    logic [31:0] sum;
    for (int k = 0; k < 2; k++) begin oi_v[k] = 0; oi_d[k] = 0; oo_r[k] = 0; end
    #1;   // after the memory models have cleared themselves
    // memory images: message at 0x100 points to payload at 0x1000 / 0x2000
    g_env[0].u_mem.mem[30'h100 >> 2] = 32'h1000;
    g_env[1].u_mem.mem[30'h100 >> 2] = 32'h2000;
    sum = 0;
    for (int i = 0; i < NIN; i++) begin
      g_env[0].u_mem.mem[30'(32'h1000/4 + i)] = 32'h1000 * i + 5;
      g_env[1].u_mem.mem[30'(32'h2000/4 + i)] = 32'(i * i);
      sum += 32'(i * i);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin host_send(0, 32'h100); host_expect(0, OSIF_CMD_PUBLISH); host_expect(0, OSIF_CMD_EXIT); end
      begin host_send(1, 32'h100); host_expect(1, OSIF_CMD_PUBLISH); host_expect(1, OSIF_CMD_EXIT); end
    join
    for (int i = 0; i < NIN; i++) begin
      checks++;
      if (g_env[0].u_mem.mem[30'(32'h1000/4 + i)] !== 32'h1000 * i + 6) begin
        failures++; $display("A word %0d = %h", i, g_env[0].u_mem.mem[30'(32'h1000/4 + i)]);
      end
    end
    checks += 3;
    if (g_env[1].u_mem.mem[30'h104 >> 2] !== sum) begin failures++; $display("B sum wrong"); end
    if (g_env[1].u_mem.mem[30'h108 >> 2] !== NIN) begin failures++; $display("B count wrong"); end
    if (g_env[1].u_mem.mem[30'h2000 >> 2] !== 0) begin failures++; $display("B payload overwritten"); end
    checks++;
    if (act[0] || act[1]) begin failures++; $display("thread still active"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

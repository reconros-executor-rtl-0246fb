// tb_oet_sorter: self-checking test of the odd-even transposition sorter.
//
// Runs three batches through the core (N overridden to 64): random numbers,
// a descending sequence (the worst case for the network, which needs all N
// stages) and random numbers with many duplicates. Each output is compared
// with a reference sorted here by a plain insertion sort. Checks that the sort
// phase lasts exactly N clocks and that `done` pulses once per batch.
module tb_oet_sorter;
  localparam int N = 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, sorting, done;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0;

  oet_sorter #(.N(N)) dut (.*);

  logic [31:0] vals [N];
  logic [31:0] ref_s [N];
  int sort_cycles, done_cnt;

  always @(posedge clk) if (rst_n) begin
    if (sorting) sort_cycles++;
    if (done) done_cnt++;
  end

  task automatic do_batch(int kind);
    for (int i = 0; i < N; i++) begin
      unique case (kind)
        0: vals[i] = $urandom;
        1: vals[i] = 32'hFFFF_0000 - 32'(i) * 7;
        default: vals[i] = $urandom % 5;
      endcase
      ref_s[i] = vals[i];
    end
    for (int i = 1; i < N; i++) begin
      logic [31:0] x = ref_s[i];
      int j = i - 1;
      while (j >= 0 && ref_s[j] > x) begin ref_s[j+1] = ref_s[j]; j--; end
      ref_s[j+1] = x;
    end
    sort_cycles = 0;
    for (int i = 0; i < N; ) begin
      @(negedge clk);
      in_valid = ($urandom % 3 != 0);
      in_data  = vals[i];
      @(posedge clk);
      if (in_valid && in_ready) i++;
    end
    @(negedge clk) in_valid = 0;
    for (int i = 0; i < N; ) begin
      @(negedge clk);
      out_ready = ($urandom % 2 == 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== ref_s[i]) begin
          failures++;
          $display("batch %0d word %0d: got %h expected %h", kind, i, out_data, ref_s[i]);
        end
        i++;
      end
    end
    @(negedge clk) out_ready = 0;
    checks++;
    if (sort_cycles != N) begin failures++; $display("sort took %0d cycles", sort_cycles); end
  endtask

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0; done_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_batch(0);
    do_batch(1);
    do_batch(2);
    repeat (2) @(posedge clk);
    checks++;
    if (done_cnt != 3) begin failures++; $display("done pulses %0d", done_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sobel_filter: self-checking test of the streaming Sobel filter.
//
// Feeds a small pseudo-random RGB image (W x H overridden to 12 x 7 to keep it
// short) through the core with random stalls on both streams, and compares every
// output word with a reference computed here directly from the 2-D image array:
// per channel |Gx| + |Gy| saturated to 255, zero on the border. Also checks that
// exactly W*H words come out, that `done` pulses, and that with no stalls a
// frame takes (W+1)*(H+1) step clocks.
module tb_sobel_filter;
  localparam int W = 12, H = 7;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;

  logic start, in_valid, in_ready, out_valid, out_ready, busy, done;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0;

  sobel_filter #(.W(W), .H(H)) dut (.*);

  logic [23:0] img [H][W];
  logic [31:0] ref_out [H*W];

  function automatic int px(int r, int c, int sh);
    return int'(img[r][c][sh +: 8]);
  endfunction

  task automatic make_ref();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        logic [31:0] o = '0;
        if (r > 0 && r < H-1 && c > 0 && c < W-1) begin
          for (int ch = 0; ch < 3; ch++) begin
            int sh = 8 * ch;
            int gx = px(r-1,c+1,sh) + 2*px(r,c+1,sh) + px(r+1,c+1,sh)
                   - px(r-1,c-1,sh) - 2*px(r,c-1,sh) - px(r+1,c-1,sh);
            int gy = px(r+1,c-1,sh) + 2*px(r+1,c,sh) + px(r+1,c+1,sh)
                   - px(r-1,c-1,sh) - 2*px(r-1,c,sh) - px(r-1,c+1,sh);
            int m = (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
            o[sh +: 8] = (m > 255) ? 8'hFF : 8'(m);
          end
        end
        ref_out[r*W + c] = o;
      end
  endtask

  int n_out;
  bit stall;
  int done_seen;

  always @(posedge clk) if (rst_n) begin
    if (done) done_seen++;
    if (out_valid && out_ready) begin
      checks++;
      if (n_out >= H*W) begin failures++; $display("extra output"); end
      else if (out_data !== ref_out[n_out]) begin
        failures++;
        $display("pixel %0d: got %h expected %h", n_out, out_data, ref_out[n_out]);
      end
      n_out++;
    end
  end

  task automatic run_frame(bit with_stalls, output int cycles);
    int i = 0;
    n_out = 0;
    stall = with_stalls;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 0;
    while (n_out < H*W) begin
      in_valid  = (i < H*W) && (!stall || ($urandom % 4 != 0));
      in_data   = {8'hA5, img[i / W][i % W]};
      out_ready = !stall || ($urandom % 3 != 0);
      @(posedge clk);
      if (in_valid && in_ready) i++;
      cycles++;
      #1;
    end
    in_valid = 0;
  endtask

  initial begin
    int cyc;
    start = 0; in_valid = 0; in_data = 0; out_ready = 0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        img[r][c] = 24'($urandom);
    img[3][4] = 24'hFFFFFF; img[3][5] = 24'h000000; // strong edge -> saturation
    make_ref();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(1'b1, cyc);
    checks++; if (n_out != H*W) failures++;
    // second frame without stalls: timing check
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        img[r][c] = 24'($urandom);
    make_ref();
    done_seen = 0;
    run_frame(1'b0, cyc);
    repeat (3) @(posedge clk);
    checks++;
    if (cyc != (W+1)*(H+1) + 1) begin
      failures++; $display("frame took %0d cycles, expected %0d", cyc, (W+1)*(H+1) + 1);
    end
    checks++; if (done_seen != 1) begin failures++; $display("done pulses %0d", done_seen); end
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

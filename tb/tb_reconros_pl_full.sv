// tb_reconros_pl_full: one complete dispatch round on the platform at its
// default sizes: four slots are loaded with partial bitstreams of the sizes
// measured for the four slots of the evaluated device (2838976, 2838976,
// 5285728 and 4883328 bytes), then run a 640x480 Sobel, two 2048-number sorts
// and the SHA-256 of a 1920x1080x3-byte image in parallel. All results are
// compared with the reference models; all thread accesses go through the MMU.
// See tb_pl_body.svh for the scenario.
module tb_reconros_pl_full;
  import reconros_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = SOBEL_W, H = SOBEL_H, SN = SORT_N, HB = HASH_BYTES;
  localparam int MEMW = 1 << 21, HPW = 1 << 22;
  localparam int BS_WORDS [4] = '{2838976 / 4, 2838976 / 4, 5285728 / 4, 4883328 / 4};
  localparam int ROUNDS = 1;

  `include "tb_pl_body.svh"

  reconros_pl dut (.*);

  task automatic check_mechanisms();
    checks++;
    if (n_reconfig != 4) begin failures++; $display("expected 4 reconfigurations"); end
    checks++;
    if (n_walk == 0 || n_fault != 1) begin failures++; $display("expected table walks and one page fault"); end
  endtask

  initial begin
    #400000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

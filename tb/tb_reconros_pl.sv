// tb_reconros_pl: end-to-end test of the programmable-logic platform at reduced
// callback sizes (16x8 image, 16 numbers, 256-byte hash input, short
// bitstreams), three rounds of dispatch. Every mechanism must occur at least once:
// partial reconfiguration, reuse of a loaded bitstream, MEMIF arbitration
// between slots requesting together, reconfiguration of one slot while another
// runs, each of the three callbacks, MMU table walks and a page fault served by
// the host. See tb_pl_body.svh for the scenario.
module tb_reconros_pl;
  import reconros_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 16, H = 8, SN = 16, HB = 256;
  localparam int MEMW = 65536, HPW = 65536;
  localparam int BS_WORDS [4] = '{300, 300, 560, 520};
  localparam int ROUNDS = 3;

  `include "tb_pl_body.svh"

  reconros_pl #(.N_RS(4), .IMG_W(W), .IMG_H(H), .SORT_LEN(SN), .HASH_LEN(HB)) dut (.*);

  task automatic check_mechanisms();
    int m [9] = '{n_reconfig, n_reuse, n_contention, n_load_beside_run,
                  n_cb[int'(CB_SOBEL)], n_cb[int'(CB_SORT)], n_cb[int'(CB_HASH)],
                  n_walk, n_fault};
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
    end
  endtask

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

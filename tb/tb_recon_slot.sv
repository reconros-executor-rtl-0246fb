// tb_recon_slot: self-checking test of a reconfigurable slot.
//
// The slot (image 8x6, sort length 16, hash of 56 bytes) is attached to a memory
// model. The test "loads" the Sobel callback (cfg_id), runs an image message
// through it, then reconfigures to the sorter and to the hash callback in turn,
// each time checking the results in memory against the reference models, and
// the PUBLISH/EXIT words on the OSIF. During reconfiguration (cfg_loading) and
// with no callback loaded, the slot must refuse OSIF words and make no memory
// requests. The hash input is the FIPS 180-2 56-byte example, so its digest is
// also compared with the published value.
module tb_recon_slot;
  import reconros_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 8, H = 6, SN = 16, HB = 56;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge resets every flop before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cb_id_t cfg_id;
  logic cfg_loading;
  logic osif_in_valid, osif_in_ready, osif_out_valid, osif_out_ready, active;
  logic [31:0] osif_in_data, osif_out_data;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic [31:0] mem_rsp_data;

  recon_slot #(.IMG_W(W), .IMG_H(H), .SORT_LEN(SN), .HASH_LEN(HB)) dut (.*);
  tb_mem_model #(.LATENCY(4), .STALL_PCT(20)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  task automatic expect_eq(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  task automatic run_msg(logic [31:0] msg);
    @(negedge clk); osif_in_valid = 1; osif_in_data = msg;
    do @(posedge clk); while (!osif_in_ready);
    @(negedge clk); osif_in_valid = 0; osif_out_ready = 1;
    do @(posedge clk); while (!osif_out_valid);
    expect_eq(32'(osif_out_data[31:24]), 32'(OSIF_CMD_PUBLISH), "publish");
    @(posedge clk);
    while (!osif_out_valid) @(posedge clk);
    expect_eq(32'(osif_out_data[31:24]), 32'(OSIF_CMD_EXIT), "exit");
    @(negedge clk); osif_out_ready = 0;
  endtask

  task automatic reconfigure(cb_id_t id);
    @(negedge clk); cfg_loading = 1; osif_in_valid = 1; osif_in_data = 32'hDEAD;
    repeat (6) begin
      @(posedge clk);
      checks++;
      if (osif_in_ready || mem_req_valid) begin failures++; $display("slot not decoupled"); end
    end
    @(negedge clk); cfg_id = id; cfg_loading = 0; osif_in_valid = 0;
  endtask

  initial begin
    word_q_t img, ref_img, nums, ref_nums, hmsg;
    logic [255:0] dg;
    string s;
    cfg_id = CB_NONE; cfg_loading = 0; osif_in_valid = 0; osif_in_data = 0; osif_out_ready = 0;
    #1;   // after the memory model has cleared itself
    img = new[W*H];
    for (int i = 0; i < W*H; i++) begin img[i] = gen_word(1, i); u_mem.mem[30'(32'h1000/4 + i)] = img[i]; end
    ref_img = sobel_ref(img, W, H);
    nums = new[SN];
    for (int i = 0; i < SN; i++) begin nums[i] = gen_word(2, i); u_mem.mem[30'(32'h2000/4 + i)] = nums[i]; end
    ref_nums = sort_ref(nums);
    s = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
    hmsg = new[HB/4];
    for (int i = 0; i < HB/4; i++) begin
      hmsg[i] = {s[4*i+3], s[4*i+2], s[4*i+1], s[4*i]};
      u_mem.mem[30'(32'h3000/4 + i)] = hmsg[i];
    end
    u_mem.mem[30'h100/4] = 32'h1000;
    u_mem.mem[30'h200/4] = 32'h2000;
    u_mem.mem[30'h300/4] = 32'h3000;
    repeat (3) @(posedge clk); rst_n = 1;

    // nothing loaded: no callback answers
    reconfigure(CB_NONE);
    repeat (3) @(posedge clk);
    checks++; if (osif_in_ready) begin failures++; $display("empty slot accepts work"); end

    reconfigure(CB_SOBEL);
    run_msg(32'h100);
    for (int i = 0; i < W*H; i++) expect_eq(u_mem.mem[30'(32'h1000/4 + i)], ref_img[i], "sobel pixel");

    reconfigure(CB_SORT);
    run_msg(32'h200);
    for (int i = 0; i < SN; i++) expect_eq(u_mem.mem[30'(32'h2000/4 + i)], ref_nums[i], "sorted word");

    reconfigure(CB_HASH);
    run_msg(32'h300);
    dg = sha256_ref(hmsg, HB);
    expect_eq(dg[255:224], 32'h248d6a61, "reference model digest");
    for (int i = 0; i < 8; i++)
      expect_eq(u_mem.mem[30'(32'h304/4 + i)], dg[255 - 32*i -: 32], "digest word");
    checks++; if (active) begin failures++; $display("still active"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

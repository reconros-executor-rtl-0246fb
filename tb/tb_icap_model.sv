// tb_icap_model: behavioural stand-in for the device configuration logic behind
// the ICAP, for testbenches only.
//
// On the device, words written into the ICAP rewrite the configuration memory of
// a slot, which changes the logic in that slot. This model understands only the
// test bitstreams the testbenches build: word 0 the sync word AA995566, word 1
// {16'h5EC7, slot, callback id}, word 2 the total word count, then filler. After
// the header it raises `cfg_loading` for the slot; after the last word it sets
// the slot's `cfg_id` and drops `cfg_loading`. It counts completed loads and
// flags malformed streams in `errors`.
module tb_icap_model
  import reconros_pkg::*;
#(
  parameter int N_RS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        icap_csib,
  input  logic        icap_rdwrb,
  input  logic [31:0] icap_data,
  output cb_id_t      cfg_id      [N_RS],
  output logic [N_RS-1:0] cfg_loading
);
  int n_loads = 0, errors = 0;
  int pos = 0, total = 0, slot = 0;
  cb_id_t id;

  initial begin
    cfg_loading = '0;
    for (int i = 0; i < N_RS; i++) cfg_id[i] = CB_NONE;
  end

  always @(posedge clk) if (rst_n && !icap_csib && !icap_rdwrb) begin
    if (pos == 0) begin
      if (icap_data != 32'hAA99_5566) begin errors++; $display("ICAP: unexpected word %h", icap_data); end
      else pos = 1;
    end else begin
      if (pos == 1) begin
        if (icap_data[31:16] != 16'h5EC7 || int'(icap_data[15:8]) >= N_RS) errors++;
        slot = int'(icap_data[15:8]);
        id   = cb_id_t'(icap_data[2:0]);
        cfg_loading[slot] <= 1'b1;
      end else if (pos == 2) begin
        total = int'(icap_data);
      end
      pos++;
      if (pos >= 3 && pos == total) begin
        cfg_id[slot]      <= id;
        cfg_loading[slot] <= 1'b0;
        n_loads++;
        pos = 0;
      end
    end
  end
endmodule

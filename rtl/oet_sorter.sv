// oet_sorter: odd-even transposition sorter for the number-sorting service callback.
//
// Sorts N unsigned 32-bit numbers into ascending order with the odd-even
// transposition network: N stages; even stages compare-and-swap the pairs
// (0,1),(2,3),..., odd stages the pairs (1,2),(3,4),.... After N stages any input
// is sorted.
//
// How it works: the N numbers sit in a register array. Loading shifts one word per
// clock into the array; then one network stage is applied per clock with N/2
// comparators working in parallel (even or odd pairing alternating); unloading
// shifts the array out, smallest first, one word per clock.
//
// Interface: `in_*` and `out_*` are valid/ready streams of 32-bit words. The core
// accepts exactly N words, sorts, then offers exactly N words; `done` pulses with
// the last word out. Timing: N load cycles, exactly N sort cycles, N unload cycles.
//
// From the paper: 2048 numbers of 32 bits, odd-even transposition sort, n stages.
// The paper says each stage makes n comparisons; a stage of this network has n/2
// compare-and-swap elements (n/2 or n/2-1 pairs), which is what is built here.
// Own choices: ascending order, one stage per clock, shift-register load/unload.
module oet_sorter #(
  parameter int unsigned N = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        sorting,
  output logic        done
);
  localparam int unsigned CW = $clog2(N + 1);

  typedef enum logic [1:0] {S_LOAD, S_SORT, S_UNLOAD} state_t;
  state_t state;

  logic [31:0]   a [N];
  logic [CW-1:0] cnt;

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_data  = a[0];
  assign sorting   = (state == S_SORT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == CW'(N - 1)) begin
            cnt   <= '0;
            state <= S_SORT;
          end else cnt <= cnt + 1'b1;
        end
        S_SORT: begin
          if (cnt == CW'(N - 1)) begin
            cnt   <= '0;
            state <= S_UNLOAD;
          end else cnt <= cnt + 1'b1;
        end
        S_UNLOAD: if (out_ready) begin
          if (cnt == CW'(N - 1)) begin
            cnt   <= '0;
            state <= S_LOAD;
            done  <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Data array: shift in at the top during load, shift out at the bottom during
  // unload, one network stage per clock while sorting.
  always_ff @(posedge clk) begin
    if ((state == S_LOAD && in_valid) || (state == S_UNLOAD && out_ready)) begin
      for (int i = 0; i + 1 < int'(N); i++) a[i] <= a[i+1];
      a[N-1] <= in_data;
    end else if (state == S_SORT) begin
      // one network stage; the parity of the stage count selects the pairing
      for (int i = 0; i + 1 < int'(N); i++) begin
        if ((i % 2) == int'(cnt[0]) && a[i] > a[i+1]) begin
          a[i]   <= a[i+1];
          a[i+1] <= a[i];
        end
      end
    end
  end

endmodule

// sobel_filter: streaming Sobel edge filter for the image callback.
//
// The callback of the image filter node applies the two 3x3 Sobel kernels to each
// of the three colour channels of a W x H image and keeps, per channel, the sum of
// the absolute responses |Gx| + |Gy| (saturated to 8 bits) as a cheap stand-in for
// the geometric magnitude sqrt(Gx^2 + Gy^2).
//
// How it works: pixels arrive in raster order, one 32-bit word each (R in bits
// 23:16, G in 15:8, B in 7:0, upper byte ignored). Two line buffers of W+1 pixels
// and a 3x3 window of registers hold the neighbourhood. The core walks a virtual
// raster of (H+1) x (W+1) positions; the extra last column and row are zero pixels
// that it generates itself, so that the window centred on every image pixel is
// complete, and the outputs come out in the same raster order as the inputs, one
// per image pixel. Pixels on the image border produce 0.
//
// Interface: pulse `start` to begin a frame; `in_*` and `out_*` are valid/ready
// streams; `done` pulses with the last output word accepted. Throughput is one
// pixel per clock; the output for pixel (r,c) leaves once pixel (r+1,c+1) has
// entered, i.e. the latency is about one line.
//
// From the paper: image size 640x480, three channels, two kernels per channel,
// absolute-value magnitude. Own choices: pixel packing, |Gx|+|Gy| with
// saturation, zero border, streaming line-buffer structure (the paper's HLS code
// first copies the whole frame into on-chip RAM).
module sobel_filter #(
  parameter int unsigned W = 640,
  parameter int unsigned H = 480
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        busy,
  output logic        done
);
  localparam int unsigned VW = W + 1;
  localparam int unsigned CW = $clog2(VW + 1);
  localparam int unsigned RW = $clog2(H + 2);

  typedef logic [23:0] pix_t;

  pix_t lb0 [VW];  // row vr-1
  pix_t lb1 [VW];  // row vr-2
  pix_t win [3][3]; // win[row][col], row 0 oldest, col 2 newest

  logic [CW-1:0] vc;
  logic [RW-1:0] vr;

  // Position in the virtual raster and what the step needs.
  logic real_pix, emits, step;
  assign real_pix = (vr < RW'(H)) && (vc < CW'(W));
  assign emits    = (vr != '0) && (vc != '0);
  assign step     = busy && (!real_pix || in_valid) && (!emits || !out_valid || out_ready);
  assign in_ready = busy && real_pix && (!emits || !out_valid || out_ready);

  pix_t new_pix;
  assign new_pix = real_pix ? in_data[23:0] : '0;

  // Window after the current step.
  pix_t nw [3][3];
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      nw[r][0] = win[r][1];
      nw[r][1] = win[r][2];
    end
    nw[0][2] = lb1[vc];
    nw[1][2] = lb0[vc];
    nw[2][2] = new_pix;
  end

  // Centre of the new window is (vr-1, vc-1).
  logic border;
  assign border = (vr == RW'(1)) || (vr == RW'(H)) || (vc == CW'(1)) || (vc == CW'(W));

  function automatic logic [7:0] chan_mag(input pix_t w [3][3], input int sh);
    int signed p [3][3];
    int signed gx, gy, ax, ay, s;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        p[r][c] = int'(w[r][c][sh +: 8]);
    gx = (p[0][2] + 2 * p[1][2] + p[2][2]) - (p[0][0] + 2 * p[1][0] + p[2][0]);
    gy = (p[2][0] + 2 * p[2][1] + p[2][2]) - (p[0][0] + 2 * p[0][1] + p[0][2]);
    ax = (gx < 0) ? -gx : gx;
    ay = (gy < 0) ? -gy : gy;
    s  = ax + ay;
    return (s > 255) ? 8'hFF : s[7:0];
  endfunction

  logic [31:0] mag;
  always_comb begin
    mag = '0;
    if (!border) begin
      mag[23:16] = chan_mag(nw, 16);
      mag[15:8]  = chan_mag(nw, 8);
      mag[7:0]   = chan_mag(nw, 0);
    end
  end

  logic last_step;
  assign last_step = (vr == RW'(H)) && (vc == CW'(W));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      vc        <= '0;
      vr        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      done      <= 1'b0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          win[r][c] <= '0;
    end else begin
      done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        vc   <= '0;
        vr   <= '0;
      end else if (step) begin
        win <= nw;
        if (emits) begin
          out_valid <= 1'b1;
          out_data  <= mag;
        end
        if (vc == CW'(W)) begin
          vc <= '0;
          vr <= vr + 1'b1;
        end else begin
          vc <= vc + 1'b1;
        end
        if (last_step) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Line buffers: plain arrays so that they map to block RAM.
  always_ff @(posedge clk) begin
    if (step) begin
      lb1[vc] <= lb0[vc];
      lb0[vc] <= new_pix;
    end
  end

endmodule

// window3x3: two-line buffer and 3x3 sliding-window generator.
//
// A raster stream of pixels (CH_W bits each, all channels of one pixel) is
// consumed once; the two previous rows are kept in two line memories of
// MAX_COLS words (one memory per line, width = channels, depth = columns),
// and the previous two columns of the window in registers. The block scans
// (rows+1) x (cols+1) positions: the extra row and column feed the padding
// value instead of consuming input, so every output of a "SAME"-padded 3x3
// convolution is produced. At scan position (r,c) the window covers rows
// r-2..r and columns c-2..c, centred on output pixel (r-1,c-1). Positions
// outside the frame read the padding value `pad` (the activation zero point,
// so padded taps contribute nothing after the zero-point subtraction).
// Stride 1 emits every centre; stride 2 emits odd centres (rows/cols
// 1,3,5,...), which is TensorFlow's SAME padding for even frame sizes (no
// pad at top/left, one at bottom/right).
//
// Interface: `start` (one cycle, while idle) latches rows/cols/stride2/pad.
// in_valid/in_ready and out_valid/out_ready are valid-ready handshakes; a
// beat moves when both are high. out_win[k] is window tap k, numbered in
// raster order (k = 3*row + col, tap 0 top-left), matching the kernel-pixel
// numbering of the depthwise weight memories. `busy` stays high until the
// last window has been taken.
// Timing: one scan position per clock when neither side stalls; the window
// output is registered (one cycle latency). The line buffer is written as an
// array with an asynchronous read; the frame geometry and padding scheme are
// this design's choice (the source names the two-line buffer only).
module window3x3 #(
  parameter int CH_W     = 24,
  parameter int MAX_COLS = 224
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [8:0]           rows,
  input  logic [8:0]           cols,
  input  logic                 stride2,
  input  logic [CH_W-1:0]      pad,
  output logic                 busy,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [CH_W-1:0]      in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [8:0][CH_W-1:0] out_win
);
  logic [CH_W-1:0] lb0 [MAX_COLS];   // row r-2
  logic [CH_W-1:0] lb1 [MAX_COLS];   // row r-1
  logic [2:0][CH_W-1:0] p1, p2;      // columns c-1 and c-2 (index = window row)
  logic [9:0] r, c, nrows, ncols;
  logic       s2, active;
  logic [CH_W-1:0] padv;

  logic in_frame, emit, can_out, step, col_ok;
  logic [2:0][CH_W-1:0] col;
  logic [8:0][CH_W-1:0] win;

  always_comb begin
    in_frame = (r < nrows) && (c < ncols);
    col_ok   = (c < ncols);
    emit     = (r >= 10'd1) && (c >= 10'd1) && (!s2 || (!r[0] && !c[0]));
    can_out  = !out_valid || out_ready;
    step     = active && (!in_frame || in_valid) && (!emit || can_out);
    in_ready = active && in_frame && (!emit || can_out);
    col[0]   = (r >= 10'd2 && col_ok) ? lb0[c[8:0]] : padv;
    col[1]   = (r >= 10'd1 && col_ok) ? lb1[c[8:0]] : padv;
    col[2]   = in_frame ? in_data : padv;
    for (int i = 0; i < 3; i++) begin
      win[3*i+0] = (c >= 10'd2) ? p2[i] : padv;
      win[3*i+1] = (c >= 10'd1) ? p1[i] : padv;
      win[3*i+2] = col[i];
    end
    busy = active || out_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      out_valid <= 1'b0;
      r <= '0; c <= '0; nrows <= '0; ncols <= '0; s2 <= 1'b0; padv <= '0;
      p1 <= '0; p2 <= '0; out_win <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !active) begin
        active <= 1'b1;
        r <= '0; c <= '0;
        nrows <= {1'b0, rows}; ncols <= {1'b0, cols};
        s2 <= stride2; padv <= pad;
      end else if (step) begin
        p2 <= p1;
        p1 <= col;
        if (emit) begin
          out_win   <= win;
          out_valid <= 1'b1;
        end
        if (c == ncols) begin
          c <= '0;
          if (r == nrows) active <= 1'b0;
          else            r <= r + 10'd1;
        end else begin
          c <= c + 10'd1;
        end
      end
    end
  end

  // line memories: shift the column down one row
  always_ff @(posedge clk) begin
    if (step && col_ok) begin
      lb0[c[8:0]] <= lb1[c[8:0]];
      lb1[c[8:0]] <= col[2];
    end
  end

  // a window may only change while it is not being offered
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_win));
endmodule

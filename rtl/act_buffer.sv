// act_buffer: activation buffer that reorders between pixel-major and pass-major streams.
//
// The depthwise engine needs whole frames of one 16-channel batch at a time
// (batch outer, pixel inner: "pass-major"), while the pointwise engines
// produce and consume all channel batches of one pixel before the next
// pixel ("pixel-major"). One buffer sits on each side of the depthwise
// engine and performs that reordering. A tensor of npix pixels x nb
// batches is stored at address b*npix + p (one 128-bit beat per word).
// The write side accepts either order (wcfg.pix_major). The read side
// emits pass-major, or pixel-major with each pixel's nb beats repeated
// rcfg.rep times in a row, which is the input order of the projection
// engine (one repeat per filter batch).
// Interface: wr_start latches wcfg and accepts nb*npix beats (wr_busy until
// then); rd_start latches rcfg and emits nb*npix*rep beats (rep = 1 for
// pass-major). Write and read are independent; the controller starts the
// read after the write has finished. Valid/ready streams.
// Timing: one beat per clock each side; reads are registered (one cycle from
// address to data), so the array maps to block or ultra RAM. The depth
// (77824 words) follows the source's memory table; the addressing scheme is
// this design's choice.
module act_buffer
  import ss_pkg::*;
#(
  parameter int DEPTH = 77824
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr_start,
  input  buf_cfg_t wcfg,
  output logic     wr_busy,
  input  logic     in_valid,
  output logic     in_ready,
  input  beat_t    in_data,
  input  logic     rd_start,
  input  buf_cfg_t rcfg,
  output logic     rd_busy,
  output logic     out_valid,
  input  logic     out_ready,
  output beat_t    out_data
);
  localparam int AW = $clog2(DEPTH);
  beat_t mem [DEPTH];

  // ---------------- write side ----------------
  buf_cfg_t    wc;
  logic        wact;
  logic [16:0] wp;
  logic [6:0]  wb;
  logic [23:0] waddr;
  logic        wlast_b, wlast_p, wfire;

  always_comb begin
    in_ready = wact;
    wfire    = in_valid && in_ready;
    wlast_b  = (wb == wc.nb - 7'd1);
    wlast_p  = (wp == wc.npix - 17'd1);
    wr_busy  = wact;
  end

  always_ff @(posedge clk)
    if (wfire && waddr < 24'(DEPTH)) mem[waddr[AW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wc <= '0; wact <= 1'b0; wp <= '0; wb <= '0; waddr <= '0;
    end else if (wr_start && !wact) begin
      wc <= wcfg; wact <= 1'b1; wp <= '0; wb <= '0; waddr <= '0;
    end else if (wfire) begin
      if (wc.pix_major) begin
        if (wlast_b) begin
          wb <= '0; waddr <= 24'(wp) + 24'd1;
          if (wlast_p) wact <= 1'b0;
          else         wp <= wp + 17'd1;
        end else begin
          wb <= wb + 7'd1; waddr <= waddr + 24'(wc.npix);
        end
      end else begin
        waddr <= waddr + 24'd1;
        if (wlast_p) begin
          wp <= '0;
          if (wlast_b) wact <= 1'b0;
          else         wb <= wb + 7'd1;
        end else begin
          wp <= wp + 17'd1;
        end
      end
    end
  end

  // ---------------- read side ----------------
  buf_cfg_t    rc;
  logic        ract;
  logic [16:0] rp;
  logic [6:0]  rb, rr;
  logic [23:0] raddr;
  logic        rlast_b, rlast_p, rlast_r, radv;

  always_comb begin
    rlast_b = (rb == rc.nb - 7'd1);
    rlast_p = (rp == rc.npix - 17'd1);
    rlast_r = (rr == rc.rep - 7'd1) || rc.rep == '0;
    radv    = ract && (!out_valid || out_ready);
    rd_busy = ract || out_valid;
  end

  always_ff @(posedge clk)
    if (radv) out_data <= mem[raddr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc <= '0; ract <= 1'b0; rp <= '0; rb <= '0; rr <= '0; raddr <= '0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd_start && !rd_busy) begin
        rc <= rcfg; ract <= 1'b1; rp <= '0; rb <= '0; rr <= '0; raddr <= '0;
      end else if (radv) begin
        out_valid <= 1'b1;
        if (rc.pix_major) begin
          if (rlast_b) begin
            rb <= '0;
            if (rlast_r) begin
              rr <= '0; raddr <= 24'(rp) + 24'd1;
              if (rlast_p) ract <= 1'b0;
              else         rp <= rp + 17'd1;
            end else begin
              rr <= rr + 7'd1; raddr <= 24'(rp);
            end
          end else begin
            rb <= rb + 7'd1; raddr <= raddr + 24'(rc.npix);
          end
        end else begin
          raddr <= raddr + 24'd1;
          if (rlast_p) begin
            rp <= '0;
            if (rlast_b) ract <= 1'b0;
            else         rb <= rb + 7'd1;
          end else begin
            rp <= rp + 17'd1;
          end
        end
      end
    end
  end
endmodule

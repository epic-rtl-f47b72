// frame_bypass_unit: in-sensor Frame Bypass Check.
//
// Every pixel leaving the ADC is subtracted from the co-located pixel of the
// stored reference frame and |F_t - F_ref| is summed over the frame. After the
// last pixel the frame is sent to the SoC if the sum exceeds gamma. Otherwise
// the bypass counter c is incremented, and the frame is still sent (with c
// cleared) if c then exceeds theta; else it is skipped. This decision rule and
// the counter follow the paper's flow chart. A sent frame becomes the new
// reference (the paper does not say when F_ref is refreshed; this is our
// choice), and the first frame after reset is always sent.
//
// Two frame buffers play the roles of "Current Frame" and "Ref. Frame". The
// incoming frame is written into the current buffer while the reference
// buffer is read at the same address. If the frame is sent, it is streamed out
// of the current buffer and the two buffers swap roles; adc_ready is low while
// the frame is streamed out.
//
// Timing: one pixel per cycle in, one per cycle out. frame_done pulses two
// cycles after the cycle that accepts the last pixel of a frame, with frame_sent, frame_diff and
// bypass_count valid in that cycle. A sent frame starts to stream out on the
// next cycle (FRAME_W*FRAME_H cycles, out_last on its final pixel).
module frame_bypass_unit #(
  parameter int unsigned FRAME_W = 640,
  parameter int unsigned FRAME_H = 480,
  parameter int unsigned PIX_W   = 10,
  parameter int unsigned DIFF_W  = 32,
  parameter int unsigned CNT_W   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // ADC side
  input  logic              adc_valid,
  output logic              adc_ready,
  input  logic [PIX_W-1:0]  adc_pixel,
  // thresholds
  input  logic [DIFF_W-1:0] gamma,
  input  logic [CNT_W-1:0]  theta,
  // stream of sent frames to the sensor interface
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PIX_W-1:0]  out_pixel,
  output logic              out_last,
  // per-frame decision
  output logic              frame_done,
  output logic              frame_sent,
  output logic [DIFF_W-1:0] frame_diff,
  output logic [CNT_W-1:0]  bypass_count
);
  localparam int unsigned NPIX = FRAME_W * FRAME_H;
  localparam int unsigned AW   = $clog2(NPIX);

  typedef enum logic [1:0] {S_CAPTURE, S_DECIDE, S_SEND} state_e;
  state_e state;

  // frame buffers: buf_q[cur] is the current frame, buf_q[!cur] the reference
  logic [PIX_W-1:0] fbuf0 [NPIX];
  logic [PIX_W-1:0] fbuf1 [NPIX];
  logic             cur;
  logic             have_ref;

  logic [AW-1:0]    wr_addr;     // capture address
  logic [AW-1:0]    rd_addr;     // send address
  logic [DIFF_W-1:0] sad;
  logic [CNT_W-1:0]  cnt;

  logic [PIX_W-1:0] ref_pix;
  logic [PIX_W-1:0] abs_d;
  logic [DIFF_W-1:0] sad_next;
  logic             accept;

  assign adc_ready = (state == S_CAPTURE);
  assign accept    = adc_valid && adc_ready;
  assign ref_pix   = cur ? fbuf0[wr_addr] : fbuf1[wr_addr];
  assign abs_d     = (adc_pixel > ref_pix) ? adc_pixel - ref_pix : ref_pix - adc_pixel;
  // saturating accumulation
  always_comb begin
    sad_next = sad + DIFF_W'(abs_d);
    if (sad_next < sad) sad_next = '1;
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      if (cur) fbuf1[wr_addr] <= adc_pixel;
      else     fbuf0[wr_addr] <= adc_pixel;
    end
  end

  // decision made in S_DECIDE
  logic send_now;
  logic [CNT_W-1:0] cnt_inc;
  assign cnt_inc = cnt + 1'b1;
  always_comb begin
    send_now = 1'b0;
    if (!have_ref || sad > gamma) send_now = 1'b1;
    else if (cnt_inc > theta)     send_now = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_CAPTURE;
      cur          <= 1'b0;
      have_ref     <= 1'b0;
      wr_addr      <= '0;
      rd_addr      <= '0;
      sad          <= '0;
      cnt          <= '0;
      frame_done   <= 1'b0;
      frame_sent   <= 1'b0;
      frame_diff   <= '0;
      bypass_count <= '0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        S_CAPTURE: if (accept) begin
          sad <= sad_next;
          if (wr_addr == AW'(NPIX - 1)) begin
            wr_addr <= '0;
            state   <= S_DECIDE;
          end else begin
            wr_addr <= wr_addr + 1'b1;
          end
        end
        S_DECIDE: begin
          frame_done <= 1'b1;
          frame_diff <= sad;
          frame_sent <= send_now;
          sad        <= '0;
          if (!have_ref || sad > gamma) begin
            // large difference: sent, counter unchanged
            bypass_count <= cnt;
          end else if (cnt_inc > theta) begin
            cnt          <= '0;
            bypass_count <= '0;
          end else begin
            cnt          <= cnt_inc;
            bypass_count <= cnt_inc;
          end
          rd_addr <= '0;
          state   <= send_now ? S_SEND : S_CAPTURE;
        end
        S_SEND: if (out_ready) begin
          if (rd_addr == AW'(NPIX - 1)) begin
            rd_addr  <= '0;
            cur      <= ~cur;       // sent frame becomes the reference
            have_ref <= 1'b1;
            state    <= S_CAPTURE;
          end else begin
            rd_addr <= rd_addr + 1'b1;
          end
        end
        default: state <= S_CAPTURE;
      endcase
    end
  end

  assign out_valid = (state == S_SEND);
  assign out_pixel = cur ? fbuf1[rd_addr] : fbuf0[rd_addr];
  assign out_last  = out_valid && (rd_addr == AW'(NPIX - 1));

endmodule

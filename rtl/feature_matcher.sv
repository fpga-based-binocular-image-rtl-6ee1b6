// Feature matcher: multi buffer, match executor and the frame schedule that
// makes extraction of frame n+1 and matching of frame n run at the same time.
//
// Write side: the per-pixel result stream of the feature extractor enters
// here. Flagged pixels are appended to the current-left section; the
// stream's image-end marker (s_last) switches to the current-right section,
// and the second marker closes the frame. A closed frame holds the stream
// (s_ready low) until the buffer can rotate, which suspends the extractor.
// Schedule: when a frame is closed and the executor is idle, the multi
// buffer advances (the frame just written becomes RL/RR, the previous left
// image RP) and the executor is started one clock later. Stereo matching
// runs from the first frame, trace matching from the second. Each frame
// period thus does nL, nR extraction writes and one matching pass, which is
// the two-stage pipeline of the paper's schedule.
//
// Configuration (hd_thresh, y_tol, max_disp) comes in as plain inputs; in
// the full system these would be registers on the AXI4-Lite bus.
module feature_matcher
  import feat_pkg::*;
#(
  parameter int unsigned NG       = 8,
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned FIFO_DEP = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the feature extractor
  input  logic               s_valid,
  output logic               s_ready,
  input  logic               s_flag,
  input  feature_t           s_feature,
  input  logic               s_last,
  // configuration
  input  logic [HD_BITS-1:0]    hd_thresh,
  input  logic [COORD_BITS-1:0] y_tol,
  input  logic [COORD_BITS-1:0] max_disp,
  // match results
  output logic               m_valid,
  input  logic               m_ready,
  output match_result_t      m_data,
  // status
  output logic               overflow,
  output logic               matching,
  output logic               frame_wait,
  output logic [2:0]         ring_base
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic        side_r;       // 0: writing left image, 1: right image
  logic        closed;       // frame fully written, waiting to rotate
  logic [1:0]  nframes;      // frames rotated in, saturating at 2
  logic        advance, start;
  logic        busy;
  logic [AW-1:0] rl_addr, rr_addr, rp_addr;
  feature_t    rl_data, rr_data, rp_data;
  logic [AW:0] rl_count, rr_count, rp_count;
  logic        beat;

  assign s_ready    = !closed;
  assign beat       = s_valid && s_ready;
  assign advance    = closed && !busy && !start;
  assign matching   = busy;
  assign frame_wait = closed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      side_r  <= 1'b0;
      closed  <= 1'b0;
      nframes <= '0;
      start   <= 1'b0;
    end else begin
      start <= advance;
      if (advance) begin
        closed  <= 1'b0;
        nframes <= (nframes == 2'd2) ? nframes : nframes + 1'b1;
      end else if (beat && s_last) begin
        side_r <= !side_r;
        if (side_r) closed <= 1'b1;
      end
    end
  end

  multi_buffer #(.DEPTH(DEPTH)) u_mb (
    .clk, .rst_n, .advance,
    .wr_en(beat && s_flag), .wr_right(side_r), .wr_data(s_feature), .overflow,
    .rl_addr, .rr_addr, .rp_addr, .rl_data, .rr_data, .rp_data,
    .rl_count, .rr_count, .rp_count, .base(ring_base));

  match_executor #(.NG(NG), .DEPTH(DEPTH), .FIFO_DEP(FIFO_DEP)) u_exec (
    .clk, .rst_n, .start, .trace_en(nframes == 2'd2), .busy,
    .hd_thresh, .y_tol, .max_disp,
    .n_l(rl_count), .n_r(rr_count), .n_p(rp_count),
    .rl_addr, .rr_addr, .rp_addr, .rl_data, .rr_data, .rp_data,
    .m_valid, .m_ready, .m_data);
endmodule

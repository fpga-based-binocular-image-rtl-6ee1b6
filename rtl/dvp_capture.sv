// Image capture: converts one camera's DVP video (vsync, href, 8-bit data)
// into an AXI4-Stream of pixels for the frame-buffer DMA.
//
// A pixel is sampled when href and pix_en are both high (pix_en is the
// camera pixel clock's sampling strobe in the system clock domain). Each
// pixel is held back by one pixel so that the last pixel of a line, the one
// before href falls, can be sent with tlast = 1. tuser = 1 marks the first
// pixel after a vsync pulse (start of frame). The output is one register
// stage; a pixel that arrives while the previous one still waits for tready
// is dropped and sets the sticky `overflow` (the DMA is expected to keep
// up, as a camera cannot be stalled).
//
// The paper states only the conversion from DVP to AXI4-Stream; the
// one-pixel hold-back, the tuser/tlast use and the drop policy are this
// design's choices.
module dvp_capture (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       vsync,
  input  logic       href,
  input  logic       pix_en,
  input  logic [7:0] data,
  output logic       m_tvalid,
  input  logic       m_tready,
  output logic [7:0] m_tdata,
  output logic       m_tuser,
  output logic       m_tlast,
  output logic       overflow
);
  logic       hold_v, hold_sof, sof_pend, href_d, vsync_d;
  logic [7:0] hold_d;
  logic       emit, emit_last, slot_free;

  assign slot_free = !m_tvalid || m_tready;
  // the held pixel leaves when the next pixel arrives or when the line ends
  assign emit      = hold_v && ((href && pix_en) || (href_d && !href));
  assign emit_last = hold_v && href_d && !href;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v   <= 1'b0;
      hold_sof <= 1'b0;
      hold_d   <= '0;
      sof_pend <= 1'b0;
      href_d   <= 1'b0;
      vsync_d  <= 1'b0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tuser  <= 1'b0;
      m_tlast  <= 1'b0;
      overflow <= 1'b0;
    end else begin
      href_d  <= href;
      vsync_d <= vsync;
      if (vsync && !vsync_d) sof_pend <= 1'b1;
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;
      if (emit) begin
        if (slot_free) begin
          m_tvalid <= 1'b1;
          m_tdata  <= hold_d;
          m_tuser  <= hold_sof;
          m_tlast  <= emit_last;
        end else overflow <= 1'b1;
      end
      if (href && pix_en) begin
        hold_v   <= 1'b1;
        hold_d   <= data;
        hold_sof <= sof_pend;
        sof_pend <= 1'b0;
      end else if (emit_last) hold_v <= 1'b0;
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule

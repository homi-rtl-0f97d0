// axi_dma_packetizer: output transmission multiplexer and AXI4-Stream
// packetizer feeding the processing system's DMA (sensor clock domain).
//
// Three sources: raw EVT 3.0 words tapped from the sensor stream, generated
// frame pixels from the display FIFO, and classifier results from the result
// FIFO. sel picks raw events, frames, results, or frames and results. Data
// leave as 16-bit beats through a one-beat output register:
//   raw    : one EVT 3.0 word per beat, tlast every RAW_PKT_LEN words
//   frame  : one pixel pair per beat as it comes from the display FIFO
//            ({odd, even}: even pixel in the low byte), tlast on the last
//            beat of a FRAME_PIXELS-pixel frame
//   result : one beat with tlast
// tuser carries the source (tx_sel_e code of raw/frame/result). A source is
// chosen only between packets, and a frame packet only starts at pixel 0.
// Sources that sel does not name are drained and discarded, so the frame and
// result paths never stall the pipeline; raw words that meet a busy output
// are dropped and counted in raw_drops (the raw tap cannot be stalled).
// The multiplexer with its select line is the platform's; the packet
// framing, beat format and drop policy are this design's choices.
module axi_dma_packetizer
  import homi_pkg::*;
#(
  parameter int unsigned RAW_PKT_LEN = 1024,
  parameter int unsigned FRAME_PIXELS = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
  input  tx_sel_e     sel,
  // raw tap
  input  logic        raw_valid,
  input  logic [15:0] raw_data,
  // frame pixels (show-ahead FIFO)
  input  logic        frm_valid,
  input  logic [15:0] frm_data,       // {odd pixel, even pixel}
  output logic        frm_ready,
  // classifier results (show-ahead FIFO)
  input  logic        cls_valid,
  input  logic [15:0] cls_data,
  output logic        cls_ready,
  // AXI4-Stream master
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic [15:0] m_axis_tdata,
  output logic        m_axis_tlast,
  output logic [1:0]  m_axis_tuser,
  // status
  output logic [31:0] raw_drops
);
  typedef enum logic [1:0] {P_NONE, P_RAW, P_FRAME, P_CLASS} pkt_e;
  localparam int unsigned RW = $clog2(RAW_PKT_LEN);
  localparam int unsigned FW = $clog2(FRAME_PIXELS / 2);

  pkt_e pkt, cur, pkt_n;
  logic [RW-1:0] raw_cnt;
  logic [FW-1:0] fpix;             // pixel pair within the frame
  logic frame_sel, class_sel, raw_sel, load;
  logic        beat;
  logic [15:0] beat_data;
  logic        beat_last;
  logic [1:0]  beat_user;
  logic        raw_take, raw_drop;

  always_comb begin
    raw_sel   = (sel == TX_RAW);
    frame_sel = (sel == TX_FRAME) || (sel == TX_FRAME_CLASS);
    class_sel = (sel == TX_CLASS) || (sel == TX_FRAME_CLASS);
    load      = !m_axis_tvalid || m_axis_tready;

    cur = pkt;
    if (pkt == P_NONE) begin
      if (raw_sel && raw_valid)                          cur = P_RAW;
      else if (class_sel && cls_valid)                   cur = P_CLASS;
      else if (frame_sel && frm_valid && fpix == '0)     cur = P_FRAME;
    end

    pkt_n = cur; beat = 1'b0; beat_data = '0; beat_last = 1'b0; beat_user = '0;
    frm_ready = 1'b0; cls_ready = 1'b0; raw_take = 1'b0; raw_drop = 1'b0;

    unique case (cur)
      P_RAW: if (raw_valid) begin
        if (load) begin
          raw_take = 1'b1; beat = 1'b1; beat_data = raw_data;
          beat_last = (raw_cnt == RW'(RAW_PKT_LEN - 1)); beat_user = 2'(TX_RAW);
          if (beat_last) pkt_n = P_NONE;
        end else raw_drop = 1'b1;
      end
      P_FRAME: if (frm_valid && load) begin
        frm_ready = 1'b1; beat = 1'b1; beat_data = frm_data;
        beat_last = (fpix == FW'(FRAME_PIXELS / 2 - 1)); beat_user = 2'(TX_FRAME);
        if (beat_last) pkt_n = P_NONE;
      end
      P_CLASS: if (cls_valid && load) begin
        cls_ready = 1'b1; beat = 1'b1; beat_data = cls_data; beat_last = 1'b1;
        beat_user = 2'(TX_CLASS); pkt_n = P_NONE;
      end
      default: ;
    endcase

    // drain what is not being sent
    if (cur != P_FRAME && (!frame_sel || fpix != '0)) frm_ready = frm_valid;
    if (cur != P_CLASS && !class_sel)                 cls_ready = cls_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt <= P_NONE; raw_cnt <= '0; fpix <= '0; raw_drops <= '0;
      m_axis_tvalid <= 1'b0; m_axis_tdata <= '0; m_axis_tlast <= 1'b0; m_axis_tuser <= '0;
    end else begin
      pkt <= pkt_n;
      if (raw_take) raw_cnt <= (raw_cnt == RW'(RAW_PKT_LEN - 1)) ? '0 : raw_cnt + 1'b1;
      if (raw_drop) raw_drops <= raw_drops + 1'b1;
      if (frm_ready) fpix <= (fpix == FW'(FRAME_PIXELS / 2 - 1)) ? '0 : fpix + 1'b1;
      if (load) begin
        m_axis_tvalid <= beat;
        m_axis_tdata  <= beat_data;
        m_axis_tlast  <= beat_last;
        m_axis_tuser  <= beat_user;
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast))
    else $error("axi_dma_packetizer: AXI4-Stream beat changed while stalled");
endmodule

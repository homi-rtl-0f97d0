// homi_top: programmable-logic part of the HOMI event-camera inference
// platform, from the sensor's EVT 3.0 stream to the CNN accelerator and the
// processing system's DMA.
//
// Three clock domains, as on the platform: the sensor / DMA domain (7.5 ns),
// the pre-processing domain (5 ns) and the accelerator domain (7.8 ns).
//   sensor stream (AXI4-Stream from the MIPI CSI-2 receiver)
//     -> input FIFO (7.5 -> 5 ns) -> pre-processing block (decoder, address
//        generation, ALUs, ping-pong buffers, memory control, scale-shift)
//     -> interface unit (interface FIFO 5 -> 7.8 ns, loader) -> accelerator
//   display FIFO (5 -> 7.5 ns) carries one channel of every frame, packed
//   two pixels per 16-bit word so that it drains as fast as it fills, and the
//   result FIFO (7.8 -> 7.5 ns) every classifier result, to the AXI DMA
//   packetizer, which also taps the raw sensor words.
// The MIPI receiver, the accelerator and the processing system are not part
// of this RTL: their signals are the ports below (s_axis_evt_*, gm_* /
// accel_*, m_axis_*). The sensor stream is only back-pressured by the input
// FIFO being full (tready = !full; a word is taken when tvalid && tready, and
// the raw DMA tap sees exactly the accepted words). A classifier result is
// queued only while the interface unit waits for it, so a done pulse outside
// an inference is ignored. Configuration inputs are static and must be driven from
// the domain named in each group. The block structure is the platform's;
// FIFO depths, the port formats and the status outputs are this design's.
module homi_top
  import homi_pkg::*;
#(
  parameter int unsigned IN_FIFO_DEPTH   = 1024,
  parameter int unsigned IF_FIFO_DEPTH   = 16384,
  parameter int unsigned DISP_FIFO_DEPTH = 1024,
  parameter int unsigned RES_FIFO_DEPTH  = 16,
  parameter int unsigned RAW_PKT_LEN     = 1024
) (
  input  logic              clk_sensor,    // 7.5 ns
  input  logic              rst_sensor_n,
  input  logic              clk_pp,        // 5 ns
  input  logic              rst_pp_n,
  input  logic              clk_acc,       // 7.8 ns
  input  logic              rst_acc_n,
  // EVT 3.0 stream from the MIPI CSI-2 receiver (clk_sensor)
  input  logic              s_axis_evt_tvalid,
  input  logic [EVT_W-1:0]  s_axis_evt_tdata,
  output logic              s_axis_evt_tready,
  // pre-processing configuration (clk_pp)
  input  pp_cfg_t           pp_cfg,
  input  logic              tbl_we,
  input  logic              tbl_sel_y,
  input  logic [XY_W-1:0]   tbl_idx,
  input  logic              tbl_m,
  input  logic [XY_W-1:0]   tbl_b,
  // accelerator (clk_acc)
  input  logic              multi_channel,
  input  logic              single_neg,
  output logic              gm_we,
  output logic [ADDR_W-1:0] gm_addr,
  output logic [15:0]       gm_wdata,
  output logic              accel_en,
  input  logic              accel_done,
  input  logic [15:0]       accel_result,  // valid with accel_done
  // DMA (clk_sensor)
  input  tx_sel_e           tx_sel,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic [15:0]       m_axis_tdata,
  output logic              m_axis_tlast,
  output logic [1:0]        m_axis_tuser,
  output logic [31:0]       raw_drops,
  // status (clk_pp unless noted)
  output logic              done_frame_gen,
  output logic              done_transfer,
  output logic              dec_fifo_hold,
  output logic              dec_frame_stall,
  output logic              mcu_fifo_hold,
  output logic              vect_event,
  output logic              ts_wrap,
  output logic              sets_reset,
  output logic              acc_wait,      // clk_acc
  output logic              frame_loaded   // clk_acc
);
  // input FIFO
  logic              in_full, in_empty, in_rd;
  logic [EVT_W-1:0]  in_data;
  assign s_axis_evt_tready = !in_full;

  async_fifo #(.WIDTH(EVT_W), .DEPTH(IN_FIFO_DEPTH)) u_input_fifo (
    .wr_clk(clk_sensor), .wr_rst_n(rst_sensor_n),
    .wr_en(s_axis_evt_tvalid && s_axis_evt_tready), .wr_data(s_axis_evt_tdata), .full(in_full),
    .rd_clk(clk_pp), .rd_rst_n(rst_pp_n),
    .rd_en(in_rd), .rd_data(in_data), .empty(in_empty)
  );

  // pre-processing
  logic        if_wr, if_full, disp_wr, disp_full;
  logic [15:0] if_data;
  logic [7:0]  disp_data;

  preprocessing_block u_pp (
    .clk(clk_pp), .rst_n(rst_pp_n), .cfg(pp_cfg),
    .fifo_data(in_data), .fifo_empty(in_empty), .fifo_rd_enable(in_rd),
    .tbl_we, .tbl_sel_y, .tbl_idx, .tbl_m, .tbl_b,
    .if_fifo_wr_en(if_wr), .if_fifo_data(if_data), .if_fifo_full(if_full),
    .disp_fifo_wr_en(disp_wr), .disp_fifo_data(disp_data), .disp_fifo_full(disp_full),
    .done_frame_gen, .done_transfer, .dec_fifo_hold, .dec_frame_stall,
    .mcu_fifo_hold, .vect_event, .ts_wrap, .sets_reset
  );

  // interface unit
  interface_unit #(.FRAME_PIX(FRAME_PIX), .FIFO_DEPTH(IF_FIFO_DEPTH)) u_if (
    .wr_clk(clk_pp), .wr_rst_n(rst_pp_n), .wr_en(if_wr), .wr_data(if_data), .full(if_full),
    .clk(clk_acc), .rst_n(rst_acc_n), .multi_channel, .single_neg,
    .gm_we, .gm_addr, .gm_wdata, .accel_en, .accel_done,
    .wait_accel(acc_wait), .frame_loaded
  );

  // display and result paths to the packetizer
  logic        disp_empty, disp_rd, res_full, res_empty, res_rd;
  logic [15:0] disp_q, res_q;

  // The display channel leaves the 5 ns domain as pixel pairs: one pixel per
  // 5 ns cycle is more than one 8-bit word per 7.5 ns cycle could drain, and
  // would throttle every transfer. Frames have an even pixel count and each
  // transfer starts at pixel 0, so the pairs stay aligned to the frame.
  logic       disp_odd;
  logic [7:0] disp_even;
  always_ff @(posedge clk_pp or negedge rst_pp_n) begin
    if (!rst_pp_n) begin
      disp_odd <= 1'b0; disp_even <= '0;
    end else if (disp_wr) begin
      disp_odd <= ~disp_odd;
      if (!disp_odd) disp_even <= disp_data;
    end
  end

  async_fifo #(.WIDTH(16), .DEPTH(DISP_FIFO_DEPTH)) u_disp_fifo (
    .wr_clk(clk_pp), .wr_rst_n(rst_pp_n), .wr_en(disp_wr && disp_odd), .wr_data({disp_data, disp_even}),
    .full(disp_full),
    .rd_clk(clk_sensor), .rd_rst_n(rst_sensor_n), .rd_en(disp_rd), .rd_data(disp_q), .empty(disp_empty)
  );

  async_fifo #(.WIDTH(16), .DEPTH(RES_FIFO_DEPTH)) u_res_fifo (
    .wr_clk(clk_acc), .wr_rst_n(rst_acc_n), .wr_en(accel_done && acc_wait && !res_full),
    .wr_data(accel_result), .full(res_full),
    .rd_clk(clk_sensor), .rd_rst_n(rst_sensor_n), .rd_en(res_rd), .rd_data(res_q), .empty(res_empty)
  );

  axi_dma_packetizer #(.RAW_PKT_LEN(RAW_PKT_LEN), .FRAME_PIXELS(FRAME_PIX)) u_dma (
    .clk(clk_sensor), .rst_n(rst_sensor_n), .sel(tx_sel),
    .raw_valid(s_axis_evt_tvalid && s_axis_evt_tready), .raw_data(s_axis_evt_tdata),
    .frm_valid(!disp_empty), .frm_data(disp_q), .frm_ready(disp_rd),
    .cls_valid(!res_empty), .cls_data(res_q), .cls_ready(res_rd),
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast, .m_axis_tuser,
    .raw_drops
  );
endmodule

// preprocessing_block: turns the EVT 3.0 event stream into 128x128 event
// representations (binary, histogram, SLTS or SETS) for two polarity
// channels and streams each finished frame out as unsigned 8-bit pixels.
//
// Runs entirely in the fast pre-processing clock (5 ns in the platform).
// The EVT 3.0 decoder / control unit pops words from the input FIFO and
// issues pixel events; the address generation unit maps each to a 14-bit
// address; the timestamp memory and the accumulating buffer of the event's
// channel are read in the event's first cycle and, in its second, the
// channel's ALU writes the updated value back while the timestamp memory
// stores the event's timestamp (its write enable is wen_pos OR wen_neg).
// At the end of a frame the memory control unit swaps the ping-pong buffers
// and moves the finished frame, through the two scale-shift units, into the
// interface FIFO ({neg, pos} per word, one word per pixel in address order)
// and one channel into the display FIFO, clearing it as it goes.
// Throughput: one pixel event per two cycles; transfer one pixel per cycle.
// The block structure and dataflow follow the platform's pre-processing
// module; see the sub-modules for what is this design's own choice.
module preprocessing_block
  import homi_pkg::*;
(
  input  logic              clk,            // frame_gen_clk
  input  logic              rst_n,
  input  pp_cfg_t           cfg,
  // input FIFO
  input  logic [EVT_W-1:0]  fifo_data,
  input  logic              fifo_empty,
  output logic              fifo_rd_enable,
  // address-mapping table write port
  input  logic              tbl_we,
  input  logic              tbl_sel_y,
  input  logic [XY_W-1:0]   tbl_idx,
  input  logic              tbl_m,
  input  logic [XY_W-1:0]   tbl_b,
  // interface FIFO
  output logic              if_fifo_wr_en,
  output logic [15:0]       if_fifo_data,
  input  logic              if_fifo_full,
  // display FIFO
  output logic              disp_fifo_wr_en,
  output logic [7:0]        disp_fifo_data,
  input  logic              disp_fifo_full,
  // status
  output logic              done_frame_gen,
  output logic              done_transfer,
  output logic              dec_fifo_hold,
  output logic              dec_frame_stall,
  output logic              mcu_fifo_hold,
  output logic              vect_event,
  output logic              ts_wrap,        // an update saw t_last > t_now
  output logic              sets_reset      // a SETS update with shift >= 16
);
  logic [TS_W-1:0]   timestamp;
  logic [XY_W-1:0]   ev_x, ev_y;
  logic              en_agen, en_pos_add, en_neg_add, wen_pos, wen_neg;
  logic              xfer_busy;
  logic [ADDR_W-1:0] addr, transfer_addr;
  logic              in_range;
  logic              wen_mem_zero, mem_select, mem_select_fifo;
  logic [REP_W-1:0]  alu_pos_in, alu_neg_in, alu_pos_out, alu_neg_out, u16_pos, u16_neg;
  logic [TS_W-1:0]   ts_dout;
  logic [7:0]        u8_pos, u8_neg;
  logic [TS_HI_W-1:0] decay_pos, decay_neg;
  logic [6:0]        x_out, y_out;
  logic [31:0]       frame_events;

  evt3_decoder u_dec (
    .clk, .rst_n,
    .fifo_data, .fifo_empty, .fifo_rd_enable,
    .acc_mode(cfg.acc_mode), .threshold(cfg.threshold),
    .timestamp, .x(ev_x), .y(ev_y),
    .en_agen, .en_pos_add, .en_neg_add, .wen_pos, .wen_neg,
    .done_frame_gen, .xfer_busy,
    .fifo_hold(dec_fifo_hold), .frame_stall(dec_frame_stall),
    .vect_event, .frame_events
  );

  addr_gen_unit #(.IN_W(SENSOR_W), .IN_H(SENSOR_H), .OUT_W(FRAME_W), .OUT_H(FRAME_H), .XY_W(XY_W)) u_agu (
    .clk, .x_in(ev_x), .y_in(ev_y), .addr, .x_out, .y_out, .in_range,
    .tbl_we, .tbl_sel_y, .tbl_idx, .tbl_m, .tbl_b
  );

  bram_rf #(.DEPTH(FRAME_PIX), .WIDTH(TS_W)) u_ts_mem (
    .clk, .addr, .din(timestamp), .wea(wen_pos || wen_neg), .dout(ts_dout)
  );

  rep_alu u_alu_pos (
    .en(en_pos_add), .mode(cfg.rep_mode), .mem_val(alu_pos_out),
    .t_now(timestamp[TS_W-1 -: TS_HI_W]), .t_last(ts_dout[TS_W-1 -: TS_HI_W]),
    .new_val(alu_pos_in), .decay(decay_pos)
  );
  rep_alu u_alu_neg (
    .en(en_neg_add), .mode(cfg.rep_mode), .mem_val(alu_neg_out),
    .t_now(timestamp[TS_W-1 -: TS_HI_W]), .t_last(ts_dout[TS_W-1 -: TS_HI_W]),
    .new_val(alu_neg_in), .decay(decay_neg)
  );

  pingpong_buffers #(.DEPTH(FRAME_PIX)) u_pp (
    .clk, .mem_select, .mem_select_fifo, .addr, .transfer_addr,
    .wen_pos, .wen_neg, .wen_mem_zero,
    .alu_pos_in, .alu_neg_in, .alu_pos_out, .alu_neg_out,
    .u16_pos_out(u16_pos), .u16_neg_out(u16_neg)
  );

  scale_shift_unit u_ss_pos (.in_val(u16_pos), .scale(cfg.scale), .shift(cfg.shift), .out_val(u8_pos));
  scale_shift_unit u_ss_neg (.in_val(u16_neg), .scale(cfg.scale), .shift(cfg.shift), .out_val(u8_neg));

  memory_control_unit #(.DEPTH(FRAME_PIX)) u_mcu (
    .clk, .rst_n, .done_frame_gen, .disp_neg(cfg.disp_neg),
    .u8_pos, .u8_neg,
    .transfer_addr, .wen_mem_zero, .mem_select, .mem_select_fifo,
    .if_fifo_wr_en, .if_fifo_data, .if_fifo_full,
    .disp_fifo_wr_en, .disp_fifo_data, .disp_fifo_full,
    .busy(xfer_busy), .done_transfer, .fifo_hold(mcu_fifo_hold)
  );

  always_comb begin
    ts_wrap    = (wen_pos || wen_neg) && (ts_dout[TS_W-1 -: TS_HI_W] > timestamp[TS_W-1 -: TS_HI_W]);
    sets_reset = (cfg.rep_mode == REP_SETS) &&
                 ((wen_pos && decay_pos >= TS_HI_W'(16)) || (wen_neg && decay_neg >= TS_HI_W'(16)));
  end

  // the decoder only issues events inside the sensor area
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n) en_agen |-> in_range);
endmodule

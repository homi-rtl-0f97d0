// interface_unit: bridge from the pre-processing block to the CNN
// accelerator: the interface FIFO across the two clock domains plus the
// controller that loads one frame into the accelerator's global memory and
// starts an inference.
//
// The FIFO (written in the pre-processing clock, read in the accelerator
// clock) carries one word {uint8 neg, uint8 pos} per pixel, in address order.
// The controller waits in IDLE for the FIFO to be non-empty, then in XFER pops
// FRAME_PIX words, at most one per accelerator cycle, and writes them into the
// global memory: with multi_channel = 1 each word goes to word address i
// unchanged (both channels), with multi_channel = 0 the pixels of the channel
// chosen by single_neg are packed two per word, pixel 2k in the low byte, at
// word address k. It then pulses accel_en for one cycle and waits in HOLD
// until accel_done, then returns to IDLE. Frames that arrive meanwhile queue
// in the FIFO. The sequence is the platform's; the memory layouts, the word
// format and the FIFO depth are this design's choices.
module interface_unit #(
  parameter int unsigned FRAME_PIX  = 16384,
  parameter int unsigned FIFO_DEPTH = 16384,
  parameter int unsigned GM_AW      = $clog2(FRAME_PIX)
) (
  // pre-processing side
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [15:0]      wr_data,
  output logic             full,
  // accelerator side
  input  logic             clk,
  input  logic             rst_n,
  input  logic             multi_channel,
  input  logic             single_neg,
  output logic             gm_we,
  output logic [GM_AW-1:0] gm_addr,
  output logic [15:0]      gm_wdata,
  output logic             accel_en,
  input  logic             accel_done,
  // status
  output logic             wait_accel,     // in HOLD
  output logic             frame_loaded    // pulse when a frame is in the global memory
);
  localparam int unsigned PW = $clog2(FRAME_PIX);

  typedef enum logic [1:0] {IF_IDLE, IF_XFER, IF_ENABLE, IF_HOLD} if_state_e;
  if_state_e state;

  logic        empty, rd_en;
  logic [15:0] rd_data;
  logic [PW-1:0] pix;
  logic [7:0]  lo_byte;
  logic        mc_lat, neg_lat;    // layout latched per frame

  async_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk, .wr_rst_n, .wr_en, .wr_data, .full,
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en, .rd_data, .empty
  );

  logic [7:0] sel_byte;
  always_comb begin
    rd_en    = (state == IF_XFER) && !empty;
    sel_byte = neg_lat ? rd_data[15:8] : rd_data[7:0];
    gm_we    = rd_en && (mc_lat || pix[0]);
    gm_addr  = mc_lat ? GM_AW'(pix) : GM_AW'(pix >> 1);
    gm_wdata = mc_lat ? rd_data : {sel_byte, lo_byte};
    accel_en = (state == IF_ENABLE);
    wait_accel = (state == IF_HOLD);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IF_IDLE; pix <= '0; lo_byte <= '0; mc_lat <= 1'b1; neg_lat <= 1'b0;
      frame_loaded <= 1'b0;
    end else begin
      frame_loaded <= 1'b0;
      unique case (state)
        IF_IDLE: if (!empty) begin
          state <= IF_XFER; pix <= '0; mc_lat <= multi_channel; neg_lat <= single_neg;
        end
        IF_XFER: if (rd_en) begin
          lo_byte <= sel_byte;
          pix     <= pix + 1'b1;
          if (pix == PW'(FRAME_PIX - 1)) begin state <= IF_ENABLE; frame_loaded <= 1'b1; end
        end
        IF_ENABLE: state <= IF_HOLD;
        IF_HOLD:   if (accel_done) state <= IF_IDLE;
        default:   state <= IF_IDLE;
      endcase
    end
  end

  a_en_pulse: assert property (@(posedge clk) disable iff (!rst_n) accel_en |=> !accel_en);
endmodule

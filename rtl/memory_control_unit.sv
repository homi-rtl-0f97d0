// memory_control_unit: hands the finished frame to the interface and display
// FIFOs and clears it for the next-but-one frame.
//
// On done_frame_gen (accepted only while idle; busy tells the control unit to
// wait) it toggles mem_select, so that accumulation continues in the other
// buffer at once, points mem_select_fifo at the buffer just filled, and walks
// Transfer_ADDR from 0 to DEPTH-1. Each address is one read-first access with
// wen_mem_zero high, which reads the word out and writes 0 in its place. One
// cycle later the two scale-shifted bytes {neg, pos} are written into the
// interface FIFO (if_fifo_wr_en) and the display channel's byte into the
// display FIFO. While either FIFO is full the unit holds (fifo_hold): the word
// already read waits in a one-word register, since its location has been
// cleared, and no new address is issued. done_transfer pulses after the last
// word has been written. One word per cycle when neither FIFO is full, so a
// 16384-location frame takes 16384 + 2 cycles.
// The swap-transfer-clear sequence and the hold on a full FIFO are the
// platform's; the holding register and the timing are this design's.
module memory_control_unit #(
  parameter int unsigned DEPTH = 16384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     done_frame_gen,
  input  logic                     disp_neg,        // display channel select
  // from the scale-shift units (valid the cycle after an address)
  input  logic [7:0]               u8_pos,
  input  logic [7:0]               u8_neg,
  // to the ping-pong buffers
  output logic [$clog2(DEPTH)-1:0] transfer_addr,
  output logic                     wen_mem_zero,
  output logic                     mem_select,
  output logic                     mem_select_fifo,
  // interface FIFO
  output logic                     if_fifo_wr_en,
  output logic [15:0]              if_fifo_data,
  input  logic                     if_fifo_full,
  // display FIFO
  output logic                     disp_fifo_wr_en,
  output logic [7:0]               disp_fifo_data,
  input  logic                     disp_fifo_full,
  // status
  output logic                     busy,
  output logic                     done_transfer,
  output logic                     fifo_hold
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic          active;       // addresses left to issue
  logic [AW-1:0] cnt;
  logic          pend;         // a read was issued last cycle
  logic          pend_last;    // ... and it was the last one
  logic          hold_valid, hold_last;
  logic [15:0]   hold_data;
  logic          any_full, out_avail, out_last, wr, issue;
  logic [15:0]   out_data;

  always_comb begin
    any_full  = if_fifo_full || disp_fifo_full;
    out_avail = hold_valid || pend;
    out_data  = hold_valid ? hold_data : {u8_neg, u8_pos};
    out_last  = hold_valid ? hold_last : pend_last;
    wr        = out_avail && !any_full;
    issue     = active && (!out_avail || wr);
    transfer_addr   = cnt;
    wen_mem_zero    = issue;
    if_fifo_wr_en   = wr;
    if_fifo_data    = out_data;
    disp_fifo_wr_en = wr;
    disp_fifo_data  = disp_neg ? out_data[15:8] : out_data[7:0];
    busy      = active || out_avail;
    fifo_hold = out_avail && any_full;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cnt <= '0; pend <= 1'b0; pend_last <= 1'b0;
      hold_valid <= 1'b0; hold_last <= 1'b0; hold_data <= '0;
      mem_select <= 1'b0; mem_select_fifo <= 1'b1; done_transfer <= 1'b0;
    end else begin
      done_transfer <= wr && out_last;
      if (done_frame_gen && !busy) begin
        mem_select      <= ~mem_select;
        mem_select_fifo <= mem_select;
        active          <= 1'b1;
        cnt             <= '0;
      end
      pend      <= issue;
      pend_last <= issue && (cnt == AW'(DEPTH - 1));
      if (issue) begin
        cnt <= cnt + 1'b1;
        if (cnt == AW'(DEPTH - 1)) active <= 1'b0;
      end
      if (out_avail && !wr) begin
        hold_valid <= 1'b1;
        hold_data  <= out_data;
        hold_last  <= out_last;
      end else if (wr) begin
        hold_valid <= 1'b0;
      end
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    if_fifo_wr_en |-> !if_fifo_full);
  a_done_only_idle: assert property (@(posedge clk) disable iff (!rst_n)
    done_frame_gen |-> !busy) else $error("memory_control_unit: frame done while busy");
endmodule

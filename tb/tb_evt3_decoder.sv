// tb_evt3_decoder: drives the decoder / control unit from a modelled
// show-ahead FIFO with random gaps (so it must wait in HOLD_FIFO) and checks:
//  - every in-range pixel event appears once, in order, with the right x, y,
//    polarity and 24-bit timestamp, for single X words and for 32-bit
//    vectors (only set bits are visited), out-of-range and unknown words
//    are dropped;
//  - each write follows a read of the same coordinates one cycle earlier,
//    and a full 32-bit vector takes 2 cycles per event plus 2 cycles at
//    each of the two chunk boundaries (66 cycles from first to last write);
//  - constant-event mode closes frames after the expected event words, and
//    waits while xfer_busy is high;
//  - constant-time mode closes frames every threshold cycles even with no
//    input.
module tb_evt3_decoder;
  import homi_pkg::*;
  import homi_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [15:0] fifo_data; logic fifo_empty, fifo_rd_enable;
  acc_mode_e acc_mode; logic [31:0] threshold;
  logic [23:0] timestamp; logic [10:0] x, y;
  logic en_agen, en_pos_add, en_neg_add, wen_pos, wen_neg, done_frame_gen, xfer_busy;
  logic fifo_hold, frame_stall, vect_event; logic [31:0] frame_events;
  always #2.5 clk = ~clk;

  evt3_decoder dut (.*);

  typedef struct { int x, y, p, t; } ev_t;
  ev_t exp_q[$];
  int  bounds[$];
  int  total = 0, in_frame = 0, thr_model = 37;
  int  checks = 0, failures = 0, written = 0, holds = 0, stalls = 0, dones = 0;
  evt3_enc enc = new();
  logic [15:0] q[$];
  bit gap;

  function void close_check();
    if (in_frame >= thr_model) begin bounds.push_back(total); in_frame = 0; end
  endfunction
  function void add_ev(int xx, int yy, int p, int t);
    enc.event_x(xx, yy, 1'(p), t);
    if (xx < 1280 && yy < 720) begin exp_q.push_back('{xx, yy, p, t}); total++; in_frame++; end
    close_check();
  endfunction
  function void add_vec(int bx, int yy, int p, int t, bit [31:0] m);
    enc.vector(bx, yy, 1'(p), t, m);
    for (int c = 0; c < 3; c++) begin
      for (int b = 0; b < ((c == 2) ? 8 : 12); b++)
        if (m[c*12 + b] && bx + c*12 + b < 1280) begin
          exp_q.push_back('{bx + c*12 + b, yy, p, t}); total++; in_frame++;
        end
      close_check();
    end
  endfunction

  // FIFO model
  assign fifo_empty = (q.size() == 0) || gap;
  assign fifo_data  = (q.size() != 0) ? q[0] : 16'h0;
  always @(posedge clk) begin
    if (fifo_rd_enable) begin
      checks++;
      if (fifo_empty) begin failures++; $display("pop while empty"); end
      else void'(q.pop_front());
    end
    gap <= ($urandom_range(0, 9) == 0);
  end

  // event checker
  logic [10:0] rd_x, rd_y; logic rd_v;
  int vec_first = -1, cyc = 0, fullvec_span = -1;
  always @(posedge clk) begin
    cyc++;
    if (fifo_hold) holds++;
    if (frame_stall) stalls++;
    rd_v <= en_agen; rd_x <= x; rd_y <= y;
    if (wen_pos || wen_neg) begin
      ev_t e;
      checks++;
      if (!rd_v || rd_x !== x || rd_y !== y) begin failures++; $display("write without matching read"); end
      if (exp_q.size() == 0) begin failures++; $display("unexpected event"); end
      else begin
        e = exp_q.pop_front();
        checks++;
        if (int'(x) != e.x || int'(y) != e.y || int'(wen_pos) != e.p || int'(timestamp) != e.t) begin
          failures++;
          if (failures < 6) $display("event %0d: got x=%0d y=%0d p=%0d t=%h exp x=%0d y=%0d p=%0d t=%h",
                                     written, x, y, wen_pos, timestamp, e.x, e.y, e.p, e.t);
        end
      end
      written++;
    end
    if (done_frame_gen) begin
      dones++;
      if (acc_mode == ACC_CONST_EVENT) begin
        checks++;
        if (bounds.size() == 0 || bounds[0] != written) begin
          failures++; $display("frame closed after %0d events, expected %0d", written, bounds.size() ? bounds[0] : -1);
        end
        if (bounds.size()) void'(bounds.pop_front());
      end
    end
  end

  // latency of one full 32-pixel vector (no FIFO gaps during it)
  int vstart = -1, vend = -1, vcount = 0;
  logic measure = 0;
  always @(posedge clk) if (measure && vect_event) begin
    if (vcount == 0) vstart = cyc;
    vcount++;
    if (vcount == 32) vend = cyc;
  end

  initial begin
    acc_mode = ACC_CONST_EVENT; threshold = 37; xfer_busy = 0; gap = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // measure a full vector without gaps
    add_vec(64, 10, 1, 24'h010203, 32'hFFFF_FFFF);
    force gap = 0;
    measure = 1;
    q = enc.words; enc.words.delete();
    wait (q.size() == 0);
    repeat (80) @(posedge clk);
    measure = 0;
    release gap;
    checks++;
    if (vcount != 32 || vend - vstart != 66) begin failures++; $display("vector: %0d events in %0d cycles", vcount, vend - vstart); end
    // random traffic
    for (int i = 0; i < 600; i++) begin
      int t = 24'h010203 + i * 977;
      case ($urandom_range(0, 5))
        0, 1, 2: add_ev($urandom_range(0, 1279), $urandom_range(0, 719), $urandom_range(0, 1), t);
        3: add_vec(32 * $urandom_range(0, 39), $urandom_range(0, 719), $urandom_range(0, 1), t, $urandom);
        4: add_ev($urandom_range(1280, 2047), $urandom_range(0, 719), 1, t);   // out of range
        default: enc.other(16'hA123);                                          // ignored type
      endcase
    end
    // a vector crossing x = 1280
    add_vec(1270, 5, 0, 24'hFFFFFF, 32'hFFFF_FFFF);
    q = {q, enc.words}; enc.words.delete();
    // busy transfer now and then
    fork
      begin
        while (q.size() != 0) begin
          @(posedge clk);
          xfer_busy <= ($urandom_range(0, 3) == 0) ? ~xfer_busy : xfer_busy;
        end
        xfer_busy <= 0;
      end
    join
    repeat (100) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d events missing", exp_q.size()); end
    checks++; if (holds == 0) begin failures++; $display("no HOLD_FIFO"); end
    checks++; if (stalls == 0) begin failures++; $display("no frame stall"); end
    // constant-time mode
    acc_mode = ACC_CONST_TIME; threshold = 300;
    begin
      int tdone[$];
      wait (done_frame_gen); @(negedge clk);
      for (int c = 0; c < 1300; c++) begin @(negedge clk); if (done_frame_gen) tdone.push_back(cyc); end
      checks++;
      if (tdone.size() < 3) begin failures++; $display("time mode: %0d frames", tdone.size()); end
      for (int k = 1; k < tdone.size(); k++) begin
        checks++;
        if (tdone[k] - tdone[k-1] < 300 || tdone[k] - tdone[k-1] > 304) begin
          failures++; $display("time mode: frame period %0d", tdone[k] - tdone[k-1]);
        end
      end
    end
    $display("events=%0d frames=%0d holds=%0d stalls=%0d", written, dones, holds, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

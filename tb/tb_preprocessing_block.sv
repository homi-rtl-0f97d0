// tb_preprocessing_block: the whole pre-processing block at full size
// (1280x720 -> 128x128, 16384-word buffers). EVT 3.0 words from the
// testbench encoder (single events and 32-pixel vectors, with clustered
// bursts so pixels are hit repeatedly and timestamps that wrap) go through a
// modelled input FIFO; the frames written into the interface FIFO, which is
// randomly full, are compared pixel by pixel, both channels, with the
// independent reference model for each representation: binary, histogram,
// SLTS and SETS, in constant-event mode. The display FIFO data are checked
// against the chosen channel. Also counted: MCU holds, decoder FIFO holds,
// timestamp wraps and SETS resets, each of which must occur.
module tb_preprocessing_block;
  import homi_pkg::*;
  import homi_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  pp_cfg_t cfg;
  logic [15:0] fifo_data; logic fifo_empty, fifo_rd_enable;
  logic tbl_we = 0, tbl_sel_y = 0, tbl_m = 0; logic [10:0] tbl_idx = 0, tbl_b = 0;
  logic if_fifo_wr_en, if_fifo_full, disp_fifo_wr_en, disp_fifo_full;
  logic [15:0] if_fifo_data; logic [7:0] disp_fifo_data;
  logic done_frame_gen, done_transfer, dec_fifo_hold, dec_frame_stall, mcu_fifo_hold;
  logic vect_event, ts_wrap, sets_reset;
  always #2.5 clk = ~clk;

  preprocessing_block dut (.*);

  int checks = 0, failures = 0;
  int n_mcu_hold = 0, n_dec_hold = 0, n_wrap = 0, n_sets_reset = 0, n_vect = 0, n_frames_out = 0;
  logic [15:0] q[$];
  bit gap = 0;
  stim s;

  assign fifo_empty = (q.size() == 0) || gap;
  assign fifo_data  = (q.size() != 0) ? q[0] : 16'h0;
  always @(posedge clk) begin
    if (fifo_rd_enable && !fifo_empty) void'(q.pop_front());
    gap <= ($urandom_range(0, 15) == 0);
  end
  always @(negedge clk) begin
    if_fifo_full   = ($urandom_range(0, 9) == 0);
    disp_fifo_full = ($urandom_range(0, 29) == 0);
  end

  // capture and compare frames
  int pix = 0, fr = 0;
  always @(posedge clk) if (rst_n) begin
    if (mcu_fifo_hold) n_mcu_hold++;
    if (dec_fifo_hold) n_dec_hold++;
    if (ts_wrap) n_wrap++;
    if (sets_reset) n_sets_reset++;
    if (vect_event) n_vect++;
    if (if_fifo_wr_en) begin
      int ep, en;
      checks++;
      if (s.m.done_pos.size() == 0) begin
        failures++; if (failures < 5) $display("frame word with no expected frame");
      end else begin
        ep = sat8(s.m.done_pos[0][pix], cfg.scale, cfg.shift);
        en = sat8(s.m.done_neg[0][pix], cfg.scale, cfg.shift);
        if (if_fifo_data !== {8'(en), 8'(ep)} || disp_fifo_data !== (cfg.disp_neg ? 8'(en) : 8'(ep))) begin
          failures++;
          if (failures < 8) $display("mode %0d frame %0d pixel %0d: got %h exp %02h%02h", cfg.rep_mode, fr, pix, if_fifo_data, en, ep);
        end
      end
      pix++;
      if (pix == NPIX) begin
        pix = 0; fr++; n_frames_out++;
        if (s.m.done_pos.size()) begin void'(s.m.done_pos.pop_front()); void'(s.m.done_neg.pop_front()); end
      end
    end
  end

  int t = 0;
  task automatic gen_frame_events(int thr);
    int target = s.m.nframes + 1;
    while (s.m.nframes < target) begin
      int cx = $urandom_range(0, 1200), cy = $urandom_range(0, 700);
      case ($urandom_range(0, 3))
        0: begin   // burst near one spot, small time steps
          for (int k = 0; k < 20 && s.m.nframes < target; k++) begin
            t = (t + $urandom_range(0, 40000)) & 24'hFFFFFF;
            s.ev(cx + $urandom_range(0, 15), cy + $urandom_range(0, 7), 1'($urandom_range(0, 1)), t);
          end
        end
        1: begin
          t = (t + $urandom_range(0, 3000000)) & 24'hFFFFFF;
          s.vec(32 * $urandom_range(0, 39), cy, 1'($urandom_range(0, 1)), t, $urandom);
        end
        default: begin
          t = (t + $urandom_range(0, 200000)) & 24'hFFFFFF;
          s.ev($urandom_range(0, 1279), $urandom_range(0, 719), 1'($urandom_range(0, 1)), t);
        end
      endcase
    end
  endtask

  initial begin
    int thr = 3000;
    cfg = '{rep_mode: REP_HISTOGRAM, acc_mode: ACC_CONST_EVENT, threshold: 32'(thr),
            scale: 8'd1, shift: 4'd0, disp_neg: 1'b0};
    s = new(int'(REP_HISTOGRAM), thr);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      int fr_target;
      @(negedge clk);
      cfg.rep_mode = rep_mode_e'(mode); s.m.mode = mode;
      cfg.scale = (mode == 1) ? 8'd8 : 8'd1; cfg.shift = (mode == 1) ? 4'd1 : 4'd0;
      cfg.disp_neg = 1'(mode & 1);
      gen_frame_events(thr); gen_frame_events(thr);
      fr_target = n_frames_out + 2;
      q = {q, s.enc.words}; s.enc.words.delete();
      while (n_frames_out < fr_target) @(posedge clk);
      repeat (10) @(posedge clk);
    end
    checks++; if (n_frames_out != 8) begin failures++; $display("frames out %0d", n_frames_out); end
    checks++; if (n_mcu_hold == 0) begin failures++; $display("no MCU hold"); end
    checks++; if (n_dec_hold == 0) begin failures++; $display("no decoder hold"); end
    checks++; if (n_wrap == 0) begin failures++; $display("no timestamp wrap"); end
    checks++; if (n_sets_reset == 0) begin failures++; $display("no SETS reset"); end
    checks++; if (n_vect == 0) begin failures++; $display("no vector events"); end
    $display("frames=%0d mcu_holds=%0d dec_holds=%0d wraps=%0d sets_resets=%0d vect=%0d",
             n_frames_out, n_mcu_hold, n_dec_hold, n_wrap, n_sets_reset, n_vect);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000; failures++;
    $display("watchdog: frames out %0d", n_frames_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_homi_workloads: runs the whole design, at its default sizes and real
// clock periods, on two operating points of the platform that the main
// end-to-end test does not cover.
//
// 1. Original DVS Gesture geometry (128x128 input). The x and y mapping
//    tables are rewritten through the table port to the identity map
//    (m = 1, b = 0 for coordinates 0..127), and 128x128 events are
//    accumulated as SLTS frames in constant-event mode at the lower bound of
//    16,384 events per frame. Every global-memory word is compared with the
//    reference model using the identity map.
// 2. Constant-time mode at the maximum acquisition rate, 12,200 frames/s:
//    a frame period of 16,393 cycles of the 5 ns clock (81.97 us), just above
//    the 16,386-cycle transfer. A fast accelerator model (100 cycles) and an
//    always-ready DMA output are used, frames go to the DMA as well. The
//    first two periods must be exact (no stall). The loader needs 127.8 us
//    per frame, so the interface FIFO fills within a few frames; after that
//    the frame end must stall (stretch) and the steady period must settle at
//    the loader's pace. Frame words must stay binary throughout (apart from
//    counts a vector carried over from part 1 into the first binary frame).
module tb_homi_workloads;
  import homi_pkg::*;
  import homi_tb_pkg::*;

  logic clk_sensor = 0, clk_pp = 0, clk_acc = 0;
  logic rst_sensor_n = 0, rst_pp_n = 0, rst_acc_n = 0;
  always #3.75 clk_sensor = ~clk_sensor;
  always #2.5  clk_pp     = ~clk_pp;
  always #3.9  clk_acc    = ~clk_acc;

  logic s_axis_evt_tvalid, s_axis_evt_tready; logic [15:0] s_axis_evt_tdata;
  pp_cfg_t pp_cfg;
  logic tbl_we, tbl_sel_y, tbl_m; logic [10:0] tbl_idx, tbl_b;
  logic multi_channel, single_neg, gm_we, accel_en, accel_done;
  logic [13:0] gm_addr; logic [15:0] gm_wdata, accel_result;
  tx_sel_e tx_sel;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast; logic [15:0] m_axis_tdata; logic [1:0] m_axis_tuser;
  logic [31:0] raw_drops;
  logic done_frame_gen, done_transfer, dec_fifo_hold, dec_frame_stall, mcu_fifo_hold;
  logic vect_event, ts_wrap, sets_reset, acc_wait, frame_loaded, acc_running;

  homi_top dut (.*);

  raman_model #(.LATENCY(100)) u_acc (
    .clk(clk_acc), .gm_we, .gm_addr, .gm_wdata, .accel_en(accel_en && rst_acc_n), .accel_done,
    .accel_result, .running(acc_running));

  int checks = 0, failures = 0;
  task automatic fail(string m);
    failures++;
    if (failures < 12) $display("FAIL @%0t: %s", $time, m);
  endtask

  // sensor stream
  logic [15:0] wq[$];
  always @(posedge clk_sensor) if (rst_sensor_n && s_axis_evt_tvalid && s_axis_evt_tready) void'(wq.pop_front());
  always @(negedge clk_sensor) begin
    s_axis_evt_tvalid = (wq.size() != 0);
    s_axis_evt_tdata  = (wq.size() != 0) ? wq[0] : 16'h0;
  end
  assign m_axis_tready = 1'b1;

  // expected frames (part 1)
  stim s;
  int exp_pos[$][], exp_neg[$][];
  bit part2 = 0;
  // SLTS counts of a vector that straddled the last part-1 frame end stay in
  // the accumulating buffer and appear, scaled, in the first part-2 frame
  int left_pos[NPIX], left_neg[NPIX];
  int first_p2 = -1;
  function automatic bit bin_ok(int v, int left);
    return v == 0 || v == 255 || (loads == first_p2 && v == sat8(left, pp_cfg.scale, pp_cfg.shift));
  endfunction
  int gm_idx = 0, loads = 0, n_frame_beats = 0;
  always @(posedge clk_acc) if (rst_acc_n) begin
    if (gm_we) begin
      checks++;
      if (part2) begin
        if (!(bin_ok(gm_wdata[7:0], left_pos[gm_addr]) && bin_ok(gm_wdata[15:8], left_neg[gm_addr])))
          fail($sformatf("binary word %h", gm_wdata));
      end else if (exp_pos.size() == 0) fail("memory write with no expected frame");
      else begin
        logic [15:0] e;
        e = {8'(sat8(exp_neg[0][gm_idx], pp_cfg.scale, pp_cfg.shift)), 8'(sat8(exp_pos[0][gm_idx], pp_cfg.scale, pp_cfg.shift))};
        if (gm_addr != 14'(gm_idx) || gm_wdata !== e) fail($sformatf("gm word %0d: %h exp %h", gm_idx, gm_wdata, e));
      end
      gm_idx++;
    end
    if (accel_en) begin
      checks++;
      if (gm_idx != NPIX) fail($sformatf("enable after %0d words", gm_idx));
      gm_idx = 0; loads++;
      if (!part2 && exp_pos.size()) begin void'(exp_pos.pop_front()); void'(exp_neg.pop_front()); end
    end
  end
  always @(posedge clk_sensor) if (rst_sensor_n && m_axis_tvalid && m_axis_tready && m_axis_tuser == 2'(TX_FRAME)) n_frame_beats++;

  // frame periods in 5 ns cycles
  longint cyc = 0, last_done = -1;
  longint periods[$];
  int n_stall = 0;
  always @(posedge clk_pp) begin
    cyc++;
    if (rst_pp_n && dec_frame_stall) n_stall++;
    if (rst_pp_n && done_frame_gen) begin
      if (last_done >= 0 && part2) periods.push_back(cyc - last_done);
      last_done = cyc;
    end
  end

  task automatic write_table(bit sel_y, int idx, bit m, int b);
    @(negedge clk_pp);
    tbl_we = 1; tbl_sel_y = sel_y; tbl_idx = 11'(idx); tbl_m = m; tbl_b = 11'(b);
    @(negedge clk_pp);
    tbl_we = 0;
  endtask

  initial begin
    int t = 0;
    s_axis_evt_tvalid = 0; s_axis_evt_tdata = 0;
    tbl_we = 0; tbl_sel_y = 0; tbl_idx = 0; tbl_m = 0; tbl_b = 0;
    pp_cfg = '{rep_mode: REP_SLTS, acc_mode: ACC_CONST_EVENT, threshold: 32'd16384,
               scale: 8'd16, shift: 4'd0, disp_neg: 1'b0};
    multi_channel = 1; single_neg = 0; tx_sel = TX_CLASS;
    s = new(int'(REP_SLTS), 16384);
    s.m.ident = 1;
    #40 rst_sensor_n = 1; rst_pp_n = 1; rst_acc_n = 1;

    // ---- part 1: 128x128 input through identity tables ----
    for (int i = 0; i < 128; i++) begin write_table(0, i, 1, 0); write_table(1, i, 1, 0); end
    while (s.m.nframes < 2) begin
      int y = $urandom_range(0, 127);
      if ($urandom_range(0, 3) == 0) begin
        t = (t + $urandom_range(0, 200000)) & 24'hFFFFFF;
        s.vec(32 * $urandom_range(0, 3), y, 1'($urandom_range(0, 1)), t, $urandom);
      end else begin
        t = (t + $urandom_range(0, 20000)) & 24'hFFFFFF;
        s.ev($urandom_range(0, 127), y, 1'($urandom_range(0, 1)), t);
      end
    end
    while (s.m.done_pos.size()) begin
      exp_pos.push_back(s.m.done_pos.pop_front()); exp_neg.push_back(s.m.done_neg.pop_front());
    end
    wq = s.enc.words; s.enc.words.delete();
    begin
      int guard = 0;
      while ((loads < 2 || exp_pos.size() != 0) && guard < 2000000) begin @(posedge clk_acc); guard++; end
    end
    checks++; if (loads != 2 || exp_pos.size() != 0) fail($sformatf("128x128 part: %0d frames loaded", loads));
    $display("128x128 SLTS, 16384-event frames: %0d frames checked", loads);
    wait (wq.size() == 0 && acc_running == 0 && !acc_wait);
    repeat (100) @(posedge clk_pp);

    // ---- part 2: constant-time mode at 12,200 frames/s ----
    foreach (left_pos[i]) begin left_pos[i] = s.m.pos[i]; left_neg[i] = s.m.neg[i]; end
    first_p2 = loads;
    @(negedge clk_pp);
    part2 = 1;
    pp_cfg.rep_mode = REP_BINARY; pp_cfg.acc_mode = ACC_CONST_TIME; pp_cfg.threshold = 16393;
    @(negedge clk_sensor); tx_sel = TX_FRAME;
    n_stall = 0; last_done = -1;
    for (int i = 0; i < 70000; i++) begin
      t = (t + 3) & 24'hFFFFFF;
      s.enc.event_x($urandom_range(0, 1279), $urandom_range(0, 719), 1'($urandom_range(0, 1)), t);
    end
    wq = s.enc.words; s.enc.words.delete();
    wait (periods.size() >= 10);
    wq.delete();
    begin
      string ps = "";
      foreach (periods[k]) ps = {ps, $sformatf(" %0d", periods[k])};
      $display("constant-time frame periods (5 ns cycles):%s", ps);
    end
    for (int k = 0; k < 2; k++) begin
      checks++;
      if (periods[k] < 16393 || periods[k] > 16393 + 8) fail($sformatf("period %0d = %0d, expected 16393 without stall", k, periods[k]));
    end
    checks++; if (n_stall == 0) fail("loader never limited the frame rate");
    // steady state: one frame per loader pass (16384 x 7.8 ns + accelerator), within 10%
    checks++;
    if (periods[9] < 25565 * 9 / 10 || periods[9] > 25565 * 11 / 10 + 300)
      fail($sformatf("steady period %0d cycles, expected about %0d", periods[9], 25565 + 156));
    checks++; if (n_frame_beats == 0) fail("no frame beats on the DMA stream");
    $display("frame-end stall cycles: %0d, frame beats: %0d", n_stall, n_frame_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog: loads=%0d periods=%0d", loads, periods.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

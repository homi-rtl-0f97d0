// tb_homi_top: end-to-end test of the whole programmable-logic design at its
// default sizes (1280x720 sensor, 128x128 frames, 16384-deep interface FIFO),
// with the three clocks of the platform (7.5, 5 and 7.8 ns) and a
// behavioural accelerator (raman_model) that returns a checksum of its
// global memory after a fixed latency.
//
// Phase A, the main configuration: SETS, constant-event mode with 20000
//   events per frame, dual-channel layout, DMA sending frames and results.
//   Every global-memory write is compared with the reference model, every
//   frame beat on the DMA stream with the display channel of the expected
//   frame, and every result beat with the checksum of the expected memory.
//   The load latency (frame done -> accelerator enable) is checked against
//   one 7.8 ns cycle per pixel (about 0.128 ms).
// Phase B: histogram, 3000 events per frame, single-channel (negative)
//   layout, DMA sending raw sensor words: raw beats must be the sensor words
//   in order, with drops counted.
// Phase C: binary frames in constant-time mode (25000 cycles per frame):
//   every pixel is 0 or 255 and the pixels set over all frames are exactly
//   the pixels that received events; frame periods are checked.
// Each mechanism (FIFO hold in the decoder, frame stall, MCU hold on a full
// FIFO, vector events, timestamp wrap, SETS reset, accelerator wait, sensor
// back-pressure, raw drops, each mode and layout) must occur at least once.
module tb_homi_top;
  import homi_pkg::*;
  import homi_tb_pkg::*;

  logic clk_sensor = 0, clk_pp = 0, clk_acc = 0;
  logic rst_sensor_n = 0, rst_pp_n = 0, rst_acc_n = 0;
  always #3.75 clk_sensor = ~clk_sensor;
  always #2.5  clk_pp     = ~clk_pp;
  always #3.9  clk_acc    = ~clk_acc;

  logic s_axis_evt_tvalid, s_axis_evt_tready; logic [15:0] s_axis_evt_tdata;
  pp_cfg_t pp_cfg;
  logic tbl_we = 0, tbl_sel_y = 0, tbl_m = 0; logic [10:0] tbl_idx = 0, tbl_b = 0;
  logic multi_channel, single_neg, gm_we, accel_en, accel_done;
  logic [13:0] gm_addr; logic [15:0] gm_wdata, accel_result;
  tx_sel_e tx_sel;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast; logic [15:0] m_axis_tdata; logic [1:0] m_axis_tuser;
  logic [31:0] raw_drops;
  logic done_frame_gen, done_transfer, dec_fifo_hold, dec_frame_stall, mcu_fifo_hold;
  logic vect_event, ts_wrap, sets_reset, acc_wait, frame_loaded, acc_running;

  homi_top dut (.*);

  raman_model #(.LATENCY(20000)) u_acc (
    .clk(clk_acc), .gm_we, .gm_addr, .gm_wdata, .accel_en(accel_en && rst_acc_n), .accel_done, .accel_result,
    .running(acc_running));

  int checks = 0, failures = 0;
  task automatic fail(string m);
    failures++;
    if (failures < 12) $display("FAIL @%0t: %s", $time, m);
  endtask

  // ---------------- stimulus ----------------
  stim s;
  logic [15:0] wq[$];        // words still to send
  logic [15:0] sent[$];      // words accepted, for the raw check
  int t = 0;
  int n_backpressure = 0;
  always @(posedge clk_sensor) if (rst_sensor_n) begin
    if (s_axis_evt_tvalid && s_axis_evt_tready) begin sent.push_back(wq[0]); void'(wq.pop_front()); end
    if (s_axis_evt_tvalid && !s_axis_evt_tready) n_backpressure++;
  end
  always @(negedge clk_sensor) begin
    s_axis_evt_tvalid = (wq.size() != 0) && ($urandom_range(0, 9) != 0);
    s_axis_evt_tdata  = (wq.size() != 0) ? wq[0] : 16'h0;
    m_axis_tready     = ($urandom_range(0, 3) != 0);
  end

  task automatic gen_frame_events();
    int target = s.m.nframes + 1;
    while (s.m.nframes < target) begin
      int cx = $urandom_range(0, 1200), cy = $urandom_range(0, 700);
      case ($urandom_range(0, 3))
        0: for (int k = 0; k < 20 && s.m.nframes < target; k++) begin
             t = (t + $urandom_range(0, 30000)) & 24'hFFFFFF;
             s.ev(cx + $urandom_range(0, 15), cy + $urandom_range(0, 7), 1'($urandom_range(0, 1)), t);
           end
        1: begin
             t = (t + $urandom_range(0, 400000)) & 24'hFFFFFF;
             s.vec(32 * $urandom_range(0, 39), cy, 1'($urandom_range(0, 1)), t, $urandom);
           end
        default: begin
             t = (t + $urandom_range(0, 100000)) & 24'hFFFFFF;
             s.ev($urandom_range(0, 1279), $urandom_range(0, 719), 1'($urandom_range(0, 1)), t);
           end
      endcase
    end
  endtask

  // ---------------- expected frames in the accelerator's memory ----------------
  int exp_pos[$][], exp_neg[$][];   // scaled expected frames, in order
  int disp_q[$][];                   // expected display frames (when sent)
  int shadow[NPIX];                  // expected global memory
  int res_q[$];                      // expected results (when sent)
  bit phase_c = 0;
  bit send_frames = 0, send_results = 0;
  int gm_idx = 0, frames_loaded = 0;
  bit seen_set[NPIX];
  int left_pos[NPIX], left_neg[NPIX];   // phase B counts carried into phase C
  int first_c_frame = -1;
  function automatic bit bin_ok(int v, int left, int f);
    return v == 0 || v == 255 || (f == first_c_frame && v == sat8(left, 1, 0));
  endfunction

  function automatic void take_model_frames();
    while (s.m.done_pos.size()) begin
      int fp[], fn[], fd[];
      fp = new[NPIX]; fn = new[NPIX]; fd = new[NPIX];
      foreach (fp[i]) begin
        fp[i] = sat8(s.m.done_pos[0][i], pp_cfg.scale, pp_cfg.shift);
        fn[i] = sat8(s.m.done_neg[0][i], pp_cfg.scale, pp_cfg.shift);
        fd[i] = pp_cfg.disp_neg ? fn[i] : fp[i];
      end
      void'(s.m.done_pos.pop_front()); void'(s.m.done_neg.pop_front());
      exp_pos.push_back(fp); exp_neg.push_back(fn);
      if (send_frames) disp_q.push_back(fd);
    end
  endfunction

  // global-memory writes
  int cur_mc, cur_neg;
  always @(posedge clk_acc) if (rst_acc_n) begin
    if (gm_we) begin
      checks++;
      if (phase_c) begin
        // binary: each byte 0 or 255; remember which pixels were set
        if (!(bin_ok(gm_wdata[7:0], left_pos[gm_addr], frames_loaded) && bin_ok(gm_wdata[15:8], left_neg[gm_addr], frames_loaded)))
          fail($sformatf("binary pixel %h at %0d (frame %0d)", gm_wdata, gm_addr, frames_loaded));
        if (gm_wdata[7:0] != 0 || gm_wdata[15:8] != 0) seen_set[gm_addr] = 1;
      end else if (exp_pos.size() == 0) fail("memory write with no expected frame");
      else begin
        logic [15:0] e;
        if (multi_channel) e = {8'(exp_neg[0][gm_idx]), 8'(exp_pos[0][gm_idx])};
        else if (single_neg) e = {8'(exp_neg[0][2*gm_idx+1]), 8'(exp_neg[0][2*gm_idx])};
        else e = {8'(exp_pos[0][2*gm_idx+1]), 8'(exp_pos[0][2*gm_idx])};
        if (gm_addr != 14'(gm_idx) || gm_wdata !== e) fail($sformatf("gm write %0d: addr %0d data %h exp %h", gm_idx, gm_addr, gm_wdata, e));
        shadow[gm_idx] = int'(e);
      end
      gm_idx++;
    end
    if (accel_en) begin
      int sum;
      sum = 0;
      checks++;
      if (gm_idx != (multi_channel ? NPIX : NPIX / 2)) fail($sformatf("enable after %0d writes", gm_idx));
      gm_idx = 0; frames_loaded++;
      if (!phase_c && exp_pos.size()) begin void'(exp_pos.pop_front()); void'(exp_neg.pop_front()); end
      foreach (shadow[i]) sum += shadow[i];
      if (send_results) res_q.push_back(sum & 16'hFFFF);
    end
  end

  // DMA output
  int fpix = 0, n_frame_beats = 0, n_res_beats = 0, n_raw_beats = 0, raw_ptr = 0;
  always @(posedge clk_sensor) if (rst_sensor_n && m_axis_tvalid && m_axis_tready) begin
    checks++;
    case (m_axis_tuser)
      2'(TX_FRAME): begin
        n_frame_beats++;
        if (disp_q.size() == 0) fail("unexpected frame beat");
        else begin
          if (m_axis_tdata !== {8'(disp_q[0][fpix+1]), 8'(disp_q[0][fpix])})
            fail($sformatf("frame beat pixel %0d: %h exp %02h%02h", fpix, m_axis_tdata, disp_q[0][fpix+1], disp_q[0][fpix]));
          if (m_axis_tlast !== (fpix == NPIX - 2)) fail("frame tlast");
          fpix += 2;
          if (fpix == NPIX) begin fpix = 0; void'(disp_q.pop_front()); end
        end
      end
      2'(TX_CLASS): begin
        n_res_beats++;
        if (res_q.size() == 0) fail("unexpected result beat");
        else begin
          if (m_axis_tdata !== 16'(res_q[0]) || !m_axis_tlast) fail($sformatf("result %h exp %h", m_axis_tdata, 16'(res_q[0])));
          void'(res_q.pop_front());
        end
      end
      default: begin
        n_raw_beats++;
        while (raw_ptr < sent.size() && sent[raw_ptr] !== m_axis_tdata) raw_ptr++;
        if (raw_ptr >= sent.size()) fail("raw beat not in the sensor stream");
        else raw_ptr++;
      end
    endcase
  end

  // mechanism counters and latency
  int n_dec_hold = 0, n_stall = 0, n_mcu_hold = 0, n_vect = 0, n_wrap = 0, n_sets_reset = 0, n_wait = 0;
  int n_frames = 0;
  realtime t_done[$], t_load_start = 0;
  always @(posedge clk_pp) if (rst_pp_n) begin
    if (dec_fifo_hold) n_dec_hold++;
    if (dec_frame_stall) n_stall++;
    if (mcu_fifo_hold) n_mcu_hold++;
    if (vect_event) n_vect++;
    if (ts_wrap) n_wrap++;
    if (sets_reset) n_sets_reset++;
    if (done_frame_gen) begin n_frames++; t_done.push_back($realtime); end
  end
  always @(posedge clk_acc) if (acc_wait) n_wait++;

  task automatic wait_all_out();
    int guard = 0;
    while ((wq.size() != 0 || exp_pos.size() != 0 || disp_q.size() != 0 || res_q.size() != 0 || acc_wait || acc_running) && guard < 4000000) begin
      @(posedge clk_pp); guard++;
      take_model_frames();
    end
    repeat (200) @(posedge clk_pp);
  endtask

  initial begin
    realtime load_lat;
    s = new(int'(REP_SETS), 20000);
    pp_cfg = '{rep_mode: REP_SETS, acc_mode: ACC_CONST_EVENT, threshold: 32'd20000,
               scale: 8'd8, shift: 4'd0, disp_neg: 1'b0};
    multi_channel = 1; single_neg = 0; tx_sel = TX_FRAME_CLASS;
    send_frames = 1; send_results = 1;
    foreach (shadow[i]) shadow[i] = 0;
    foreach (seen_set[i]) seen_set[i] = 0;
    s_axis_evt_tvalid = 0; s_axis_evt_tdata = 0; m_axis_tready = 1;
    #40 rst_sensor_n = 1; rst_pp_n = 1; rst_acc_n = 1;

    // ---- phase A ----
    gen_frame_events(); gen_frame_events();
    take_model_frames();
    wq = s.enc.words; s.enc.words.delete();
    // load latency of the first frame
    wait (done_frame_gen); t_load_start = $realtime;
    wait (accel_en); load_lat = $realtime - t_load_start;
    checks++;
    if (load_lat < 127.0e3 || load_lat > 135.0e3) fail($sformatf("load latency %0t", load_lat));
    $display("frame done -> accelerator enable: %0.1f us", load_lat / 1000.0);
    wait_all_out();
    $display("phase A: frames=%0d frame beats=%0d results=%0d", n_frames, n_frame_beats, n_res_beats);

    // ---- phase B ----
    pp_cfg.rep_mode = REP_HISTOGRAM; pp_cfg.threshold = 3000; pp_cfg.scale = 1; pp_cfg.disp_neg = 1;
    s.m.mode = int'(REP_HISTOGRAM); s.m.thr = 3000;
    @(posedge clk_acc); multi_channel = 0; single_neg = 1;
    @(posedge clk_sensor); tx_sel = TX_RAW; send_frames = 0; send_results = 0;
    repeat (4) gen_frame_events();
    take_model_frames();
    raw_ptr = sent.size();
    wq = {wq, s.enc.words}; s.enc.words.delete();
    wait_all_out();
    $display("phase B: frames=%0d raw beats=%0d drops=%0d", n_frames, n_raw_beats, raw_drops);

    // ---- phase C ----
    begin
      bit want[NPIX];
      int nf0, mism = 0;
      // a vector that straddles the last phase-B frame end leaves counts in
      // the accumulating buffer; they appear in the first phase-C frame
      foreach (want[i]) begin
        want[i] = (s.m.pos[i] != 0 || s.m.neg[i] != 0);
        left_pos[i] = s.m.pos[i]; left_neg[i] = s.m.neg[i];
      end
      first_c_frame = frames_loaded;
      phase_c = 1;
      @(posedge clk_acc); multi_channel = 1;
      @(posedge clk_pp);
      pp_cfg.rep_mode = REP_BINARY; pp_cfg.acc_mode = ACC_CONST_TIME; pp_cfg.threshold = 25000;
      nf0 = n_frames;
      for (int i = 0; i < 3000; i++) begin
        int xx = $urandom_range(0, 1279), yy = $urandom_range(0, 719);
        t = (t + 50) & 24'hFFFFFF;
        s.enc.event_x(xx, yy, 1'($urandom_range(0, 1)), t);
        want[map_addr(xx, yy)] = 1;
      end
      wq = {wq, s.enc.words}; s.enc.words.delete();
      while (wq.size() != 0) @(posedge clk_pp);
      // let two more frames close and reach the accelerator
      begin int f; f = frames_loaded; while (frames_loaded < f + 3) @(posedge clk_pp); end
      foreach (want[i]) if (want[i] != seen_set[i]) begin
        mism++;
        if (mism < 4) $display("pixel %0d: events %0d set %0d", i, want[i], seen_set[i]);
      end
      checks++; if (mism) fail($sformatf("binary frames: %0d pixels differ from the event set", mism));
      for (int k = nf0 + 1; k < t_done.size(); k++) begin
        checks++;
        if (t_done[k] - t_done[k-1] < 25000 * 5.0)
          fail($sformatf("time-mode frame period %0t", t_done[k] - t_done[k-1]));
      end
      $display("phase C: frames=%0d", n_frames - nf0);
    end

    // ---- mechanisms ----
    checks++; if (n_dec_hold == 0)     fail("decoder never waited on an empty FIFO");
    checks++; if (n_stall == 0)        fail("frame end never waited for a transfer");
    checks++; if (n_mcu_hold == 0)     fail("memory control never held on a full FIFO");
    checks++; if (n_vect == 0)         fail("no vector events");
    checks++; if (n_wrap == 0)         fail("no timestamp wrap");
    checks++; if (n_sets_reset == 0)   fail("no SETS reset");
    checks++; if (n_wait == 0)         fail("interface never waited for the accelerator");
    checks++; if (n_backpressure == 0) fail("input FIFO never back-pressured the sensor");
    checks++; if (raw_drops == 0)      fail("no raw drops");
    checks++; if (n_frame_beats == 0 || n_res_beats == 0 || n_raw_beats == 0) fail("a DMA source never sent");
    $display("holds: decoder=%0d stall=%0d mcu=%0d | vect=%0d wrap=%0d sets_reset=%0d acc_wait=%0d backpressure=%0d raw_drops=%0d",
             n_dec_hold, n_stall, n_mcu_hold, n_vect, n_wrap, n_sets_reset, n_wait, n_backpressure, raw_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #60000000;
    failures++;
    $display("watchdog: frames=%0d", n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

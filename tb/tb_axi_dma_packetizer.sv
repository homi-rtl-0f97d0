// tb_axi_dma_packetizer: drives raw words, frame pixels and results into the
// packetizer under each select setting with a randomly stalling DMA, and
// checks every output beat against a reference of what that setting should
// send: raw packets of RAW_PKT_LEN words ending in tlast, frames as pixel
// pairs ending in tlast on the frame's last beat, single-beat results, tuser
// naming the source, data held while stalled, unselected sources drained,
// and raw words lost to a stalled output counted in raw_drops.
module tb_axi_dma_packetizer;
  import homi_pkg::*;
  localparam int RL = 8, FPX = 16;
  logic clk = 0, rst_n = 0;
  tx_sel_e sel;
  logic raw_valid; logic [15:0] raw_data;
  logic frm_valid, frm_ready; logic [15:0] frm_data;
  logic cls_valid, cls_ready; logic [15:0] cls_data;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast; logic [15:0] m_axis_tdata; logic [1:0] m_axis_tuser;
  logic [31:0] raw_drops;
  always #3.75 clk = ~clk;

  axi_dma_packetizer #(.RAW_PKT_LEN(RL), .FRAME_PIXELS(FPX)) dut (.*);

  int checks = 0, failures = 0;
  // sources
  logic [7:0]  fq[$];   // pending frame pixels
  logic [15:0] cq[$];   // pending results
  int fcount = 0, ccount = 0, rcount = 0, pushed = 0;
  // source outputs follow the queues half a cycle after each edge
  always @(clk) begin
    #0.5;
    frm_valid = fq.size() >= 2;
    frm_data  = frm_valid ? {fq[1], fq[0]} : 16'h0;
    cls_valid = cq.size() != 0;
    cls_data  = cls_valid ? cq[0] : 16'h0;
  end

  // expected output beats
  typedef struct { logic [15:0] d; logic l; logic [1:0] u; } beat_t;
  beat_t exp_q[$];
  int fpix_sent = 0;
  int raw_in_pkt = 0;
  int n_raw_beats = 0, n_frame_beats = 0, n_cls_beats = 0, n_drained = 0;
  logic in_raw_pkt = 0;
  int drops_ref = 0;

  // reference of the source side, sampled at the same edge as the DUT
  always @(posedge clk) if (rst_n) begin
    if (frm_ready && frm_valid) begin
      if (sel == TX_FRAME || sel == TX_FRAME_CLASS) begin
        exp_q.push_back('{{fq[1], fq[0]}, (fpix_sent % FPX) == FPX - 2, 2'(TX_FRAME)});
      end else n_drained++;
      fpix_sent += 2;
      void'(fq.pop_front()); void'(fq.pop_front());
    end
    if (cls_ready && cls_valid) begin
      if (sel == TX_CLASS || sel == TX_FRAME_CLASS) exp_q.push_back('{cq[0], 1'b1, 2'(TX_CLASS)});
      else n_drained++;
      void'(cq.pop_front());
    end
  end

  // raw words: accepted when the output register can load
  always @(posedge clk) if (rst_n && raw_valid && sel == TX_RAW) begin
    if (!m_axis_tvalid || m_axis_tready) begin
      exp_q.push_back('{raw_data, raw_in_pkt == RL - 1, 2'(TX_RAW)});
      raw_in_pkt = (raw_in_pkt + 1) % RL;
    end else drops_ref++;
  end

  // output checker
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    beat_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected beat %h user %0d sel %0d t=%0t", m_axis_tdata, m_axis_tuser, sel, $time); end
    else begin
      e = exp_q.pop_front();
      if (m_axis_tdata !== e.d || m_axis_tlast !== e.l || m_axis_tuser !== e.u) begin
        failures++;
        if (failures < 8) $display("beat got %h/%b/%0d exp %h/%b/%0d", m_axis_tdata, m_axis_tlast, m_axis_tuser, e.d, e.l, e.u);
      end
      case (e.u) 2'(TX_RAW): n_raw_beats++; 2'(TX_FRAME): n_frame_beats++; default: n_cls_beats++; endcase
    end
  end

  always @(negedge clk) m_axis_tready = ($urandom_range(0, 3) != 0);

  task automatic run(tx_sel_e s, int cycles, bit raw);
    sel = s;
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      raw_valid = raw && ($urandom_range(0, 1) == 0);
      raw_data  = 16'($urandom);
      if (!raw) begin
        if ($urandom_range(0, 2) == 0 && fq.size() < 40) begin fq.push_back(8'($urandom)); pushed++; end
        if ($urandom_range(0, 40) == 0) cq.push_back(16'($urandom));
      end
    end
    raw_valid = 0;
    // complete the last frame and let the sources empty
    while (pushed % FPX != 0) begin fq.push_back(8'($urandom)); pushed++; end
    while (fq.size() != 0 || cq.size() != 0) @(negedge clk);
    // let the packet finish
    if (raw) while (raw_in_pkt != 0) begin raw_valid = 1; raw_data = 16'($urandom); @(negedge clk); end
    raw_valid = 0;
    repeat (200) @(negedge clk);
  endtask

  initial begin
    sel = TX_RAW; raw_valid = 0; raw_data = 0; m_axis_tready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    run(TX_RAW, 400, 1);
    run(TX_FRAME, FPX * 20, 0);
    run(TX_CLASS, 800, 0);
    run(TX_FRAME_CLASS, 1500, 0);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d beats not sent", exp_q.size()); end
    checks++; if (int'(raw_drops) != drops_ref || drops_ref == 0) begin failures++; $display("drops %0d ref %0d", raw_drops, drops_ref); end
    checks++; if (n_raw_beats == 0 || n_frame_beats == 0 || n_cls_beats == 0 || n_drained == 0) begin
      failures++; $display("raw %0d frame %0d cls %0d drained %0d", n_raw_beats, n_frame_beats, n_cls_beats, n_drained);
    end
    $display("raw=%0d frame=%0d cls=%0d drained=%0d drops=%0d", n_raw_beats, n_frame_beats, n_cls_beats, n_drained, raw_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

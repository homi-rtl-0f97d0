// tb_interface_unit: writes frames of {neg,pos} words into the interface
// FIFO from a 5 ns clock and checks, on the 7.8 ns side, the global-memory
// writes for the dual-channel layout (one word per pixel) and the
// single-channel layout (two pixels of the chosen channel per word), that
// accel_en pulses once per frame after the last write, that the controller
// waits (HOLD) until accel_done, and that a second frame queued in the FIFO
// meanwhile is loaded only after done. Small FRAME_PIX keeps the run short.
module tb_interface_unit;
  localparam int FP = 64;
  logic wclk = 0, wrst_n = 0, clk = 0, rst_n = 0;
  logic wr_en, full; logic [15:0] wr_data;
  logic multi_channel, single_neg, gm_we, accel_en, accel_done, wait_accel, frame_loaded;
  logic [5:0] gm_addr; logic [15:0] gm_wdata;
  int checks = 0, failures = 0, nen = 0, hold_cycles = 0, nwr = 0, frame = 0;
  logic busy_acc = 0;
  always #2.5 wclk = ~wclk;
  always #3.9 clk = ~clk;

  interface_unit #(.FRAME_PIX(FP), .FIFO_DEPTH(128)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en, .wr_data, .full,
    .clk, .rst_n, .multi_channel, .single_neg, .gm_we, .gm_addr, .gm_wdata,
    .accel_en, .accel_done, .wait_accel, .frame_loaded);

  function automatic logic [15:0] word(int f, int i); return {8'(i * 7 + f), 8'(i + 3 * f)}; endfunction

  // modes per frame: 0 dual, 1 single pos, 2 single neg
  int fmode[4] = '{0, 1, 2, 0};

  // global memory checker
  always @(posedge clk) if (rst_n) begin
    if (wait_accel) hold_cycles++;
    if (gm_we) begin
      checks++;
      if (busy_acc) begin failures++; $display("write while accelerator runs"); end
      case (fmode[frame])
        0: if (gm_addr !== 6'(nwr) || gm_wdata !== word(frame, nwr)) begin failures++; $display("dual: addr %0d data %h", gm_addr, gm_wdata); end
        default: begin
          int p0;
          logic [7:0] b0, b1;
          p0 = 2 * nwr;
          b0 = (fmode[frame] == 2) ? word(frame, p0)[15:8] : word(frame, p0)[7:0];
          b1 = (fmode[frame] == 2) ? word(frame, p0 + 1)[15:8] : word(frame, p0 + 1)[7:0];
          if (gm_addr !== 6'(nwr) || gm_wdata !== {b1, b0}) begin failures++; $display("single: addr %0d data %h exp %h nwr %0d frame %0d", gm_addr, gm_wdata, {b1, b0}, nwr, frame); end
        end
      endcase
      nwr++;
    end
    if (accel_en) begin
      checks++;
      if (nwr != ((fmode[frame] == 0) ? FP : FP / 2)) begin failures++; $display("enable after %0d writes", nwr); end
      nen++;
    end
  end

  // accelerator model: runs 300 cycles after enable
  initial begin
    accel_done = 0;
    forever begin
      @(posedge clk);
      if (accel_en) begin
        busy_acc <= 1;
        repeat (300) @(posedge clk);
        accel_done <= 1; busy_acc <= 0;
        @(posedge clk); accel_done <= 0;
        nwr = 0; frame++;
        if (frame < 4) begin multi_channel <= (fmode[frame] == 0); single_neg <= (fmode[frame] == 2); end
      end
    end
  end

  initial begin
    wr_en = 0; wr_data = 0; multi_channel = 1; single_neg = 0;
    #30 wrst_n = 1; rst_n = 1;
    for (int f = 0; f < 4; f++)
      for (int i = 0; i < FP; i++) begin
        @(negedge wclk);
        while (full) @(negedge wclk);
        wr_en = 1; wr_data = word(f, i);
        @(negedge wclk); wr_en = 0;
      end
    wait (frame == 4);
    checks++; if (nen != 4) begin failures++; $display("%0d enables", nen); end
    checks++; if (hold_cycles < 4 * 300) begin failures++; $display("held only %0d cycles", hold_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

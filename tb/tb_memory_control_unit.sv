// tb_memory_control_unit: a testbench memory answers each Transfer_ADDR one
// cycle later (pos = f(addr), neg = g(addr)); the interface and display
// FIFOs are modelled with random full. Checks that after each done_frame_gen
// the unit toggles mem_select, points mem_select_fifo at the filled buffer,
// clears every location exactly once, writes DEPTH words in address order
// with the right display channel, never writes while full, holds while full,
// pulses done_transfer once, and takes DEPTH+2 cycles when never stalled.
module tb_memory_control_unit;
  localparam int D = 128;
  logic clk = 0, rst_n = 0;
  logic done_frame_gen, disp_neg;
  logic [7:0] u8_pos, u8_neg;
  logic [6:0] transfer_addr;
  logic wen_mem_zero, mem_select, mem_select_fifo;
  logic if_fifo_wr_en, if_fifo_full, disp_fifo_wr_en, disp_fifo_full;
  logic [15:0] if_fifo_data; logic [7:0] disp_fifo_data;
  logic busy, done_transfer, fifo_hold;
  int checks = 0, failures = 0, nwr = 0, nzero = 0, ndone = 0, holds = 0, frame = 0;
  logic stall_en = 0;
  always #2.5 clk = ~clk;

  memory_control_unit #(.DEPTH(D)) dut (.*);

  function automatic logic [7:0] fp(int a, int f); return 8'(a * 3 + f * 17); endfunction
  function automatic logic [7:0] fn(int a, int f); return 8'(a ^ 8'h5A ^ f); endfunction

  always @(posedge clk) begin
    u8_pos <= fp(int'(transfer_addr), frame);
    u8_neg <= fn(int'(transfer_addr), frame);
  end

  always @(negedge clk) begin
    if_fifo_full   = stall_en && ($urandom_range(0, 3) == 0);
    disp_fifo_full = stall_en && ($urandom_range(0, 7) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (fifo_hold) holds++;
    if (wen_mem_zero) nzero++;
    if (done_transfer) ndone++;
    if (if_fifo_wr_en) begin
      checks += 3;
      if (if_fifo_full || disp_fifo_full) begin failures++; $display("write while full"); end
      if (if_fifo_data !== {fn(nwr, frame), fp(nwr, frame)}) begin
        failures++; if (failures < 6) $display("word %0d: %h", nwr, if_fifo_data);
      end
      if (!disp_fifo_wr_en || disp_fifo_data !== (disp_neg ? fn(nwr, frame) : fp(nwr, frame))) failures++;
      nwr++;
    end
  end

  task automatic one_frame(bit stall, bit neg, output int cycles);
    logic sel0;
    stall_en = stall; disp_neg = neg; nwr = 0; nzero = 0; ndone = 0;
    @(negedge clk); sel0 = mem_select;
    done_frame_gen = 1;
    @(negedge clk); done_frame_gen = 0;
    checks += 2;
    if (mem_select !== ~sel0) failures++;
    if (mem_select_fifo !== sel0) failures++;
    cycles = 1;
    while (!done_transfer) begin @(negedge clk); cycles++; end
    repeat (3) @(negedge clk);
    checks += 4;
    if (nwr != D)   begin failures++; $display("wrote %0d words", nwr); end
    if (nzero != D) begin failures++; $display("cleared %0d", nzero); end
    if (ndone != 1) failures++;
    if (busy) failures++;
    frame++;
  endtask

  initial begin
    int cyc;
    done_frame_gen = 0; disp_neg = 0; if_fifo_full = 0; disp_fifo_full = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    one_frame(0, 0, cyc);
    checks++; if (cyc != D + 2) begin failures++; $display("unstalled transfer took %0d cycles", cyc); end
    one_frame(1, 1, cyc);
    one_frame(1, 0, cyc);
    checks++; if (holds == 0) begin failures++; $display("never held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

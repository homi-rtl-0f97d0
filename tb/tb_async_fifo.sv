// tb_async_fifo: checks the dual-clock FIFO with unrelated write (7.5 ns)
// and read (5 ns) clocks: every word comes out once, in order, with random
// write and read rates; full is seen, and no word is lost or invented.
// The expected order is kept in a testbench queue.
module tb_async_fifo;
  localparam int W = 16, D = 16, N = 2000;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0, nread = 0, nwrite = 0, full_seen = 0, empty_seen = 0;
  logic [W-1:0] q[$];

  always #3.75 wclk = ~wclk;
  always #2.5  rclk = ~rclk;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en, .wr_data, .full,
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en, .rd_data, .empty);

  initial begin
    wr_en = 0; wr_data = 0;
    #20 wrst_n = 1; rrst_n = 1;
  end

  // writer
  always @(posedge wclk) if (wrst_n) begin
    if (wr_en && !full) begin q.push_back(wr_data); nwrite++; end
    if (full) full_seen++;
    wr_en   <= (nwrite < N) && ($urandom_range(0, 3) != 0);
    wr_data <= W'($urandom);
  end

  // reader: slow at first so the FIFO fills, then fast
  always @(negedge rclk) rd_en = rrst_n && !empty && ($urandom_range(0, (nread < 200) ? 7 : 1) == 0);
  always @(posedge rclk) if (rrst_n) begin
    if (empty) empty_seen++;
    if (rd_en && !empty) begin
      checks++;
      if (q.size() == 0 || rd_data !== q[0]) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: got %h", nread, rd_data);
      end
      if (q.size() != 0) void'(q.pop_front());
      nread++;
      if (nread == N) begin
        checks++; if (full_seen == 0) begin failures++; $display("full never seen"); end
        checks++; if (empty_seen == 0) begin failures++; $display("empty never seen"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog: read %0d of %0d", nread, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

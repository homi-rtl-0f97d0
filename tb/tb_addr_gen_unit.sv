// tb_addr_gen_unit: checks the default linear mapping from 1280x720 onto
// 128x128 (x/10, y*128/720, address y_out*128 + x_out) over every row and
// column, the out-of-range flag, and a rewritten table entry with slope 1.
module tb_addr_gen_unit;
  logic clk = 0;
  logic [10:0] x_in, y_in, tbl_idx, tbl_b; logic [13:0] addr; logic [6:0] x_out, y_out;
  logic in_range, tbl_we, tbl_sel_y, tbl_m;
  int checks = 0, failures = 0;
  always #2.5 clk = ~clk;

  addr_gen_unit dut (.clk, .x_in, .y_in, .addr, .x_out, .y_out, .in_range,
                     .tbl_we, .tbl_sel_y, .tbl_idx, .tbl_m, .tbl_b);

  task automatic chk(int x, int y, int exp_addr, bit exp_in = 1);
    x_in = 11'(x); y_in = 11'(y); #1;
    checks++;
    if (in_range !== exp_in || (exp_in && addr !== 14'(exp_addr))) begin
      failures++; $display("x=%0d y=%0d addr %0d exp %0d in %b", x, y, addr, exp_addr, in_range);
    end
  endtask

  initial begin
    tbl_we = 0; tbl_sel_y = 0; tbl_idx = 0; tbl_m = 0; tbl_b = 0;
    for (int x = 0; x < 1280; x++) chk(x, 0, x / 10);
    for (int y = 0; y < 720; y++)  chk(0, y, ((y * 128) / 720) * 128);
    chk(1279, 719, 127 * 128 + 127);
    chk(1280, 5, 0, 0);
    chk(5, 720, 0, 0);
    // slope-1 entry: x_out = x_in + b, here 100 + (-90) = 10 (mod 2^11)
    @(negedge clk); tbl_we = 1; tbl_sel_y = 0; tbl_idx = 11'd100; tbl_m = 1; tbl_b = 11'(-90);
    @(negedge clk); tbl_we = 0;
    chk(100, 7, (7 * 128 / 720) * 128 + 10);
    // y entry with offset only
    @(negedge clk); tbl_we = 1; tbl_sel_y = 1; tbl_idx = 11'd3; tbl_m = 0; tbl_b = 11'd77;
    @(negedge clk); tbl_we = 0;
    chk(20, 3, 77 * 128 + 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

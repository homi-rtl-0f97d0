// tb_pingpong_buffers: fills buffer 0 of both channels through the
// accumulation path while buffer 1 is being read and cleared through the
// transfer path, swaps, and checks that the transfer outputs return what was
// accumulated (one cycle after the address), that transferred locations read
// back as 0, and that the ALU outputs follow mem_select.
module tb_pingpong_buffers;
  localparam int D = 64;
  logic clk = 0;
  logic mem_select, mem_select_fifo, wen_pos, wen_neg, wen_mem_zero;
  logic [5:0] addr, transfer_addr;
  logic [15:0] alu_pos_in, alu_neg_in, alu_pos_out, alu_neg_out, u16_pos_out, u16_neg_out;
  int checks = 0, failures = 0;
  int rp[2][D], rn[2][D];
  always #2.5 clk = ~clk;

  pingpong_buffers #(.DEPTH(D)) dut (.*);

  task automatic chk(logic [15:0] got, int exp, string what);
    checks++;
    if (got !== 16'(exp)) begin failures++; if (failures < 8) $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  // accumulate into buffer b (the one mem_select points at) while the other is transferred
  task automatic phase(int b);
    mem_select = 1'(b); mem_select_fifo = 1'(1 - b);
    for (int i = 0; i < D; i++) begin
      int vp = $urandom_range(1, 60000), vn = $urandom_range(1, 60000);
      @(negedge clk);
      addr = 6'(i); transfer_addr = 6'(i); wen_pos = 1; wen_neg = 1; wen_mem_zero = 1;
      alu_pos_in = 16'(vp); alu_neg_in = 16'(vn);
      @(negedge clk);
      // transfer side returned the old contents and cleared them
      chk(u16_pos_out, rp[1-b][i], "transfer pos");
      chk(u16_neg_out, rn[1-b][i], "transfer neg");
      chk(alu_pos_out, rp[b][i], "alu pos (old)");
      rp[b][i] = vp; rn[b][i] = vn; rp[1-b][i] = 0; rn[1-b][i] = 0;
      wen_pos = 0; wen_neg = 0; wen_mem_zero = 0;
    end
  endtask

  initial begin
    foreach (rp[b, i]) begin rp[b][i] = 0; rn[b][i] = 0; end
    wen_pos = 0; wen_neg = 0; wen_mem_zero = 0; addr = 0; transfer_addr = 0;
    alu_pos_in = 0; alu_neg_in = 0;
    phase(0); phase(1); phase(0); phase(1);
    // read back the ALU path of buffer 1 without writing
    mem_select = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); addr = 6'(i);
      @(negedge clk); chk(alu_pos_out, rp[1][i], "alu pos"); chk(alu_neg_out, rn[1][i], "alu neg");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

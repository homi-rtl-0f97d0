// tb_bram_rf: checks the read-first BRAM: one cycle of read latency, the old
// word returned on the edge that writes a new one, and random
// read-modify-write traffic against a testbench array.
module tb_bram_rf;
  localparam int D = 256, W = 16;
  logic clk = 0;
  logic [7:0] addr; logic [W-1:0] din, dout; logic wea;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;
  always #2.5 clk = ~clk;

  bram_rf #(.DEPTH(D), .WIDTH(W)) dut (.clk, .addr, .din, .wea, .dout);

  task automatic chk(logic [W-1:0] exp, string what);
    checks++;
    if (dout !== exp) begin failures++; $display("%s: got %h exp %h", what, dout, exp); end
  endtask

  initial begin
    foreach (ref_mem[i]) ref_mem[i] = '0;
    addr = 0; din = 0; wea = 0;
    @(negedge clk);
    // read-first: write and read in one access
    addr = 8'd5; din = 16'hABCD; wea = 1;
    @(negedge clk); chk(16'h0000, "read-first old value");
    ref_mem[5] = 16'hABCD;
    wea = 0;
    @(negedge clk); chk(16'hABCD, "value after write");
    for (int i = 0; i < 2000; i++) begin
      logic [7:0] a; logic [W-1:0] d; logic w;
      a = 8'($urandom); d = W'($urandom); w = 1'($urandom);
      addr = a; din = d; wea = w;
      @(negedge clk);
      chk(ref_mem[a], "random");
      if (w) ref_mem[a] = d;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

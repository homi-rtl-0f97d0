// tb_scale_shift_unit: compares min(255, (v*scale)>>shift) with the unit for
// corner and random inputs.
module tb_scale_shift_unit;
  logic [15:0] in_val; logic [7:0] scale, out_val; logic [3:0] shift;
  int checks = 0, failures = 0;
  scale_shift_unit dut (.in_val, .scale, .shift, .out_val);

  task automatic one(int v, int sc, int sh);
    int e;
    in_val = 16'(v); scale = 8'(sc); shift = 4'(sh);
    #1;
    e = (v * sc) >> sh; if (e > 255) e = 255;
    checks++;
    if (out_val !== 8'(e)) begin failures++; $display("v=%0d sc=%0d sh=%0d got %0d exp %0d", v, sc, sh, out_val, e); end
  endtask

  initial begin
    one(255, 1, 0); one(256, 1, 0); one(1, 1, 0); one(65535, 255, 15); one(1000, 1, 2); one(0, 200, 0);
    for (int i = 0; i < 3000; i++) one($urandom_range(0, 65535) >> $urandom_range(0, 15), $urandom_range(0, 255), $urandom_range(0, 15));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

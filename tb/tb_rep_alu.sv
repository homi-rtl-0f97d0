// tb_rep_alu: checks the four update rules (binary, histogram, SLTS, SETS),
// the decay term with and without timestamp wrap, and the disabled case,
// against the reference rule in homi_tb_pkg.
module tb_rep_alu;
  import homi_pkg::*;
  import homi_tb_pkg::*;
  logic en; rep_mode_e mode; logic [15:0] mem_val, new_val; logic [7:0] t_now, t_last, decay;
  int checks = 0, failures = 0;
  rep_alu dut (.en, .mode, .mem_val, .t_now, .t_last, .new_val, .decay);

  task automatic one(int m, int v, int tn, int tl, bit e = 1);
    int exp, expd;
    en = e; mode = rep_mode_e'(m); mem_val = 16'(v); t_now = 8'(tn); t_last = 8'(tl);
    #1;
    exp  = e ? rep_ref(m, v, tn, tl) : v;
    expd = (tl <= tn) ? tn - tl : tn;
    checks += 2;
    if (new_val !== 16'(exp)) begin failures++; $display("m=%0d v=%0d tn=%0d tl=%0d got %0d exp %0d", m, v, tn, tl, new_val, exp); end
    if (decay !== 8'(expd)) begin failures++; $display("decay got %0d exp %0d", decay, expd); end
  endtask

  initial begin
    // hand-worked cases
    one(0, 7, 0, 0);           // binary -> 255
    one(1, 7, 0, 0);           // histogram -> 8
    one(1, 65535, 0, 0);       // saturates
    one(3, 100, 5, 3);         // SETS: shift 2 -> 1 + 25 = 26
    checks++; if (new_val !== 16'd26) failures++;
    one(3, 100, 40, 3);        // SETS: shift 37 >= 16 -> 1
    one(3, 100, 3, 200);       // wrap: shift = t_now = 3 -> 1 + 12 = 13
    checks++; if (new_val !== 16'd13) failures++;
    one(2, 10, 7, 3);          // SLTS: 10 - 4 + 1 = 7
    checks++; if (new_val !== 16'd7) failures++;
    one(2, 3, 9, 3);           // SLTS: shift 6 >= 3 -> 1
    one(2, 0, 0, 0);           // SLTS on empty location -> 1
    one(1, 9, 0, 0, 0);        // disabled
    for (int i = 0; i < 4000; i++)
      one($urandom_range(0, 3), $urandom_range(0, 65535) >> $urandom_range(0, 16), $urandom_range(0, 255), $urandom_range(0, 255), 1'($urandom_range(0, 7) != 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// raman_model: behavioural stand-in for the CNN accelerator, for testbenches
// only. It keeps a copy of the global memory written through the loader
// port, and after accel_en waits LATENCY cycles, then pulses accel_done for
// one cycle with accel_result = the 16-bit sum of the first WORDS memory
// words. This lets a testbench check that the right frame reached the memory
// without modelling a network. Not synthesizable intent; no inference.
module raman_model #(
  parameter int LATENCY = 1000,
  parameter int WORDS   = 16384
) (
  input  logic        clk,
  input  logic        gm_we,
  input  logic [13:0] gm_addr,
  input  logic [15:0] gm_wdata,
  input  logic        accel_en,
  output logic        accel_done,
  output logic [15:0] accel_result,
  output logic        running
);
  logic [15:0] gm [16384];
  initial begin
    foreach (gm[i]) gm[i] = '0;
    accel_done = 0; accel_result = 0; running = 0;
  end
  always @(posedge clk) if (gm_we) gm[gm_addr] <= gm_wdata;

  initial forever begin
    @(posedge clk);
    if (accel_en) begin
      logic [15:0] sum;
      running <= 1;
      repeat (LATENCY - 1) @(posedge clk);
      sum = 0;
      for (int i = 0; i < WORDS; i++) sum += gm[i];
      accel_result <= sum; accel_done <= 1; running <= 0;
      @(posedge clk); accel_done <= 0;
    end
  end
endmodule

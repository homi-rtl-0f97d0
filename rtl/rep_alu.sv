// rep_alu: per-channel arithmetic unit that updates one representation value
// for one event (one instance for the positive and one for the negative
// channel).
//
// Inputs are the value read from the representation memory, and the upper
// 8 bits of the present and the stored (last) timestamp of the pixel. The
// decay term follows the platform's hardware form of the shift-based time
// surfaces: shift = t_now - t_last when t_last <= t_now, otherwise t_now (the
// 24-bit timestamp has wrapped). Then, per mode:
//   binary    : 255
//   histogram : value + 1
//   SETS      : shift < 16 ? 1 + (value >> shift) : 1
//   SLTS      : shift < value ? 1 + value - shift : 1
// Taking the upper 8 of 24 timestamp bits is the decay parameter tau = 16.
// Combinational: the result is written back in the cycle after the address
// was sent (read-first memory). Saturation of histogram and SETS at 0xFFFF is
// this design's choice; the paper does not discuss overflow. en gates the
// result to the memory value (no change) when the channel is not updated.
module rep_alu
  import homi_pkg::*;
(
  input  logic               en,
  input  rep_mode_e          mode,
  input  logic [REP_W-1:0]   mem_val,
  input  logic [TS_HI_W-1:0] t_now,
  input  logic [TS_HI_W-1:0] t_last,
  output logic [REP_W-1:0]   new_val,
  output logic [TS_HI_W-1:0] decay        // the shift term, for observation
);
  localparam logic [REP_W-1:0] MAXV = '1;

  logic [REP_W-1:0] sh;
  always_comb begin
    decay = (t_last <= t_now) ? (t_now - t_last) : t_now;
    sh = mem_val >> decay;
    new_val = mem_val;
    if (en) begin
      unique case (mode)
        REP_BINARY:    new_val = REP_W'(255);
        REP_HISTOGRAM: new_val = (mem_val == MAXV) ? MAXV : mem_val + 1'b1;
        REP_SETS: begin
          if (decay < TS_HI_W'(16)) begin
            new_val = (sh == MAXV) ? MAXV : sh + 1'b1;
          end else begin
            new_val = REP_W'(1);
          end
        end
        REP_SLTS: begin
          if (REP_W'(decay) < mem_val) new_val = mem_val - REP_W'(decay) + 1'b1;
          else                         new_val = REP_W'(1);
        end
        default: new_val = mem_val;
      endcase
    end
  end
endmodule

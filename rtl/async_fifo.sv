// async_fifo: dual-clock FIFO used at every clock-domain crossing of the
// platform (sensor -> pre-processing, pre-processing -> accelerator, and the
// display / result paths towards the DMA packetizer).
//
// Write and read pointers are binary counters one bit wider than the address;
// their Gray-coded copies cross to the other domain through a two-flip-flop
// synchroniser, as the platform's FIFOs use a double-stage synchroniser. Full
// is computed in the write domain and empty in the read domain, both from
// synchronised pointers, so each flag is conservative (it may stay asserted a
// few cycles after the other side moved). The read side is show-ahead:
// rd_data is valid whenever empty is low, and rd_en pops it. Writes while full
// and reads while empty are ignored (and flagged by assertions).
// DEPTH must be a power of two. Depth and the show-ahead interface are this
// design's choices; the paper gives no FIFO sizes.
module async_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr, wgray, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wr_data;
  end

  // full when the write Gray pointer equals the read one with the two MSBs inverted
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // read domain
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end

  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rptr[AW-1:0]];

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("async_fifo: DEPTH must be a power of two >= 4");
  a_no_overflow:  assert property (@(posedge wr_clk) disable iff (!wr_rst_n) !(wr_en && full))
    else $warning("async_fifo: write while full dropped");
  a_no_underflow: assert property (@(posedge rd_clk) disable iff (!rd_rst_n) !(rd_en && empty))
    else $warning("async_fifo: read while empty ignored");
endmodule

// addr_gen_unit: maps a sensor coordinate (1280x720) onto the 128x128
// representation grid and forms the memory address.
//
// Each axis has a lookup table indexed by the input coordinate that holds a
// slope bit m and an offset b. The output coordinate is b when m = 0 and
// x_in + b when m = 1 (the slope is only ever 0 or 1, so the multiply is a
// 2:1 multiplexer). The address is (y_out << 7) + x_out, a row-major 128-wide
// layout built from a shift and an add. Coordinates outside the sensor give
// in_range = 0.
// By default the tables hold m = 0 and b[i] = floor(i*OUT/IN), the plain
// linear downsampling; they can be rewritten through the table-write port
// (tbl_we, tbl_sel_y, tbl_idx, tbl_m, tbl_b), e.g. to crop a window with
// m = 1. The table port and its default contents are this design's choice.
// The lookup is combinational: addr is valid in the cycle x_in/y_in are.
module addr_gen_unit #(
  parameter int unsigned IN_W  = 1280,
  parameter int unsigned IN_H  = 720,
  parameter int unsigned OUT_W = 128,
  parameter int unsigned OUT_H = 128,
  parameter int unsigned XY_W  = 11
) (
  input  logic                             clk,
  input  logic [XY_W-1:0]                  x_in,
  input  logic [XY_W-1:0]                  y_in,
  output logic [$clog2(OUT_W*OUT_H)-1:0]   addr,
  output logic [$clog2(OUT_W)-1:0]         x_out,
  output logic [$clog2(OUT_H)-1:0]         y_out,
  output logic                             in_range,
  // table write port
  input  logic                             tbl_we,
  input  logic                             tbl_sel_y,
  input  logic [XY_W-1:0]                  tbl_idx,
  input  logic                             tbl_m,
  input  logic [XY_W-1:0]                  tbl_b
);
  localparam int unsigned OXW = $clog2(OUT_W);
  localparam int unsigned OYW = $clog2(OUT_H);

  logic            mx [IN_W];
  logic [XY_W-1:0] bx [IN_W];
  logic            my [IN_H];
  logic [XY_W-1:0] by [IN_H];

  initial begin
    for (int i = 0; i < int'(IN_W); i++) begin mx[i] = 1'b0; bx[i] = XY_W'((i * OUT_W) / IN_W); end
    for (int i = 0; i < int'(IN_H); i++) begin my[i] = 1'b0; by[i] = XY_W'((i * OUT_H) / IN_H); end
  end

  always_ff @(posedge clk) begin
    if (tbl_we) begin
      if (!tbl_sel_y && int'(tbl_idx) < int'(IN_W)) begin mx[tbl_idx] <= tbl_m; bx[tbl_idx] <= tbl_b; end
      if ( tbl_sel_y && int'(tbl_idx) < int'(IN_H)) begin my[tbl_idx] <= tbl_m; by[tbl_idx] <= tbl_b; end
    end
  end

  logic [XY_W-1:0] xi, yi, xo_full, yo_full;
  always_comb begin
    in_range = (int'(x_in) < int'(IN_W)) && (int'(y_in) < int'(IN_H));
    xi = in_range ? x_in : '0;
    yi = in_range ? y_in : '0;
    xo_full = mx[xi] ? (xi + bx[xi]) : bx[xi];
    yo_full = my[yi] ? (yi + by[yi]) : by[yi];
    x_out = xo_full[OXW-1:0];
    y_out = yo_full[OYW-1:0];
    addr  = ($clog2(OUT_W*OUT_H))'({y_out, {OXW{1'b0}}}) + ($clog2(OUT_W*OUT_H))'(x_out);
  end
endmodule

// pingpong_buffers: the four representation memories (positive / negative
// channel, buffer 0 / 1) and their multiplexers.
//
// While one buffer of each channel accumulates events, the other is read out
// and cleared. mem_select = 0 gives buffer 0 to accumulation and buffer 1 to
// transfer; mem_select = 1 the reverse. The accumulating buffer takes ADDR,
// the ALU result and wen_pos / wen_neg; the transferring one takes
// Transfer_ADDR, data 0 and wen_mem_zero, so that (read-first) each access
// reads a word out and clears it in the same cycle. The ALUs see the
// accumulating buffers' outputs (selected by mem_select) and the scale-shift
// units the transferring ones (selected by mem_select_fifo). Outputs appear
// one cycle after the address (read latency 1).
// The structure is the platform's; the select polarity is this design's.
module pingpong_buffers
  import homi_pkg::*;
#(
  parameter int unsigned DEPTH = 16384
) (
  input  logic                     clk,
  input  logic                     mem_select,
  input  logic                     mem_select_fifo,
  input  logic [$clog2(DEPTH)-1:0] addr,           // ADDR (accumulation)
  input  logic [$clog2(DEPTH)-1:0] transfer_addr,  // Transfer_ADDR
  input  logic                     wen_pos,
  input  logic                     wen_neg,
  input  logic                     wen_mem_zero,
  input  logic [REP_W-1:0]         alu_pos_in,
  input  logic [REP_W-1:0]         alu_neg_in,
  output logic [REP_W-1:0]         alu_pos_out,
  output logic [REP_W-1:0]         alu_neg_out,
  output logic [REP_W-1:0]         u16_pos_out,
  output logic [REP_W-1:0]         u16_neg_out
);
  localparam int unsigned AW = $clog2(DEPTH);

  // index [channel][buffer], channel 0 = positive
  logic [AW-1:0]    m_addr [2][2];
  logic [REP_W-1:0] m_din  [2][2];
  logic             m_we   [2][2];
  logic [REP_W-1:0] m_dout [2][2];

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      automatic logic acc = (mem_select == 1'(b));   // this buffer accumulates
      m_addr[0][b] = acc ? addr       : transfer_addr;
      m_addr[1][b] = acc ? addr       : transfer_addr;
      m_din [0][b] = acc ? alu_pos_in : '0;
      m_din [1][b] = acc ? alu_neg_in : '0;
      m_we  [0][b] = acc ? wen_pos    : wen_mem_zero;
      m_we  [1][b] = acc ? wen_neg    : wen_mem_zero;
    end
    alu_pos_out = m_dout[0][mem_select];
    alu_neg_out = m_dout[1][mem_select];
    u16_pos_out = m_dout[0][mem_select_fifo];
    u16_neg_out = m_dout[1][mem_select_fifo];
  end

  for (genvar c = 0; c < 2; c++) begin : g_ch
    for (genvar b = 0; b < 2; b++) begin : g_buf
      bram_rf #(.DEPTH(DEPTH), .WIDTH(REP_W)) u_mem (
        .clk (clk),
        .addr(m_addr[c][b]),
        .din (m_din[c][b]),
        .wea (m_we[c][b]),
        .dout(m_dout[c][b])
      );
    end
  end
endmodule

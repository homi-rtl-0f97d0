// evt3_decoder: EVT 3.0 decoder and frame-generation control unit (constant
// event and constant time modes) of the pre-processing block.
//
// It pops 16-bit EVT 3.0 words from the show-ahead input FIFO and walks the
// state machine of the control-unit flowchart. Time-high / time-low words
// update the 24-bit timestamp {T_HIGH[11:0], T_LOW[11:0]}, a Y word the row,
// an X word (with polarity) produces one pixel event, a base-X word (with
// polarity) starts a vector, and each VECT_12 / VECT_8 word is handed to a
// vector sub-controller that visits only its set bits, lowest first, and
// advances base X by 12 or 8 afterwards. Other word types are discarded.
//
// Every pixel event takes two cycles: in the first, the coordinates are on
// x/y with en_agen high, so the address generation unit drives the memory
// address (the read); in the second, wen_pos or wen_neg (with en_pos_add /
// en_neg_add) writes the ALU result back. Events outside 1280x720 are
// dropped. In constant-event mode the frame ends when the event counter has
// reached cfg threshold; in constant-time mode when the cycle counter has,
// counted from the start of the frame. Both are checked after a complete
// event or vector word, so an event-mode frame may hold up to 11 events more
// than the threshold. The end is signalled by a one-cycle done_frame_gen;
// if the memory control unit is still transferring the previous frame
// (xfer_busy) the controller waits in DONE_FRAME_GEN first (frame_stall).
// When it needs a word and the FIFO is empty it waits in HOLD_FIFO
// (fifo_hold) and continues with the next word as soon as one arrives.
// The state names and the flow are the platform's; the exact dispatch from
// every state, the threshold check points and the wait for xfer_busy are
// this design's choices.
module evt3_decoder
  import homi_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // input FIFO (show-ahead)
  input  logic [EVT_W-1:0]  fifo_data,
  input  logic              fifo_empty,
  output logic              fifo_rd_enable,
  // configuration
  input  acc_mode_e         acc_mode,
  input  logic [31:0]       threshold,
  // event to the address generation unit / ALUs / memories
  output logic [TS_W-1:0]   timestamp,
  output logic [XY_W-1:0]   x,
  output logic [XY_W-1:0]   y,
  output logic              en_agen,
  output logic              en_pos_add,
  output logic              en_neg_add,
  output logic              wen_pos,
  output logic              wen_neg,
  // frame control
  output logic              done_frame_gen,
  input  logic              xfer_busy,
  // status
  output logic              fifo_hold,
  output logic              frame_stall,
  output logic              vect_event,     // an event taken from a vector word
  output logic [31:0]       frame_events    // events in the current frame
);
  typedef enum logic [4:0] {
    S_IDLE, S_START, S_WAIT,
    S_FOUND_T_HIGH, S_FOUND_T_LOW, S_FOUND_Y, S_FOUND_X, S_DONE_WRITE,
    S_FOUND_BASE_X,
    S_WAIT_VECT_12_1, S_DONE_VECT_12_1,
    S_WAIT_VECT_12_2, S_DONE_VECT_12_2,
    S_WAIT_VECT_8,    S_DONE_VECT_8,
    S_DONE_FRAME_GEN, S_HOLD_FIFO
  } state_e;

  state_e state, state_n;

  logic [11:0]     t_high, t_low;
  logic [XY_W-1:0] y_reg, x_reg, base_x;
  logic            pol, vpol;
  logic [11:0]     vmask;
  logic            vphase;      // 0: pick a bit and read, 1: write
  logic [31:0]     ev_cnt, cyc_cnt;

  evt3_type_e wtype;
  assign wtype = evt3_type_e'(fifo_data[15:12]);

  // lowest set bit of the vector mask
  logic [3:0] lsb_idx;
  always_comb begin
    lsb_idx = '0;
    for (int i = 11; i >= 0; i--) if (vmask[i]) lsb_idx = 4'(i);
  end

  logic in_vect, vect_has, frame_end, can_fetch;
  logic [31:0] thr_eff;
  logic wrote_x_pending;        // DONE_WRITE entered from a valid FOUND_X
  logic [XY_W-1:0] vect_x;
  always_comb begin
    in_vect   = (state == S_WAIT_VECT_12_1) || (state == S_WAIT_VECT_12_2) || (state == S_WAIT_VECT_8);
    vect_has  = (vmask != '0);
    vect_x    = base_x + XY_W'(lsb_idx);
    thr_eff   = (threshold == 0) ? 32'd1 : threshold;
    frame_end = (acc_mode == ACC_CONST_EVENT) ? (ev_cnt >= thr_eff) : (cyc_cnt >= thr_eff);
  end

  // states that have finished their work and need the next word
  always_comb begin
    unique case (state)
      S_WAIT, S_FOUND_T_HIGH, S_FOUND_T_LOW, S_FOUND_Y, S_FOUND_BASE_X,
      S_DONE_WRITE, S_DONE_VECT_12_1, S_DONE_VECT_12_2, S_DONE_VECT_8, S_HOLD_FIFO: can_fetch = 1'b1;
      default: can_fetch = 1'b0;
    endcase
  end

  logic fetch_pop, x_ok;
  always_comb begin
    state_n        = state;
    fetch_pop      = 1'b0;
    done_frame_gen = 1'b0;
    x_ok           = (int'(x_reg) < int'(SENSOR_W)) && (int'(y_reg) < int'(SENSOR_H));
    if (can_fetch) begin
      if (frame_end) state_n = S_DONE_FRAME_GEN;
      else if (fifo_empty) state_n = S_HOLD_FIFO;
      else begin
        fetch_pop = 1'b1;
        unique case (wtype)
          EVT_TIME_HIGH: state_n = S_FOUND_T_HIGH;
          EVT_TIME_LOW:  state_n = S_FOUND_T_LOW;
          EVT_ADDR_Y:    state_n = S_FOUND_Y;
          EVT_ADDR_X:    state_n = S_FOUND_X;
          VECT_BASE_X:   state_n = S_FOUND_BASE_X;
          VECT_12:       state_n = (state == S_DONE_VECT_12_1) ? S_WAIT_VECT_12_2 : S_WAIT_VECT_12_1;
          VECT_8:        state_n = S_WAIT_VECT_8;
          default:       state_n = S_WAIT;
        endcase
      end
    end else begin
      unique case (state)
        S_IDLE:  if (!fifo_empty) state_n = S_START;
        S_START: state_n = S_WAIT;
        S_FOUND_X: state_n = S_DONE_WRITE;
        S_WAIT_VECT_12_1: if (!vect_has && !vphase) state_n = S_DONE_VECT_12_1;
        S_WAIT_VECT_12_2: if (!vect_has && !vphase) state_n = S_DONE_VECT_12_2;
        S_WAIT_VECT_8:    if (!vect_has && !vphase) state_n = S_DONE_VECT_8;
        S_DONE_FRAME_GEN: if (!xfer_busy) begin done_frame_gen = 1'b1; state_n = S_WAIT; end
        default: ;
      endcase
    end
  end

  // event strobes
  logic vect_read, vect_write, x_read, x_write;
  logic [XY_W-1:0] ev_x;        // x of the event being written
  always_comb begin
    vect_read  = in_vect && !vphase && vect_has && (int'(vect_x) < int'(SENSOR_W)) && (int'(y_reg) < int'(SENSOR_H));
    vect_write = in_vect && vphase;
    x_read     = (state == S_FOUND_X) && x_ok;
    x_write    = (state == S_DONE_WRITE) && wrote_x_pending;
  end

  logic cur_pol;
  always_comb begin
    cur_pol    = in_vect ? vpol : pol;
    en_agen    = vect_read || x_read;
    wen_pos    = (vect_write || x_write) && cur_pol;
    wen_neg    = (vect_write || x_write) && !cur_pol;
    en_pos_add = wen_pos;
    en_neg_add = wen_neg;
    x          = (in_vect && !vphase) ? vect_x : ev_x;
    y          = y_reg;
    timestamp  = {t_high, t_low};
    fifo_rd_enable = fetch_pop;
    fifo_hold  = (state == S_HOLD_FIFO);
    frame_stall = (state == S_DONE_FRAME_GEN) && xfer_busy;
    vect_event = vect_write;
    frame_events = ev_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t_high <= '0; t_low <= '0; y_reg <= '0; x_reg <= '0; base_x <= '0; ev_x <= '0;
      pol <= 1'b0; vpol <= 1'b0; vmask <= '0; vphase <= 1'b0;
      ev_cnt <= '0; cyc_cnt <= '0; wrote_x_pending <= 1'b0;
    end else begin
      state <= state_n;
      if (state != S_IDLE) cyc_cnt <= cyc_cnt + 1'b1;
      if (state == S_START || done_frame_gen) begin
        ev_cnt  <= '0;
        cyc_cnt <= '0;
      end
      wrote_x_pending <= x_read;
      if (fetch_pop) begin
        unique case (wtype)
          EVT_TIME_HIGH: t_high <= fifo_data[11:0];
          EVT_TIME_LOW:  t_low  <= fifo_data[11:0];
          EVT_ADDR_Y:    y_reg  <= fifo_data[XY_W-1:0];
          EVT_ADDR_X:    begin x_reg <= fifo_data[XY_W-1:0]; ev_x <= fifo_data[XY_W-1:0]; pol <= fifo_data[11]; end
          VECT_BASE_X:   begin base_x <= fifo_data[XY_W-1:0]; vpol <= fifo_data[11]; end
          VECT_12:       begin vmask <= fifo_data[11:0]; vphase <= 1'b0; end
          VECT_8:        begin vmask <= {4'b0, fifo_data[7:0]}; vphase <= 1'b0; end
          default: ;
        endcase
      end
      // vector sub-controller: one set bit per two cycles
      if (in_vect) begin
        if (!vphase) begin
          if (vect_has) begin
            vmask[lsb_idx] <= 1'b0;
            ev_x   <= vect_x;
            vphase <= vect_read;      // out-of-range bits are skipped in one cycle
          end else begin
            base_x <= base_x + ((state == S_WAIT_VECT_8) ? XY_W'(8) : XY_W'(12));
          end
        end else begin
          vphase <= 1'b0;
        end
      end
      if (vect_write || x_write) ev_cnt <= ev_cnt + 1'b1;
    end
  end

  // the write of an event always follows its read by one cycle
  a_write_after_read: assert property (@(posedge clk) disable iff (!rst_n)
    (wen_pos || wen_neg) |-> $past(en_agen))
    else $error("evt3_decoder: write without preceding read");
  a_one_hot_wen: assert property (@(posedge clk) disable iff (!rst_n) !(wen_pos && wen_neg));
endmodule

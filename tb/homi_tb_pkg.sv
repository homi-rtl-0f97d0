// homi_tb_pkg: testbench helpers shared by the decoder, pre-processing and
// top-level testbenches.
//
// evt3_enc turns pixel events into an EVT 3.0 word stream the way a sensor
// would: a TIME_HIGH word when timestamp bits [23:12] change, TIME_LOW when
// bits [11:0] change, an ADDR_Y word when the row changes, then either an
// ADDR_X word per event or, for a group of same-row same-polarity pixels
// inside one 32-pixel bank, a VECT_BASE_X word followed by VECT_12, VECT_12
// and VECT_8 masks. frame_model is an independent reference of the
// representation memories: the same downsampling (floor(x*128/1280),
// floor(y*128/720)), the four update rules, frame closing by event count
// after each event word, and a timestamp memory shared by both channels.
package homi_tb_pkg;

  localparam int NPIX = 16384;

  // reference for one representation update
  function automatic int rep_ref(int mode, int val, int tnow8, int tlast8);
    int sh;
    sh = (tlast8 <= tnow8) ? tnow8 - tlast8 : tnow8;
    case (mode)
      0: return 255;
      1: return (val >= 65535) ? 65535 : val + 1;
      2: return (sh < val) ? val - sh + 1 : 1;
      default: begin
        if (sh < 16) begin
          int v; v = (val >> sh) + 1;
          return (v > 65535) ? 65535 : v;
        end
        return 1;
      end
    endcase
  endfunction

  function automatic int map_addr(int x, int y);
    return ((y * 128) / 720) * 128 + (x * 128) / 1280;
  endfunction

  function automatic int sat8(int v, int scale, int shift);
    int r; r = (v * scale) >> shift;
    return (r > 255) ? 255 : r;
  endfunction

  class evt3_enc;
    bit [15:0] words[$];
    int        last_th = -1, last_tl = -1, last_y = -1;

    function void set_time(int t);
      if (((t >> 12) & 12'hFFF) != last_th) begin
        words.push_back({4'h8, 12'((t >> 12) & 12'hFFF)}); last_th = (t >> 12) & 12'hFFF;
      end
      if ((t & 12'hFFF) != last_tl) begin
        words.push_back({4'h6, 12'(t & 12'hFFF)}); last_tl = t & 12'hFFF;
      end
    endfunction

    function void set_y(int y);
      if (y != last_y) begin words.push_back({4'h0, 1'b0, 11'(y)}); last_y = y; end
    endfunction

    function void event_x(int x, int y, bit p, int t);
      set_time(t); set_y(y);
      words.push_back({4'h2, p, 11'(x)});
    endfunction

    // 32-bit vector starting at base_x
    function void vector(int base_x, int y, bit p, int t, bit [31:0] mask);
      set_time(t); set_y(y);
      words.push_back({4'h3, p, 11'(base_x)});
      words.push_back({4'h4, mask[11:0]});
      words.push_back({4'h4, mask[23:12]});
      words.push_back({4'h5, 4'h0, mask[31:24]});
    endfunction

    function void other(bit [15:0] w); words.push_back(w); endfunction
  endclass

  class frame_model;
    int pos[NPIX], neg[NPIX], ts[NPIX];
    int mode, thr, cnt;
    int done_pos[$][];
    int done_neg[$][];
    int nframes;
    bit ident = 0;   // 1: identity map for 128x128 input (tables with m = 1, b = 0)

    function new(int mode_i, int thr_i);
      mode = mode_i; thr = thr_i; cnt = 0; nframes = 0;
      foreach (pos[i]) begin pos[i] = 0; neg[i] = 0; ts[i] = 0; end
    endfunction

    function void pix(int x, int y, bit p, int t);
      int a, tn, tl;
      if (x >= 1280 || y >= 720) return;
      a = ident ? (y * 128 + x) : map_addr(x, y);
      tn = (t >> 16) & 255; tl = (ts[a] >> 16) & 255;
      if (p) pos[a] = rep_ref(mode, pos[a], tn, tl);
      else   neg[a] = rep_ref(mode, neg[a], tn, tl);
      ts[a] = t;
      cnt++;
    endfunction

    // call after each event word; closes a frame when the count is reached
    function bit word_end();
      if (cnt >= ((thr == 0) ? 1 : thr)) begin
        int fp[], fn[];
        fp = new[NPIX]; fn = new[NPIX];
        foreach (pos[i]) begin fp[i] = pos[i]; fn[i] = neg[i]; pos[i] = 0; neg[i] = 0; end
        done_pos.push_back(fp); done_neg.push_back(fn);
        cnt = 0; nframes++;
        return 1;
      end
      return 0;
    endfunction
  endclass

  // emits events through both an encoder and a model
  class stim;
    evt3_enc    enc;
    frame_model m;
    function new(int mode, int thr);
      enc = new(); m = new(mode, thr);
    endfunction
    function void ev(int x, int y, bit p, int t);
      enc.event_x(x, y, p, t); m.pix(x, y, p, t); void'(m.word_end());
    endfunction
    function void vec(int base_x, int y, bit p, int t, bit [31:0] mask);
      enc.vector(base_x, y, p, t, mask);
      for (int c = 0; c < 3; c++) begin
        int lo = c * 12; int w = (c == 2) ? 8 : 12;
        for (int b = 0; b < w; b++) if (mask[lo + b]) m.pix(base_x + lo + b, y, p, t);
        void'(m.word_end());
      end
    endfunction
  endclass
endpackage

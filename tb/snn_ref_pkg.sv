// snn_ref_pkg: behavioural reference model of the whole network, written
// independently of the RTL from the algorithm: receptive-field blur, spike
// periods, regular spike trains, threshold from the busiest time unit, leaky
// integrate-and-fire neurons with refractory time, first-spike lateral
// inhibition, bounded STDP with exponential windows and spike counting.
// Testbenches step it one time unit at a time and compare with the design.
// It also counts how often each mechanism occurred.
package snn_ref_pkg;
  class snn_ref #(int NI = 784, int NO = 16, int IMG_W = 28, int T = 200);
    int w [NO][NI];
    int p [NO], refr [NO], fired [NO], cnt [NO];
    bit blk [NO];
    int img [NI], period [NI], gcnt [NI], age [NI];
    bit spk [NI];
    int vth, maxpop;
    bit first_done;
    int lut_pot [32], lut_dep [32];
    // mechanism counters
    int n_tu_quiet, n_tu_input, n_tu_wc, n_li, n_block, n_pmin, n_leak, n_pot, n_dep, n_fire;

    function new();
      for (int d = 0; d < 32; d++) begin
        lut_pot[d] = (d >= 2 && d <= 20) ?  int'(0.1 * 0.8 * $exp(-real'(d) / 8.0) * 65536.0) : 0;
        lut_dep[d] = (d >= 2 && d <= 20) ? -int'(0.1 * 0.3 * $exp(-real'(d) / 5.0) * 65536.0) : 0;
      end
    endfunction

    // blur, then period = 5*255/RF
    function void prep();
      for (int i = 0; i < NI; i++) begin
        int r, c, s;
        r = i / IMG_W; c = i % IMG_W; s = 0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            if (r+dr >= 0 && r+dr < IMG_W && c+dc >= 0 && c+dc < IMG_W)
              s += img[(r+dr)*IMG_W + c+dc] * (dr == 0 ? 2 : 1) * (dc == 0 ? 2 : 1);
        s = s / 16;
        period[i] = (s <= 0) ? 0 : 1275 / s;
      end
    endfunction

    // spike of input i in time unit t (0-based): (t+1) multiple of its period
    function bit fires_at(int i, int t);
      return period[i] != 0 && (t + 1) % period[i] == 0;
    endfunction

    function void threshold();
      maxpop = 0;
      for (int t = 0; t < T; t++) begin
        int s;
        s = 0;
        for (int i = 0; i < NI; i++) s += int'(fires_at(i, t));
        if (s > maxpop) maxpop = s;
      end
      vth = maxpop * 4096 / 3;
    endfunction

    function void start_image();
      for (int j = 0; j < NO; j++) begin p[j] = 0; refr[j] = 0; blk[j] = 0; fired[j] = 0; cnt[j] = 0; end
      for (int i = 0; i < NI; i++) begin age[i] = 31; spk[i] = 0; end
      first_done = 0;
    endfunction

    static function int wcu(int wv, int dp, int dd);
      longint a;
      int w1;
      a  = longint'(dp) * longint'(8192 - wv);
      w1 = wv + int'(a >>> 16);
      a  = longint'(dd) * longint'(w1 + 4915);
      return w1 + int'(a >>> 16);
    endfunction

    // one time unit t; returns the output spike vector as a bit mask
    function longint time_unit(int t, bit train);
      bit any;
      longint fmask;
      bit above [NO];
      any = 0;
      for (int i = 0; i < NI; i++) begin
        spk[i] = fires_at(i, t);
        age[i] = spk[i] ? 0 : (age[i] < 31 ? age[i] + 1 : 31);
        any |= spk[i];
      end
      for (int j = 0; j < NO; j++) begin
        fired[j] = 0;
        blk[j] = (refr[j] != 0);
        if (refr[j] != 0) begin refr[j]--; p[j] = 0; end
        else if (p[j] <= -16384) begin p[j] = 0; n_pmin++; end
        else if (p[j] > 0) begin p[j] = (p[j] < 1024) ? 0 : p[j] - 1024; n_leak++; end
      end
      fmask = 0;
      if (!any) begin n_tu_quiet++; return 0; end
      n_tu_input++;
      for (int j = 0; j < NO; j++) begin
        if (blk[j]) begin n_block++; continue; end
        for (int i = 0; i < NI; i++) if (spk[i]) p[j] += w[j][i];
      end
      for (int j = 0; j < NO; j++) above[j] = !blk[j] && p[j] >= vth;
      if (!first_done) begin
        int win;
        win = -1;
        for (int j = 0; j < NO; j++) if (above[j] && (win < 0 || p[j] > p[win])) win = j;
        if (win >= 0) begin
          first_done = 1; n_li++;
          for (int j = 0; j < NO; j++) if (j != win) p[j] -= (vth >>> 1);
          for (int j = 0; j < NO; j++) above[j] = (j == win);
        end
      end
      for (int j = 0; j < NO; j++)
        if (above[j]) begin
          fired[j] = 1; p[j] = 0; refr[j] = 15; blk[j] = 1; fmask |= (longint'(1) << j); n_fire++;
        end
      if (train && fmask != 0) begin
        n_tu_wc++;
        for (int i = 0; i < NI; i++) begin
          int nx, dp, dd;
          // time to the next spike of input i after t
          nx = (period[i] == 0) ? 0 : period[i] - ((t + 1) % period[i]);
          dp = lut_pot[age[i]];
          dd = (nx < 32) ? lut_dep[nx] : 0;
          if (dp != 0) n_pot++;
          if (dd != 0) n_dep++;
          for (int j = 0; j < NO; j++) if (fired[j]) w[j][i] = wcu(w[j][i], dp, dd);
        end
      end
      for (int j = 0; j < NO; j++) if (fired[j] && cnt[j] < 255) cnt[j]++;
      return fmask;
    endfunction

    function int winner();
      int b;
      b = 0;
      for (int j = 1; j < NO; j++) if (cnt[j] > cnt[b]) b = j;
      return b;
    endfunction
  endclass
endpackage

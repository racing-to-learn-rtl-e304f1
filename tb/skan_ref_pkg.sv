// skan_ref_pkg - behavioural reference model of a SKAN layer for the
// testbenches.
//
// A plain integer model of the update rules, one call of step() per time
// step, written independently of the RTL (no shared code). It keeps every
// kernel's phase p in {-1,0,+1}, value r and step size dr, every neuron's
// output s, threshold th and previous membrane potential vsum, and the global
// inhibitory countdown inh. Besides the state it counts how often each
// mechanism of the model occurred, so a testbench can prove that its stimulus
// exercised them. For a single neuron driven with an external inhibition
// input, pass ext_inh >= 0 to step() to replace the internal countdown.
package skan_ref_pkg;

  typedef struct {
    int spikes;          // steps with s = 1
    int pulse_starts;    // rising edges of s
    int blocked;         // above threshold but kept silent by inhibition
    int rises;           // threshold rises
    int fall_zero;       // threshold falls as the potential returns to zero
    int fall_edge;       // threshold falls at the end of the neuron's pulse
    int dr_inc;          // step size increased (kernel late)
    int dr_dec;          // step size decreased (kernel early)
    int dr_at_max;       // increase refused at the ceiling
    int dr_at_min;       // decrease refused at the floor
    int inh_expired;     // inhibition countdown reached zero
    int ignored_u;       // input spike ignored by an active kernel
    int r_clipped;       // kernel value saturated at the peak w
  } events_t;

  class skan_model;
    int N, I, W, DDR, DRMAX, DRMIN, TR, TF, IMAX, IDEC, THMAX;
    bit network;
    int p[][], r[][], dr[][];
    int s[], th[], vsum[];
    int inh;
    events_t ev;

    function new(int n, int i, int w, int ddr, int drmax, int drmin,
                 int tr, int tf, int imax, int idec, int thmax, bit network);
      N = n; I = i; W = w; DDR = ddr; DRMAX = drmax; DRMIN = drmin;
      TR = tr; TF = tf; IMAX = imax; IDEC = idec; THMAX = thmax;
      this.network = network;
      p = new[N]; r = new[N]; dr = new[N];
      foreach (p[k]) begin p[k] = new[I]; r[k] = new[I]; dr[k] = new[I]; end
      s = new[N]; th = new[N]; vsum = new[N];
      ev = '{default: 0};
    endfunction

    function void reset(int dr0[][], int th0[]);
      for (int n = 0; n < N; n++) begin
        for (int i = 0; i < I; i++) begin p[n][i] = 0; r[n][i] = 0; dr[n][i] = dr0[n][i]; end
        s[n] = 0; th[n] = th0[n]; vsum[n] = 0;
      end
      inh = 0;
    endfunction

    // One time step. u[i] are the input spikes of this step.
    function void step(bit u[], int ext_inh = -1);
      int  pn, rn, drn, sum;
      bit  any, inh_on, sn, fall;
      any = 0;
      inh_on = (ext_inh >= 0) ? (ext_inh != 0) : (inh > 0);
      for (int n = 0; n < N; n++) begin
        sum = 0;
        for (int i = 0; i < I; i++) begin
          if (p[n][i] == 0)      pn = u[i] ? 1 : 0;
          else if (p[n][i] == 1) pn = (r[n][i] >= W) ? -1 : 1;
          else                   pn = (r[n][i] > 0) ? -1 : 0;
          if (u[i] && p[n][i] != 0) ev.ignored_u++;
          rn = r[n][i] + p[n][i] * dr[n][i];
          if (rn > W) begin rn = W; ev.r_clipped++; end
          if (rn < 0) rn = 0;
          drn = dr[n][i] + p[n][i] * DDR * s[n];
          if (drn > DRMAX) begin drn = DRMAX; end
          if (drn < DRMIN) begin drn = DRMIN; end
          if (s[n] && p[n][i] == 1)  begin if (dr[n][i] < DRMAX) ev.dr_inc++; else ev.dr_at_max++; end
          if (s[n] && p[n][i] == -1) begin if (dr[n][i] > DRMIN) ev.dr_dec++; else ev.dr_at_min++; end
          p[n][i] = pn; r[n][i] = rn; dr[n][i] = drn;
          sum += rn;
        end
        if (network) begin
          sn   = (sum > th[n]) && (!inh_on || s[n]);
          fall = (sum == 0 && vsum[n] > 0 && !inh_on) || (!sn && s[n]);
          if (sum > th[n] && !sn) ev.blocked++;
          if (!sn && s[n]) ev.fall_edge++;
          else if (fall) ev.fall_zero++;
        end else begin
          sn   = sum > th[n];
          fall = (sum == 0 && vsum[n] > 0);
          if (fall && !sn) ev.fall_zero++;
        end
        if (sn) begin
          ev.rises++; ev.spikes++;
          if (!s[n]) ev.pulse_starts++;
          th[n] = (th[n] + TR > THMAX) ? THMAX : th[n] + TR;
        end else if (fall) begin
          th[n] = (th[n] < TF) ? 0 : th[n] - TF;
        end
        s[n] = sn; vsum[n] = sum;
        any |= sn;
      end
      if (any) inh = IMAX;
      else if (inh > 0) begin
        inh = (inh > IDEC) ? inh - IDEC : 0;
        if (inh == 0) ev.inh_expired++;
      end
    endfunction
  endclass

endpackage

// pas_ref_pkg: reference model of the PAS approximation procedure, for testbenches.
//
// A plain transcription of the published procedure with absolute sample
// indices, a full sample history and 64-bit arithmetic, written without
// reference to the RTL's relative-index registers. The counter-overflow rule is
// modelled as the RTL documents it: when i - t_prev reaches IMAX the forwarding
// branch is taken as if the threshold had been crossed. Both forms of the
// error update are modelled (printed form, or signed-area form).
// step() consumes one sample and returns 1 when a sample is forwarded, with
// its value, index difference and the cause (see the kind_e values).
package pas_ref_pkg;

  // Cause of a forwarded sample.
  typedef enum int {FWD_NONE = 0, FWD_TH_NOPEAK = 1, FWD_TH_PEAK = 2, FWD_OVF = 3} kind_e;

  class pas_ref;
    longint imax;
    bit     area;     // 1: f += x*dy - y*dx, 0: f += x*dx - y*dy (dx = 1)
    bit     primed;
    longint i, x, y, f, len, peak, tbar;
    longint hist[longint];

    function new(longint index_max, bit area_form = 0);
      imax   = index_max;
      area   = area_form;
      primed = 0;
      i = 0; x = 0; y = 0; f = 0; len = 0; peak = 0; tbar = 0;
    endfunction

    static function longint labs(longint v);
      return (v < 0) ? -v : v;
    endfunction

    function bit step(longint s, longint eps, output longint os, output longint oi,
                      output kind_e kind);
      longint dy, disp, t;
      bit th;
      os = 0; oi = 0; kind = FWD_NONE;
      if (!primed) begin
        primed  = 1;
        hist[0] = s;
        i       = 1;
        return 0;
      end
      hist[i] = s;
      dy   = s - hist[i-1];
      x    = x + 1;
      y    = y + dy;
      f    = area ? f + x * dy - y : f + x - y * dy;
      disp = labs(y) + x;
      if (disp < len && peak == 0) peak = peak + i - 1;
      len = disp;
      th  = labs(f) > eps;
      if (th || (i - tbar) == imax) begin
        t    = (peak == 0) ? i - 1 : peak;
        os   = hist[t];
        oi   = t - tbar;
        kind = !th ? FWD_OVF : (peak == 0) ? FWD_TH_NOPEAK : FWD_TH_PEAK;
        f    = 0;
        peak = 0;
        x    = i - t;
        y    = s - hist[t];
        for (longint k = tbar; k < t; k++) hist.delete(k);
        tbar = t;
        len  = labs(y) + x;
      end
      i = i + 1;
      return kind != FWD_NONE;
    endfunction
  endclass

endpackage

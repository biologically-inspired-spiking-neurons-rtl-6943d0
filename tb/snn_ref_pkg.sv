// snn_ref_pkg: behavioural reference of the PWL neuron network, used by the
// testbenches to predict the hardware bit for bit.
//
// The neuron step is written as a single expression per model, straight from
// the model equations, with every constant product realised by the same
// arithmetic right shifts (floor) the hardware uses; it knows nothing about
// pipeline stages, buffers or clocks. The snn_ref class holds the state of a
// whole network (v, u, spike counter, weights and pending current per output
// neuron) and advances one neuron per call, in the order of the rule:
// current from the present weights, Euler step, spike test and reset, counter
// update, weight change, next current.
package snn_ref_pkg;

  localparam int VB = 20;
  localparam longint SCALE = 4096;                       // 8.12

  function automatic longint fx(real r);
    return longint'(r * real'(SCALE));                    // round to nearest
  endfunction

  function automatic longint sat(longint x, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    longint mn = -(longint'(1) <<< (bits - 1));
    return (x > mx) ? mx : (x < mn) ? mn : x;
  endfunction

  function automatic longint wrap(longint x, int bits);
    longint m = longint'(1) <<< bits;
    longint r = x & (m - 1);
    return (r >= (m >>> 1)) ? r - m : r;
  endfunction

  function automatic longint absl(longint x);
    return (x < 0) ? -x : x;
  endfunction

  // model: 0 = PWL2, 1 = PWL3, 2 = PWL4
  function automatic longint v_next(int model, longint v, longint u, longint i, int dt);
    longint x = v + fx(62.5);
    longint f, a, b;
    case (model)
      0: begin
        a = absl(x);
        f = ((a >>> 1) + (a >>> 2)) + (i - u - fx(20.0));
      end
      1: begin
        a = absl(x + fx(5.8)) + absl(x - fx(5.8));
        f = ((a >>> 1) + (a >>> 3)) + (i - u - fx(23.2));
      end
      default: begin
        a = absl(x + fx(11.0)) + absl(x - fx(11.0));
        b = absl(x);
        f = (((a >>> 1) + (a >>> 2)) + ((b >>> 2) + (b >>> 3))) + (i - u - fx(33.0));
      end
    endcase
    return sat(v + (f >>> dt), VB);
  endfunction

  function automatic longint u_next(longint v, longint u, int dt);
    longint e = ((v >>> 2) + (v >>> 4)) - u;
    longint g = (e >>> 3) + (e >>> 4) + (e >>> 6);
    return sat(u + (g >>> dt), VB);
  endfunction

  localparam real C_MV = -65.0;
  localparam real D_INC = 6.0;
  localparam real VTH_MV = 30.0;

  class snn_ref;
    int M, N, model, dt, wb, cb, alpha, high, low;
    longint ibias;
    longint v[], u[], cnt[], ipend[];
    longint w[][];
    int     cgen;                 // bumped whenever the pattern changes
    int     ngen[];               // pattern generation of each ipend

    function new(int M, int N, int model, int dt, int wb, int cb, int alpha,
                 int high, int low, longint ibias);
      this.M = M; this.N = N; this.model = model; this.dt = dt; this.wb = wb;
      this.cb = cb; this.alpha = alpha; this.high = high; this.low = low;
      this.ibias = ibias;
      v = new[N]; u = new[N]; cnt = new[N]; ipend = new[N]; w = new[N]; ngen = new[N];
      foreach (w[j]) w[j] = new[M];
      reset();
    endfunction

    function void pattern_changed();
      cgen++;
    endfunction

    function void reset();
      cgen = 0;
      for (int j = 0; j < N; j++) begin
        v[j] = fx(C_MV);
        u[j] = fx(-20.3125);
        cnt[j] = 0;
        ipend[j] = sat(ibias, VB);
        ngen[j] = 0;
        for (int k = 0; k < M; k++) w[j][k] = 0;
      end
    endfunction

    // One update of output neuron j. c: pattern bits seen by the hardware in
    // this clock; tn: target bit; train: weight updates enabled.
    // Returns the spike flag, vo is the new potential before the reset rule,
    // chg the weight change applied (0 without update).
    function bit step(int j, bit c[], bit tn, bit train, output longint vo, output longint chg);
      longint vn, un, old, d, s;
      bit fire;
      vn = v_next(model, v[j], u[j], ipend[j], dt);
      un = u_next(v[j], u[j], dt);
      fire = (vn >= fx(VTH_MV));
      vo = vn;
      if (fire) begin
        v[j] = fx(C_MV);
        u[j] = sat(un + fx(D_INC), VB);
      end else begin
        v[j] = vn;
        u[j] = un;
      end
      old = cnt[j];
      if (fire) cnt[j] = 0;
      else if (old != (longint'(1) <<< cb) - 1) cnt[j] = old + 1;
      chg = 0;
      if (fire && train) begin
        d = old - (tn ? low : high);
        chg = sat(d >>> alpha, wb);
      end
      // the sum only changes with the weights or the pattern
      if (chg != 0 || ngen[j] != cgen) begin
        s = 0;
        for (int k = 0; k < M; k++) begin
          w[j][k] = sat(w[j][k] + (c[k] ? chg : wrap(-chg, wb)), wb);
          s += c[k] ? w[j][k] : -w[j][k];
        end
        ipend[j] = sat(s + ibias, VB);
        ngen[j] = cgen;
      end
      return fire;
    endfunction
  endclass

endpackage

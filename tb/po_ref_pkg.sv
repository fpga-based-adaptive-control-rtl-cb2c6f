// po_ref_pkg: integer reference model of one P&O controller step, written
// directly from the published Algorithms 1 and 2 (with the previous-step
// intensity used in the comparison) and the circular constraint. Used by
// the testbenches to predict S_ctrl independently of the RTL.
package po_ref_pkg;

  typedef struct {
    int s;       // control value
    int idx;     // 0, 1, 2
    int i_prev;  // intensity of the previous step
    int imax_run;
    int dp;      // step used in the last update
  } po_state_t;

  // mode: 0 hold, 1 classical, 2 adaptive, 3 sweep
  function automatic po_state_t po_step(po_state_t st, int mode, bit en, int i,
                                        int imax, bit imax_auto, int p, int beta,
                                        int dp_max, int shift, int smin, int smax,
                                        int sweep);
    po_state_t n = st;
    int im, d, dp, stp;
    im = imax;
    if (imax_auto) im = (i > st.imax_run) ? i : st.imax_run;
    d  = (im > i) ? im - i : 0;
    dp = (d >> shift) + beta;
    if (dp > dp_max) dp = dp_max;
    stp = (mode == 2) ? dp : p;
    n.dp = stp;
    if (mode == 1 || mode == 2) begin
      case (st.idx)
        0: if (en) begin n.s = st.s + stp; n.idx = 1; end
        1: if (i > st.i_prev) n.s = st.s + stp;
           else begin n.s = st.s - 2*stp; n.idx = 2; end
        2: if (i > st.i_prev) n.s = st.s - stp;
           else begin n.s = st.s + stp; n.idx = 0; end
        default: n.idx = 0;
      endcase
    end else if (mode == 3) begin
      n.s = st.s + sweep; n.idx = 0;
    end else n.idx = 0;
    if (n.s > smax) n.s = smin;
    else if (n.s < smin) n.s = smax;
    n.i_prev = i;
    if (en && i > st.imax_run) n.imax_run = i;
    if (!en) n.imax_run = 0;
    return n;
  endfunction

endpackage

// batage_pkg: the dual counter that every BATAGE table entry holds, and the
// operations on it. A dual counter keeps two saturating 3-bit counts, n1 for
// taken and n0 for not-taken outcomes; it predicts taken when n1 > n0. Its
// confidence has three levels derived from the smaller and larger count,
// high when 2*min+1 < max, medium when 2*min+1 == max, low otherwise, so a
// fresh (0,0) counter is low and a counter must see several agreeing
// outcomes before it is trusted. Decay moves a counter one step towards low
// confidence. The counter form follows the published BATAGE predictor; the
// exact thresholds are this design's reading of it.
package batage_pkg;

  typedef struct packed {
    logic [2:0] n1;
    logic [2:0] n0;
  } dual_ctr_t;

  typedef enum logic [1:0] { CONF_LOW = 2'd0, CONF_MED = 2'd1, CONF_HIGH = 2'd2 } conf_e;

  function automatic logic dc_taken(input dual_ctr_t c);
    return c.n1 > c.n0;
  endfunction

  function automatic logic dc_empty(input dual_ctr_t c);
    return (c.n1 == 3'd0) && (c.n0 == 3'd0);
  endfunction

  function automatic conf_e dc_conf(input dual_ctr_t c);
    logic [3:0] mn, mx, lim;
    mn  = {1'b0, (c.n1 < c.n0) ? c.n1 : c.n0};
    mx  = {1'b0, (c.n1 < c.n0) ? c.n0 : c.n1};
    lim = 4'(2 * mn + 1);
    if (lim < mx)       return CONF_HIGH;
    else if (lim == mx) return CONF_MED;
    else                return CONF_LOW;
  endfunction

  function automatic dual_ctr_t dc_update(input dual_ctr_t c, input logic taken);
    dual_ctr_t r;
    r = c;
    if (taken) begin
      if (c.n1 != 3'd7)      r.n1 = c.n1 + 3'd1;
      else if (c.n0 != 3'd0) r.n0 = c.n0 - 3'd1;
    end else begin
      if (c.n0 != 3'd7)      r.n0 = c.n0 + 3'd1;
      else if (c.n1 != 3'd0) r.n1 = c.n1 - 3'd1;
    end
    return r;
  endfunction

  function automatic dual_ctr_t dc_decay(input dual_ctr_t c);
    dual_ctr_t r;
    r = c;
    if (c.n1 > c.n0)      r.n1 = c.n1 - 3'd1;
    else if (c.n0 > c.n1) r.n0 = c.n0 - 3'd1;
    return r;
  endfunction

  // Initial value of a newly allocated entry: one observation of taken.
  function automatic dual_ctr_t dc_alloc(input logic taken);
    return taken ? dual_ctr_t'{n1: 3'd1, n0: 3'd0} : dual_ctr_t'{n1: 3'd0, n0: 3'd1};
  endfunction

endpackage

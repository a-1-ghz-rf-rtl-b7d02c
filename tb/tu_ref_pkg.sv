// Reference model used by the Trigger Unit testbenches.
//
// ref_bit() gives the Out level at absolute time t (in RF periods) for modes
// 1-5, given t0, the time of the first event (B RF periods after the Sync
// edge plus the implementation's fixed latency). It is written directly from
// the description of the modes, independently of the RTL's word arithmetic:
// pulses of pw RF periods every HT RF periods (one in Single, W in Windowed),
// and in Low-frequency mode a square wave high for HT and low for HT, or HT+1
// with the unbalanced flag. HT below 8 counts as 8, as in the RTL.
package tu_ref_pkg;
  import tu_pkg::*;

  function automatic bit ref_bit(longint t, longint t0, tu_cfg_t c);
    longint k, ph, per, ht;
    if (t < t0) return 1'b0;
    ht = (c.ht < 8) ? 8 : longint'(c.ht);
    if (c.mode == MODE_LOWFREQ) begin
      per = 2 * ht + (c.unbalanced ? 1 : 0);
      ph  = (t - t0) % per;
      return ph < ht;
    end
    if (c.mode == MODE_PLAY) return 1'b0;
    k  = (t - t0) / ht;
    ph = (t - t0) % ht;
    if (c.mode == MODE_SINGLE && k > 0) return 1'b0;
    if (c.mode == MODE_WINDOWED && k >= ((c.w == 0) ? 1 : longint'(c.w))) return 1'b0;
    return ph < longint'(c.pw);
  endfunction

endpackage

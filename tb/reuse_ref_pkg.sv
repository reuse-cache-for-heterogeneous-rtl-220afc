// reuse_ref_pkg: reference model of the reuse-cache replacement policy, used
// by the testbenches to predict what the RTL must do.
//
// The model keeps its own tag and data arrays as flat arrays indexed
// set*ways+way, with an LRU age per entry, and applies the policy for one
// request at a time: hit, first miss (tag only), second miss (data insert),
// tag eviction with or without data, data eviction through the reverse
// pointer, and write-backs from the L2s. It also provides the initial content
// of every DRAM line.
package reuse_ref_pkg;
  import reuse_llc_pkg::*;

  // Content of a DRAM line that was never written: each 32-bit word is
  // (addr * 0x9E3779B1) xor (word index * 0x01010101).
  function automatic line_t init_line(line_addr_t a);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++)
      l[w*32 +: 32] = (32'(a) * 32'h9E37_79B1) ^ (32'(w) * 32'h0101_0101);
    return l;
  endfunction

  typedef struct {
    bit data_hit;
    bit tag_insert;
    bit data_insert;
    bit tag_evict;
    bit tag_evict_data;
    bit data_evict;
    int dirty_wb;
    bit write_hit;
    bit write_around;
  } outcome_t;

  class reuse_ref;
    int tsets, tways, dsets, dways;
    bit tvalid[]; int ttag[]; bit tdpv[]; int tdptr[]; int tage[];
    bit dvalid[]; bit ddirty[]; int dtptr[]; int dage[];

    function new(int ts, int tw, int ds, int dw);
      tsets = ts; tways = tw; dsets = ds; dways = dw;
      tvalid = new[ts*tw]; ttag = new[ts*tw]; tdpv = new[ts*tw];
      tdptr = new[ts*tw];  tage = new[ts*tw];
      dvalid = new[ds*dw]; ddirty = new[ds*dw]; dtptr = new[ds*dw];
      dage = new[ds*dw];
      foreach (tage[i]) begin tvalid[i] = 0; tdpv[i] = 0; tage[i] = i % tw; end
      foreach (dage[i]) begin dvalid[i] = 0; ddirty[i] = 0; dage[i] = i % dw; end
    endfunction

    // LRU over a flat age array: the touched entry becomes 0, younger ones age
    static function void touch(ref int age[], input int base, int ways, int way);
      int a = age[base + way];
      for (int w = 0; w < ways; w++)
        if (age[base + w] < a) age[base + w]++;
      age[base + way] = 0;
    endfunction

    static function int oldest(ref int age[], input int base, int ways);
      for (int w = 0; w < ways; w++)
        if (age[base + w] == ways - 1) return w;
      return -1;
    endfunction

    function int tvictim(int s);
      for (int w = 0; w < tways; w++) if (!tvalid[s*tways + w]) return w;
      return oldest(tage, s*tways, tways);
    endfunction

    function int dvictim(int s);
      for (int w = 0; w < dways; w++) if (!dvalid[s*dways + w]) return w;
      return oldest(dage, s*dways, dways);
    endfunction

    function outcome_t access(int addr, bit write);
      outcome_t o = '{default: 0};
      int ts = addr % tsets;
      int tg = addr / tsets;
      int hw = -1;
      for (int w = 0; w < tways; w++)
        if (tvalid[ts*tways + w] && ttag[ts*tways + w] == tg) hw = w;
      if (hw >= 0 && tdpv[ts*tways + hw]) begin
        int di = tdptr[ts*tways + hw];
        touch(tage, ts*tways, tways, hw);
        touch(dage, (di / dways) * dways, dways, di % dways);
        if (write) begin ddirty[di] = 1; o.write_hit = 1; end
        else o.data_hit = 1;
      end else if (write) begin
        o.write_around = 1;
      end else if (hw >= 0) begin
        int ds = addr % dsets;
        int v  = dvictim(ds);
        int di = ds*dways + v;
        touch(tage, ts*tways, tways, hw);
        if (dvalid[di]) begin
          o.data_evict = 1;
          tdpv[dtptr[di]] = 0;
          if (ddirty[di]) o.dirty_wb++;
        end
        dvalid[di] = 1; ddirty[di] = 0; dtptr[di] = ts*tways + hw;
        tdpv[ts*tways + hw] = 1; tdptr[ts*tways + hw] = di;
        touch(dage, ds*dways, dways, v);
        o.data_insert = 1;
      end else begin
        int v  = tvictim(ts);
        int ti = ts*tways + v;
        o.tag_insert = 1;
        if (tvalid[ti]) begin
          o.tag_evict = 1;
          if (tdpv[ti]) begin
            o.tag_evict_data = 1;
            dvalid[tdptr[ti]] = 0;
            if (ddirty[tdptr[ti]]) o.dirty_wb++;
            ddirty[tdptr[ti]] = 0;
          end
        end
        tvalid[ti] = 1; ttag[ti] = tg; tdpv[ti] = 0;
        touch(tage, ts*tways, tways, v);
      end
      return o;
    endfunction
  endclass

endpackage

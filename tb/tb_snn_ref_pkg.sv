// tb_snn_ref_pkg: reference models used by the testbenches.
//
// Untimed models written from the network's definition, not from the RTL
// structure: the sorter model forms absolute spike times and sorts them;
// the layer model applies the LIF equation (decay by 0.5 per time unit,
// weighted sum of the spikes of one time, threshold 1.0 with reset by
// subtraction) to a token stream and emits the output spikes of each time
// as a group in descending neuron index. Also holds the test weight
// function shared by testbench and weight loading.
package tb_snn_ref_pkg;
  import snn_pkg::*;

  typedef struct {
    int unsigned delta;
    int unsigned idx;
    bit          last;
  } tok_t;

  typedef tok_t tok_q_t[$];

  // Test weight, signed W_W-bit, mostly positive so that neurons fire.
  function automatic int test_weight(int layer, int row, int col, int seed);
    int unsigned h;
    h = (row * 7919 + col * 104729 + layer * 31337 + seed * 2654435) ^ (row * col);
    h = h ^ (h >> 7);
    return int'(h % 11) - 5;
  endfunction

  // Spike sorter: trains[i] holds the delta times of synapse i.
  function automatic tok_q_t ref_sort(ref int unsigned trains[][$]);
    tok_q_t res;
    longint unsigned key[$];
    longint unsigned prev;
    foreach (trains[i]) begin
      longint unsigned t = 0;
      foreach (trains[i][k]) begin
        t += trains[i][k];
        key.push_back((t << 16) | longint'(i));
      end
    end
    key.sort();
    prev = 0;
    foreach (key[k]) begin
      tok_t x;
      x.delta = int'((key[k] >> 16) - prev);
      x.idx   = int'(key[k] & 16'hffff);
      x.last  = 0;
      prev    = key[k] >> 16;
      res.push_back(x);
    end
    begin
      tok_t e;
      e.delta = 0; e.idx = 0; e.last = 1;
      res.push_back(e);
    end
    return res;
  endfunction

  function automatic longint sat_pot(longint v);
    longint pmax = (longint'(1) << (POT_W-1)) - 1;
    longint pmin = -(longint'(1) << (POT_W-1));
    return (v > pmax) ? pmax : (v < pmin) ? pmin : v;
  endfunction

  // One layer of n_neur LIF neurons on an input token stream; the test
  // weights are scaled down by 2^wshift.
  function automatic tok_q_t ref_layer(tok_q_t in_q, int n_neur, int layer, int seed,
                                       int wshift = 0);
    tok_q_t res;
    longint p[];
    bit     pending = 0;
    int unsigned acc = 0;
    longint theta = longint'(1) << POT_FRAC;
    p = new[n_neur];
    foreach (p[n]) p[n] = 0;
    foreach (in_q[k]) begin
      tok_t t = in_q[k];
      if (pending && (t.delta != 0 || t.last)) begin
        bit first = 1;
        for (int n = n_neur - 1; n >= 0; n--) begin
          if (p[n] >= theta) begin
            tok_t o;
            p[n] = p[n] - theta;
            o.delta = first ? acc : 0;
            o.idx = n; o.last = 0;
            res.push_back(o);
            first = 0;
          end
        end
        if (!first) acc = 0;
        pending = 0;
      end
      if (t.last) begin
        tok_t e;
        e.delta = 0; e.idx = 0; e.last = 1;
        res.push_back(e);
        foreach (p[n]) p[n] = 0;
        acc = 0;
        continue;
      end
      foreach (p[n]) begin
        // beta^delta with beta = 0.5: delta halvings, rounding toward -inf
        int unsigned sh = (t.delta > 62) ? 62 : t.delta;
        p[n] = p[n] >>> sh;
        p[n] = sat_pot(p[n] + longint'(test_weight(layer, int'(t.idx), n, seed) >>> wshift)
                               * (longint'(1) << (POT_FRAC - W_FRAC)));
      end
      acc = (acc + t.delta > (1 << DT_W) - 1) ? (1 << DT_W) - 1 : acc + t.delta;
      pending = 1;
    end
    return res;
  endfunction

endpackage

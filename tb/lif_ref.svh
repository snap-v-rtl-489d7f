// lif_ref.svh -- reference model of one leaky integrate-and-fire update,
// shared by the testbenches. It mirrors the neuron's documented arithmetic:
// v' = sat(decay(v) + acc); fire when v' > threshold; then hold, zero or
// subtract the threshold. Decay keeps 1/8, 1/4, 1/2 or 3/4 using arithmetic
// shifts. Include inside a module that imports snapv_pkg.
function automatic weight_t ref_decay(weight_t v, logic [1:0] d);
  case (d)
    2'd0:    return v >>> 3;
    2'd1:    return v >>> 2;
    2'd2:    return v >>> 1;
    default: return (v >>> 1) + (v >>> 2);
  endcase
endfunction

function automatic weight_t ref_lif(weight_t v, weight_t acc, logic [1:0] d, logic [1:0] r,
                                    weight_t thr, output bit fire);
  weight_t s;
  s = sat_add(ref_decay(v, d), acc);
  fire = (s > thr);
  if (!fire) return s;
  case (r)
    2'd1:    return '0;
    2'd2:    return sat_sub(s, thr);
    default: return s;
  endcase
endfunction

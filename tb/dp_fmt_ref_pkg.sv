// dp_fmt_ref_pkg: format-dispatching reference arithmetic for the neuron and
// layer testbenches, on top of dp_ref_pkg.
//
// For each format the exact dot product is kept as an integer in the EMAC's
// own accumulator unit: 2^-2Q for fixed point (Q = 5), min^2 for the 8-bit
// float (we = 4, wf = 3), minpos^2 = 2^-24 for the 8-bit posit (es = 1).
// These are the default parameters of dp_neuron and dp_dense_layer.
package dp_fmt_ref_pkg;
  import dp_pkg::*;
  import dp_ref_pkg::*;

  localparam int Q  = 5;
  localparam int WE = 4, WF = 3;
  localparam int FSH = (2 ** (WE - 1)) - 1 + WF - 1;
  localparam int ES = 1, L = 24;

  function automatic big_t ref_bias(fmt_e f, logic [7:0] v);
    case (f)
      FMT_FIXED: return big_t'($signed(v)) <<< Q;
      FMT_FLOAT: return float_val(32'(v), WE, WF) <<< FSH;
      default:   return posit_val(32'(v), 8, ES, L);
    endcase
  endfunction

  function automatic big_t ref_prod(fmt_e f, logic [7:0] x, logic [7:0] y);
    case (f)
      FMT_FIXED: return big_t'($signed(x)) * big_t'($signed(y));
      FMT_FLOAT: return float_val(32'(x), WE, WF) * float_val(32'(y), WE, WF);
      default:   return posit_val(32'(x), 8, ES, L / 2) * posit_val(32'(y), 8, ES, L / 2);
    endcase
  endfunction

  function automatic logic [7:0] ref_round(fmt_e f, big_t s);
    big_t q, r, half;
    case (f)
      FMT_FIXED: begin
        half = big_t'(1) <<< (Q - 1);
        q = s / (big_t'(1) <<< Q);
        r = s - q * (big_t'(1) <<< Q);
        if (r < 0) begin
          q = q - 1;
          r = r + (big_t'(1) <<< Q);
        end
        if (r > half || (r == half && q[0])) q = q + 1;
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        return q[7:0];
      end
      FMT_FLOAT: return 8'(float_round(s, WE, WF));
      default:   return 8'(posit_round(s <<< 8, 8, ES, L + 8));
    endcase
  endfunction

  // Value of a rounded result in accumulator units (to tell rounding apart).
  function automatic big_t ref_value(fmt_e f, logic [7:0] v);
    return ref_bias(f, v);
  endfunction

  // A random operand of format f: a mix of values near one, any pattern
  // (no posit Not-a-Real), extremes and zero.
  function automatic logic [7:0] ref_rand(fmt_e f);
    logic [7:0] v;
    int c;
    c = int'($urandom_range(0, 5));
    case (f)
      FMT_FIXED: v = (c < 3) ? 8'($urandom_range(0, 63)) - 8'd32 : (c < 5) ? 8'($urandom) : 8'h00;
      FMT_FLOAT: begin
        v = (c < 3) ? {1'($urandom), 4'($urandom_range(4, 9)), 3'($urandom)}
          : (c < 5) ? 8'($urandom) : 8'h00;
        if (v[6:3] == 4'hF) v[6] = 1'b0;
      end
      default: begin
        v = (c < 3) ? {1'($urandom), 2'b10, 5'($urandom)} ^ {1'b0, 7'($urandom_range(0, 3))}
          : (c < 5) ? 8'($urandom) : 8'h00;
        if (v == 8'h80) v = 8'h00;
      end
    endcase
    return v;
  endfunction
endpackage

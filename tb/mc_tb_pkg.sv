// mc_tb_pkg: reference models for the testbenches of the MC sorting circuits.
//
// Everything here is written independently of the RTL netlist: the
// three-valued gate tables, the published state tables of the comparison
// automaton, binary reflected Gray code, valid strings and the metastable
// closure of max / min computed by enumerating resolutions.
//
// A three-valued string of up to 16 bits is held as (v, m): m marks the
// metastable bits, v the value of the stable ones (v is 0 where m is 1).
// The dual-rail image of a bit is {hi, lo} = {v | m, v & ~m}.
package mc_tb_pkg;

  typedef enum logic [1:0] {T0 = 2'd0, T1 = 2'd1, TM = 2'd2} trit_e;

  // Dual-rail code of a trit: 0 = 00, 1 = 11, M = 10.
  function automatic logic [1:0] t2r(trit_e t);
    case (t)
      T0:      return 2'b00;
      T1:      return 2'b11;
      default: return 2'b10;
    endcase
  endfunction

  // Decode dual-rail; 2'b01 is illegal and reported as ok = 0.
  function automatic trit_e r2t(logic [1:0] r, output bit ok);
    ok = 1'b1;
    case (r)
      2'b00:   return T0;
      2'b11:   return T1;
      2'b10:   return TM;
      default: begin ok = 1'b0; return TM; end
    endcase
  endfunction

  // Gate tables of the three-valued model, written out as tables.
  function automatic trit_e t_and(trit_e a, trit_e b);
    if (a == T0 || b == T0) return T0;
    if (a == T1 && b == T1) return T1;
    return TM;
  endfunction

  function automatic trit_e t_or(trit_e a, trit_e b);
    if (a == T1 || b == T1) return T1;
    if (a == T0 && b == T0) return T0;
    return TM;
  endfunction

  function automatic trit_e t_not(trit_e a);
    case (a)
      T0:      return T1;
      T1:      return T0;
      default: return TM;
    endcase
  endfunction

  // Superposition of two trits.
  function automatic trit_e t_star(trit_e a, trit_e b);
    return (a == b) ? a : TM;
  endfunction

  // Comparison automaton transition table (current state, input pair).
  // States and inputs are 2-bit codes {x1, x2}.
  function automatic logic [1:0] diamond(logic [1:0] s, logic [1:0] b);
    case (s)
      2'b00:   return b;
      2'b01:   return 2'b01;
      2'b10:   return 2'b10;
      default: case (b)          // state 11
                 2'b00:   return 2'b11;
                 2'b01:   return 2'b10;
                 2'b11:   return 2'b00;
                 default: return 2'b01;
               endcase
    endcase
  endfunction

  // Output table: {max bit, min bit} from the state before the bit and {g, h}.
  function automatic logic [1:0] outop(logic [1:0] s, logic [1:0] b);
    logic g, h;
    g = b[1];
    h = b[0];
    case (s)
      2'b00:   return {g | h, g & h};
      2'b10:   return {g, h};
      2'b11:   return {g & h, g | h};
      default: return {h, g};
    endcase
  endfunction

  function automatic logic [15:0] gray(logic [15:0] x);
    return x ^ (x >> 1);
  endfunction

  function automatic logic [15:0] ungray(logic [15:0] g, int unsigned nb);
    logic [15:0] x;
    x = '0;
    for (int i = int'(nb) - 1; i >= 0; i--)
      x[i] = (i == int'(nb) - 1) ? g[i] : (x[i+1] ^ g[i]);
    return x;
  endfunction

  // Valid string of rank r, 0 <= r <= 2^(nb+1) - 2: rank 2x is the code of x,
  // rank 2x+1 is code(x) * code(x+1) (the bit where they differ is M).
  function automatic void valid_string(int unsigned r, int unsigned nb,
                                       output logic [15:0] v, output logic [15:0] m);
    logic [15:0] a, c;
    a = gray(16'(r / 2));
    if (r % 2 == 0) begin
      v = a;
      m = '0;
    end else begin
      c = gray(16'(r / 2 + 1));
      m = a ^ c;
      v = a & c;
    end
    if (nb < 16) begin
      v &= (16'h1 << nb) - 16'h1;
      m &= (16'h1 << nb) - 16'h1;
    end
  endfunction

  // Metastable closure of (max, min) of two strings with at most one M each,
  // by enumerating all resolutions and superposing the binary results.
  function automatic void closure_2sort(logic [15:0] gv, logic [15:0] gm,
                                        logic [15:0] hv, logic [15:0] hm,
                                        int unsigned nb,
                                        output logic [15:0] xv, output logic [15:0] xm,
                                        output logic [15:0] nv, output logic [15:0] nm);
    logic [15:0] gr, hr, mx, mn;
    bit first;
    first = 1'b1;
    xv = '0; xm = '0; nv = '0; nm = '0;
    for (int gi = 0; gi < 2; gi++) begin
      for (int hi = 0; hi < 2; hi++) begin
        gr = (gi == 0) ? gv : (gv | gm);
        hr = (hi == 0) ? hv : (hv | hm);
        if (ungray(gr, nb) >= ungray(hr, nb)) begin
          mx = gr; mn = hr;
        end else begin
          mx = hr; mn = gr;
        end
        if (first) begin
          xv = mx; nv = mn; first = 1'b0;
        end else begin
          xm |= xv ^ mx;
          nm |= nv ^ mn;
        end
      end
    end
    xv &= ~xm;
    nv &= ~nm;
  endfunction

  // Closure of the automaton state after bits nb-1 .. nb-k (k bits from the
  // top) of g and h, for strings with at most one M each. Returned as
  // (value, meta) of the 2-bit state {x1, x2}.
  function automatic void closure_state(logic [15:0] gv, logic [15:0] gm,
                                        logic [15:0] hv, logic [15:0] hm,
                                        int unsigned nb, int unsigned k,
                                        output logic [1:0] sv, output logic [1:0] sm);
    logic [15:0] gr, hr;
    logic [1:0] s;
    bit first;
    first = 1'b1;
    sv = '0; sm = '0;
    for (int gi = 0; gi < 2; gi++) begin
      for (int hi = 0; hi < 2; hi++) begin
        gr = (gi == 0) ? gv : (gv | gm);
        hr = (hi == 0) ? hv : (hv | hm);
        s = 2'b00;
        for (int j = 0; j < int'(k); j++)
          s = diamond(s, {gr[int'(nb)-1-j], hr[int'(nb)-1-j]});
        if (first) begin
          sv = s; first = 1'b0;
        end else begin
          sm |= sv ^ s;
        end
      end
    end
    sv &= ~sm;
  endfunction

  // Dual-rail packing of a 16-bit (v, m) string and unpacking with checks.
  function automatic logic [15:0][1:0] to_rails(logic [15:0] v, logic [15:0] m);
    logic [15:0][1:0] r;
    for (int i = 0; i < 16; i++) r[i] = {v[i] | m[i], v[i] & ~m[i]};
    return r;
  endfunction

  function automatic void from_rails(logic [15:0][1:0] r, output logic [15:0] v,
                                     output logic [15:0] m, output bit ok);
    ok = 1'b1;
    for (int i = 0; i < 16; i++) begin
      v[i] = r[i][0];
      m[i] = r[i][1] & ~r[i][0];
      if (r[i] == 2'b01) ok = 1'b0;
    end
  endfunction

endpackage

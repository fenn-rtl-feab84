// tb_fenn_ref_pkg: reference arithmetic and instruction encoders for the FeNN
// testbenches.  The reference functions use plain integer arithmetic (floor
// division instead of shifts, explicit clamping) so that they are worked out
// independently of the RTL's formulation.
package tb_fenn_ref_pkg;

  // ---- lane arithmetic -------------------------------------------------------
  function automatic int s16(input logic [15:0] x);
    return (x[15]) ? int'(x) - 65536 : int'(x);
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, b, input bit sat, input bit sub);
    int r;
    r = sub ? s16(a) - s16(b) : s16(a) + s16(b);
    if (sat) begin
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
    end
    return r[15:0];
  endfunction

  // floor((a*b + R) / 2^n), truncated to 16 bits
  function automatic logic [15:0] ref_mul(input logic [15:0] a, b, input int n, input int mode,
                                          input logic [15:0] rnd);
    longint p, r, d, q;
    p = longint'(s16(a)) * longint'(s16(b));
    d = longint'(1) << n;
    case (mode)
      1: r = (n == 0) ? 0 : d / 2;
      2: r = longint'(rnd) % d;
      default: r = 0;
    endcase
    p = p + r;
    if (p >= 0) q = p / d;
    else        q = -((-p + d - 1) / d);
    return q[15:0];
  endfunction

  function automatic bit ref_cmp(input logic [15:0] a, b, input int c);
    case (c)
      0: return a == b;
      1: return a != b;
      2: return s16(a) < s16(b);
      default: return s16(a) >= s16(b);
    endcase
  endfunction

  // ---- Xoroshiro32++ [13,5,10,9] ---------------------------------------------
  function automatic logic [15:0] rotl16(input logic [15:0] x, input int k);
    logic [31:0] d;
    d = {x, x} << k;
    return d[31:16];
  endfunction

  function automatic void xoro_step(inout logic [15:0] s0, inout logic [15:0] s1,
                                    output logic [15:0] out);
    logic [15:0] t;
    out = rotl16(16'(s0 + s1), 9) + s0;
    t   = s0 ^ s1;
    s0  = rotl16(s0, 13) ^ t ^ 16'(t << 5);
    s1  = rotl16(t, 10);
  endfunction

  // ---- instruction encoders ----------------------------------------------------
  function automatic logic [31:0] enc(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                      input logic [2:0] f3, input logic [4:0] rd,
                                      input logic [4:0] grp);
    return {f7, rs2, rs1, f3, rd, grp, 2'b10};
  endfunction
  function automatic logic [31:0] i_vadd(input int vd, vs1, vs2, input bit sat = 0);
    return enc({6'd0, sat}, 5'(vs2), 5'(vs1), 3'd0, 5'(vd), 5'd0);
  endfunction
  function automatic logic [31:0] i_vsub(input int vd, vs1, vs2, input bit sat = 0);
    return enc({6'd0, sat}, 5'(vs2), 5'(vs1), 3'd1, 5'(vd), 5'd0);
  endfunction
  function automatic logic [31:0] i_vmul(input int vd, vs1, vs2, input int n, input int mode);
    return enc({1'b0, 2'(mode), 4'(n)}, 5'(vs2), 5'(vs1), 3'd2, 5'(vd), 5'd0);
  endfunction
  function automatic logic [31:0] i_vtst(input int rd, vs1, vs2, input int c);
    return enc(7'd0, 5'(vs2), 5'(vs1), 3'(c), 5'(rd), 5'd1);
  endfunction
  function automatic logic [31:0] i_vsel(input int vd, rs1, vs2);
    return enc(7'd0, 5'(vs2), 5'(rs1), 3'd0, 5'(vd), 5'd2);
  endfunction
  function automatic logic [31:0] i_vload(input int vd, rs1, input int imm, input int kind = 0);
    logic [11:0] i;
    i = 12'(imm);
    return {i, 5'(rs1), 3'(kind), 5'(vd), 5'd3, 2'b10};
  endfunction
  function automatic logic [31:0] i_vstore(input int vs2, rs1, input int imm);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(vs2), 5'(rs1), 3'd4, i[4:0], 5'd3, 2'b10};
  endfunction
  function automatic logic [31:0] i_vfill(input int vd, rs1);
    return enc(7'd0, 5'd0, 5'(rs1), 3'd0, 5'(vd), 5'd4);
  endfunction
  function automatic logic [31:0] i_vextract(input int rd, vs1, rs2);
    return enc(7'd0, 5'(rs2), 5'(vs1), 3'd1, 5'(rd), 5'd4);
  endfunction
  function automatic logic [31:0] i_vrng(input int vd);
    return enc(7'd0, 5'd0, 5'd0, 3'd0, 5'(vd), 5'd5);
  endfunction

  // ---- instruction-set reference model ---------------------------------------
  // Architectural state of one FeNN core and the effect of each instruction,
  // applied in program order.  exec() returns the scalar result (mask or element).
  class fenn_iss;
    logic [15:0] v  [32][32];
    logic [15:0] s0 [32];
    logic [15:0] s1 [32];
    logic [15:0] mem [int][32];
    int unsigned depth;
    int n_sat;     // lanes whose saturating add/sub clamped
    int n_stoch;   // stochastic multiplies

    function new(int unsigned d);
      depth = d;
      foreach (v[r, l]) v[r][l] = '0;
      foreach (s0[l]) begin s0[l] = '0; s1[l] = '0; end
      n_sat = 0;
      n_stoch = 0;
    endfunction

    function automatic int vidx(input logic [31:0] base, input logic [11:0] imm);
      logic [31:0] ea;
      ea = base + {{20{imm[11]}}, imm};
      return int'((ea >> 6) % depth);
    endfunction

    function automatic logic [31:0] exec(input logic [31:0] ins, input logic [31:0] x1, x2);
      logic [4:0] grp, rd, ra, rb;
      logic [2:0] f3;
      logic [6:0] f7;
      logic [15:0] r, rr, tmp[32];
      logic [31:0] res;
      int k, full;
      grp = ins[6:2]; rd = ins[11:7]; f3 = ins[14:12]; ra = ins[19:15]; rb = ins[24:20];
      f7 = ins[31:25];
      res = '0;
      case (grp)
        5'd0: for (int l = 0; l < 32; l++) begin
          if (f3 == 3'd2) begin
            rr = '0;
            if (f7[5:4] == 2'd2) xoro_step(s0[l], s1[l], rr);
            tmp[l] = ref_mul(v[ra][l], v[rb][l], int'(f7[3:0]), int'(f7[5:4]), rr);
          end else begin
            tmp[l] = ref_add(v[ra][l], v[rb][l], f7[0], f3 == 3'd1);
            full = (f3 == 3'd1) ? s16(v[ra][l]) - s16(v[rb][l]) : s16(v[ra][l]) + s16(v[rb][l]);
            if (f7[0] && (full > 32767 || full < -32768)) n_sat++;
          end
        end
        5'd1: for (int l = 0; l < 32; l++) res[l] = ref_cmp(v[ra][l], v[rb][l], int'(f3));
        5'd2: for (int l = 0; l < 32; l++) tmp[l] = x1[l] ? v[rb][l] : v[rd][l];
        5'd3: begin
          if (f3 == 3'd4) begin
            k = vidx(x1, {ins[31:25], ins[11:7]});
            for (int l = 0; l < 32; l++) mem[k][l] = v[rb][l];
          end else begin
            k = vidx(x1, ins[31:20]);
            for (int l = 0; l < 32; l++) begin
              if (f3 == 3'd0) tmp[l] = mem[k][l];
              else if (f3 == 3'd1) s0[l] = mem[k][l];
              else s1[l] = mem[k][l];
            end
          end
        end
        5'd4: begin
          if (f3 == 3'd0) for (int l = 0; l < 32; l++) tmp[l] = x1[15:0];
          else begin
            r = v[ra][x2[4:0]];
            res = {{16{r[15]}}, r};
          end
        end
        5'd5: for (int l = 0; l < 32; l++) xoro_step(s0[l], s1[l], tmp[l]);
        default: ;
      endcase
      if (grp == 5'd0 && f3 == 3'd2 && f7[5:4] == 2'd2) n_stoch++;
      // vector destinations are written after all lanes have read their operands
      if (grp == 5'd0 || grp == 5'd2 || grp == 5'd5 || (grp == 5'd3 && f3 == 3'd0) ||
          (grp == 5'd4 && f3 == 3'd0))
        for (int l = 0; l < 32; l++) v[rd][l] = tmp[l];
      return res;
    endfunction
  endclass

endpackage

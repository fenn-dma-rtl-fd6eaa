// fenn_ref_pkg: instruction-level reference model of the FeNN vector unit,
// written independently of the RTL for use by the testbenches.
//
// vec_model holds 32 vector registers of 32 signed 16-bit lanes, the two
// RNG seed registers, a vector memory (rows of 32 lanes) and 32 lane-local
// memories, and executes one instruction word at a time in program order.
// Field positions follow the encoding documented in fenn_pkg.
package fenn_ref_pkg;

  function automatic logic [15:0] ref_rotl(logic [15:0] x, int k);
    logic [31:0] d;
    d = {x, x} << k;
    return d[31:16];
  endfunction

  // xoroshiro32++ [13,5,10,9]; returns output, updates state
  function automatic logic [15:0] ref_xoro(inout logic [15:0] s0, inout logic [15:0] s1);
    logic [15:0] r, t;
    r  = ref_rotl(s0 + s1, 9) + s0;
    t  = s0 ^ s1;
    s0 = ref_rotl(s0, 13) ^ t ^ (t << 5);
    s1 = ref_rotl(t, 10);
    return r;
  endfunction

  // (a*b + round) >>> shift, low 16 bits
  function automatic logic [15:0] ref_mulshift(logic [15:0] a, logic [15:0] b, logic [15:0] rnd,
                                               int shift, int rmode);
    longint p, c;
    p = longint'($signed(a)) * longint'($signed(b));
    c = 0;
    if (rmode == 1 && shift > 0) c = longint'(1) << (shift - 1);
    if (rmode == 2)              c = longint'(rnd) % (longint'(1) << shift);
    p = p + c;
    p = p >>> shift;
    return p[15:0];
  endfunction

  function automatic logic [15:0] ref_sat(longint x);
    if (x > 32767)  return 16'h7fff;
    if (x < -32768) return 16'h8000;
    return x[15:0];
  endfunction

  class vec_model;
    logic [15:0] vr [32][32];
    logic [15:0] s0 [32];
    logic [15:0] s1 [32];
    logic [15:0] vmem [][32];
    logic [15:0] llm [32][];
    int          rows, depth;

    function new(int n_rows, int n_depth);
      rows  = n_rows;
      depth = n_depth;
      vmem  = new[n_rows];
      for (int l = 0; l < 32; l++) llm[l] = new[n_depth];
      for (int r = 0; r < 32; r++) for (int l = 0; l < 32; l++) vr[r][l] = '0;
      for (int r = 0; r < n_rows; r++) for (int l = 0; l < 32; l++) vmem[r][l] = '0;
      for (int l = 0; l < 32; l++) for (int d = 0; d < n_depth; d++) llm[l][d] = '0;
      for (int l = 0; l < 32; l++) begin s0[l] = 16'(l + 1); s1[l] = 16'h9e37; end
    endfunction

    function automatic int row_of(logic [31:0] byte_addr);
      return int'((byte_addr >> 6) % rows);
    endfunction

    // Returns 1 if the instruction produces a scalar result (in xval).
    function automatic bit exec(logic [31:0] ins, logic [31:0] x1, logic [31:0] x2,
                                bit kill, output logic [31:0] xval);
      int mop, f3, f7, rd, rs1, rs2, sh, rm, row;
      logic [11:0] immi, imms;
      logic [15:0] rnd [32];
      logic [15:0] res [32];
      logic [15:0] a, b;
      bit use_rng, has_x, wr;
      longint t;
      mop = ins[6:2]; f3 = ins[14:12]; f7 = ins[31:25];
      rd = ins[11:7]; rs1 = ins[19:15]; rs2 = ins[24:20];
      immi = ins[31:20]; imms = {ins[31:25], ins[11:7]};
      xval = '0; has_x = 0; wr = 0;
      use_rng = (mop == 5) || (mop == 0 && f3 == 5 && f7[5:4] == 2) ||
                (mop == 3 && f3 == 1 && immi[5:4] == 2);
      for (int l = 0; l < 32; l++) rnd[l] = use_rng ? ref_xoro(s0[l], s1[l]) : 16'h0;
      has_x = (mop == 1) || (mop == 9);
      if (kill) return 0;
      for (int l = 0; l < 32; l++) begin
        a = vr[rs1][l];
        b = vr[rs2][l];
        res[l] = vr[rd][l];
        case (mop)
          0: begin
            wr = 1;
            case (f3)
              0: res[l] = f7[6] ? ref_sat(longint'($signed(a)) + longint'($signed(b))) : a + b;
              1: res[l] = f7[6] ? ref_sat(longint'($signed(a)) - longint'($signed(b))) : a - b;
              2: res[l] = a & b;
              3: res[l] = a << b[3:0];
              4: res[l] = 16'($signed(a) >>> b[3:0]);
              default: res[l] = ref_mulshift(a, b, rnd[l], f7[3:0], f7[5:4]);
            endcase
          end
          1: begin
            case (f3)
              0: xval[l] = (a == b);
              1: xval[l] = (a != b);
              2: xval[l] = ($signed(a) < $signed(b));
              default: xval[l] = ($signed(a) >= $signed(b));
            endcase
          end
          2: begin wr = 1; res[l] = x1[l] ? b : vr[rd][l]; end
          3: begin
            wr = 1;
            if (f3 == 0) res[l] = a << immi[3:0];
            else         res[l] = ref_mulshift(a, 16'd1, rnd[l], immi[3:0], immi[5:4]);
          end
          4: begin wr = 1; res[l] = ins[31:16]; end
          5: begin wr = 1; res[l] = rnd[l] >> 1; end
          6: begin wr = 1; res[l] = (a & 16'((32'd1 << f7[3:0]) - 1)) + x2[15:0]; end
          7: begin
            t = 0;
            case (f3)
              0: begin wr = 1; row = row_of(x1 + {{20{immi[11]}}, immi}); res[l] = vmem[row][l]; end
              1: begin
                logic [15:0] la;
                wr = 1;
                la = a + {{4{immi[11]}}, immi};
                res[l] = llm[l][(la >> 1) % depth];
              end
              default: ;
            endcase
          end
          default: ;
        endcase
      end
      // memory side effects after computing all lanes
      if (mop == 7 && f3 >= 2) begin
        row = row_of(x1 + {{20{immi[11]}}, immi});
        for (int l = 0; l < 32; l++) if (f3 == 2) s0[l] = vmem[row][l]; else s1[l] = vmem[row][l];
      end
      if (mop == 8) begin
        if (f3 == 0) begin
          row = row_of(x1 + {{20{imms[11]}}, imms});
          for (int l = 0; l < 32; l++) vmem[row][l] = vr[rs2][l];
        end else begin
          for (int l = 0; l < 32; l++) begin
            logic [15:0] la;
            la = vr[rs1][l] + {{4{imms[11]}}, imms};
            llm[l][(la >> 1) % depth] = vr[rs2][l];
          end
        end
      end
      if (mop == 9) xval = {{16{vr[rs1][rs2][15]}}, vr[rs1][rs2]};
      if (mop == 10) begin wr = 1; for (int l = 0; l < 32; l++) res[l] = x1[15:0]; end
      if (wr) for (int l = 0; l < 32; l++) vr[rd][l] = res[l];
      return has_x;
    endfunction
  endclass

endpackage

// tb_vector_alu: drives every ALU operation with random and boundary
// operands and compares all 32 lanes (and the scalar result) with the
// instruction-level reference model's lane arithmetic.
module tb_vector_alu;
  import fenn_pkg::*;
  import fenn_ref_pkg::*;

  vop_e   op;
  vec_t   a, b, rnd, vres;
  word_t  xs1, xs2, xres;
  logic [3:0] shift;
  rmode_e rmode;
  logic   sat;
  logic [15:0] imm16;
  logic [4:0]  index;
  int checks = 0, failures = 0;

  vector_alu dut (.op, .a, .b, .xs1, .xs2, .shift, .rmode, .sat, .imm16, .index, .rnd, .vres, .xres);

  function automatic logic [15:0] lane(vec_t v, int i);
    return v[i*16 +: 16];
  endfunction

  function automatic logic [15:0] boundary();
    case ($urandom_range(0, 5))
      0: return 16'h7fff;
      1: return 16'h8000;
      2: return 16'h0000;
      3: return 16'hffff;
      default: return 16'($urandom);
    endcase
  endfunction

  // expected lane result of op
  function automatic logic [15:0] exp_lane(int i);
    logic [15:0] x, y;
    x = lane(a, i); y = lane(b, i);
    case (op)
      OP_VADD:    return sat ? ref_sat(longint'($signed(x)) + longint'($signed(y))) : x + y;
      OP_VSUB:    return sat ? ref_sat(longint'($signed(x)) - longint'($signed(y))) : x - y;
      OP_VAND:    return x & y;
      OP_VSL:     return x << y[3:0];
      OP_VSR:     return 16'($signed(x) >>> y[3:0]);
      OP_VMUL:    return ref_mulshift(x, y, lane(rnd, i), shift, rmode);
      OP_VSEL:    return xs1[i] ? y : x;
      OP_VSLI:    return x << shift;
      OP_VSRI:    return ref_mulshift(x, 16'd1, lane(rnd, i), shift, rmode);
      OP_VLUI:    return imm16;
      OP_VRNG:    return lane(rnd, i) >> 1;
      OP_VANDADD: return (x & 16'((32'd1 << shift) - 1)) + xs2[15:0];
      OP_VFILL:   return xs1[15:0];
      default:    return x;
    endcase
  endfunction

  function automatic word_t exp_x();
    word_t r;
    r = '0;
    for (int i = 0; i < 32; i++) begin
      case (op)
        OP_VTEQ: r[i] = lane(a, i) == lane(b, i);
        OP_VTNE: r[i] = lane(a, i) != lane(b, i);
        OP_VTLT: r[i] = $signed(lane(a, i)) <  $signed(lane(b, i));
        OP_VTGE: r[i] = $signed(lane(a, i)) >= $signed(lane(b, i));
        default: ;
      endcase
    end
    if (op == OP_VEXTRACT) r = {{16{lane(a, index)[15]}}, lane(a, index)};
    return r;
  endfunction

  localparam vop_e OPS [19] = '{OP_VADD, OP_VSUB, OP_VAND, OP_VSL, OP_VSR, OP_VMUL, OP_VTEQ, OP_VTNE,
                                OP_VTLT, OP_VTGE, OP_VSEL, OP_VSLI, OP_VSRI, OP_VLUI, OP_VRNG,
                                OP_VANDADD, OP_VEXTRACT, OP_VFILL, OP_VADD};

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      op = OPS[n % 19];
      for (int i = 0; i < 32; i++) begin
        a[i*16 +: 16]   = boundary();
        b[i*16 +: 16]   = (n % 7 == 0) ? lane(a, i) : boundary();
        rnd[i*16 +: 16] = 16'($urandom);
      end
      xs1 = $urandom; xs2 = $urandom; shift = $urandom; sat = $urandom_range(0, 1);
      rmode = rmode_e'($urandom_range(0, 2)); imm16 = $urandom; index = $urandom;
      #1;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (!(op inside {OP_VTEQ, OP_VTNE, OP_VTLT, OP_VTGE, OP_VEXTRACT}) &&
            lane(vres, i) !== exp_lane(i)) begin
          failures++;
          if (failures < 10) $display("FAIL %s lane %0d a=%h b=%h got %h exp %h",
                                      op.name(), i, lane(a, i), lane(b, i), lane(vres, i), exp_lane(i));
        end
      end
      checks++;
      if (xres !== exp_x()) begin
        failures++;
        if (failures < 10) $display("FAIL %s xres %h exp %h", op.name(), xres, exp_x());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

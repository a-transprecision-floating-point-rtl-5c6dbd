// tb_fpu_ref_pkg: request-level reference model of the transprecision FP
// unit, built on tb_fp_ref_pkg. Gives, for a request, which slice width
// serves it (or none), whether it is pipelined, and the expected 32-bit
// result, lane by lane. Also makes random legal requests and operands.
package tb_fpu_ref_pkg;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;

  function automatic int fe(fp_fmt_e f);
    case (f) FP32: return 8; FP16: return 5; FP16ALT: return 8; default: return 5; endcase
  endfunction
  function automatic int fm(fp_fmt_e f);
    case (f) FP32: return 23; FP16: return 10; FP16ALT: return 7; default: return 2; endcase
  endfunction
  function automatic int fw(fp_fmt_e f);
    return fe(f) + fm(f) + 1;
  endfunction
  function automatic longint unsigned lo(longint unsigned x, int w);
    return x & ((longint'(1) << w) - 1);
  endfunction

  // slice width serving a request, 0 when no unit exists for it
  function automatic int slice_of(fpu_req_t r);
    fp_fmt_e f = (r.op == OP_F2I) ? r.src_fmt : r.dst_fmt;
    case (r.op)
      OP_ADD, OP_SUB, OP_MUL: return fw(r.src_fmt);
      OP_F2I, OP_I2F:
        case (r.int_fmt)
          INT32: return 32;
          INT16: return (f == FP16 || f == FP16ALT) ? 16 : 0;
          INT8:  return (f == FP8) ? 8 : 0;
          default: return 0;
        endcase
      OP_F2F:
        if (r.src_fmt == r.dst_fmt) return 0;
        else if (r.src_fmt == FP32 || r.dst_fmt == FP32) return 32;
        else return 16;
      default: return 0;
    endcase
  endfunction

  function automatic bit pipelined_of(fpu_req_t r);
    return slice_of(r) != 0 && (r.op inside {OP_ADD, OP_SUB, OP_MUL}) && r.src_fmt != FP8;
  endfunction

  // one lane of width sw
  function automatic longint unsigned ref_lane(fpu_req_t r, int sw,
                                               longint unsigned a, longint unsigned b);
    case (r.op)
      OP_ADD: return ref_add(a, b, 1'b0, fe(r.src_fmt), fm(r.src_fmt));
      OP_SUB: return ref_add(a, b, 1'b1, fe(r.src_fmt), fm(r.src_fmt));
      OP_MUL: return ref_mul(a, b, fe(r.src_fmt), fm(r.src_fmt));
      OP_F2F: return ref_f2f(lo(a, fw(r.src_fmt)), fe(r.src_fmt), fm(r.src_fmt),
                             fe(r.dst_fmt), fm(r.dst_fmt));
      OP_F2I: return ref_f2i(lo(a, fw(r.src_fmt)), fe(r.src_fmt), fm(r.src_fmt), sw, r.int_signed);
      OP_I2F: return ref_i2f(a, sw, r.int_signed, fe(r.dst_fmt), fm(r.dst_fmt));
      default: return 0;
    endcase
  endfunction

  // whole-unit result
  function automatic logic [31:0] ref_unit(fpu_req_t r, logic [31:0] a, logic [31:0] b);
    int sw = slice_of(r);
    int n;
    logic [31:0] res = '0;
    if (sw == 0) return '0;
    n = (sw == 32 || !r.vectorial) ? 1 : 32 / sw;
    for (int l = 0; l < n; l++)
      res = res | (32'(ref_lane(r, sw, lo(a >> (sw * l), sw), lo(b >> (sw * l), sw))) << (sw * l));
    return res;
  endfunction

  // random legal request served by slice width sw
  function automatic fpu_req_t rand_req(int sw);
    fpu_req_t r;
    fp_fmt_e  f16, o16;
    r = '0;
    r.op = op_e'($urandom_range(0, 5));
    r.int_signed = $urandom_range(0, 1);
    r.vectorial  = $urandom_range(0, 1);
    f16 = $urandom_range(0, 1) ? FP16 : FP16ALT;
    case (sw)
      32: begin
        r.int_fmt = INT32;
        case (r.op)
          OP_ADD, OP_SUB, OP_MUL: r.src_fmt = FP32;
          OP_F2I: r.src_fmt = fp_fmt_e'($urandom_range(0, 3));
          OP_I2F: r.dst_fmt = fp_fmt_e'($urandom_range(0, 3));
          default: begin
            if ($urandom_range(0, 1)) begin r.src_fmt = FP32; r.dst_fmt = fp_fmt_e'($urandom_range(1, 3)); end
            else begin r.dst_fmt = FP32; r.src_fmt = fp_fmt_e'($urandom_range(1, 3)); end
          end
        endcase
      end
      16: begin
        r.int_fmt = INT16;
        case (r.op)
          OP_ADD, OP_SUB, OP_MUL, OP_F2I: r.src_fmt = f16;
          OP_I2F: r.dst_fmt = f16;
          default: begin
            o16 = fp_fmt_e'($urandom_range(1, 3));
            while (o16 == f16) o16 = fp_fmt_e'($urandom_range(1, 3));
            if ($urandom_range(0, 1)) begin r.src_fmt = f16; r.dst_fmt = o16; end
            else begin r.src_fmt = o16; r.dst_fmt = f16; end
          end
        endcase
      end
      default: begin
        r.int_fmt = INT8;
        if (r.op == OP_F2F) r.op = OP_MUL;
        r.src_fmt = FP8;
        r.dst_fmt = FP8;
      end
    endcase
    return r;
  endfunction

  // random operand word for request r (one field per lane of width sw)
  function automatic logic [31:0] rand_opnd(fpu_req_t r, int sw, logic [31:0] other, bit use_other);
    logic [31:0] x = '0;
    longint unsigned v;
    for (int l = 0; l < 32 / sw; l++) begin
      if (r.op == OP_I2F) v = {$urandom, $urandom};
      else if (use_other && $urandom_range(0, 3) == 0)
        v = near(lo(other >> (sw * l), fw(r.src_fmt)), fe(r.src_fmt), fm(r.src_fmt));
      else v = rand_fp(fe(r.src_fmt), fm(r.src_fmt));
      x = x | (32'(lo(v, sw)) << (sw * l));
    end
    return x;
  endfunction
endpackage

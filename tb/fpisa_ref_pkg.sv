// fpisa_ref_pkg: reference model of FPISA arithmetic for the testbenches.
//
// Written independently of the RTL with 64-bit integers: an accumulator is an
// (exponent, signed mantissa) pair; add() aligns by right-shifting the operand
// with the smaller exponent (arithmetic shift for the stored value, logical for
// the incoming magnitude), then adds; normalize() finds the leading one with a
// loop and packs the IEEE-style word, flushing to zero below the normal range
// and saturating to infinity above it. Widths are arguments so that FP32 and
// FP16 formats share the code.
package fpisa_ref_pkg;

  typedef struct {
    int     e;      // biased exponent
    longint m;      // signed mantissa, MREG_W-bit two's complement value
    bit     ovf;    // last operation overflowed
  } acc_t;

  function automatic void split(input longint unsigned fp, input int ew, input int fw,
                                output bit s, output int e, output longint m);
    longint unsigned frac;
    s    = fp[ew+fw];
    e    = int'((fp >> fw) & ((64'd1 << ew) - 1));
    frac = fp & ((64'd1 << fw) - 1);
    if (e == 0) begin
      e = 1;
      m = longint'(frac);
    end else begin
      m = longint'(frac) + (longint'(1) << fw);
    end
  endfunction

  // wrap a value to a signed mw-bit number
  function automatic longint wrap(input longint v, input int mw);
    longint unsigned u;
    u = longint'(v) & ((64'd1 << mw) - 1);
    if (u[mw-1]) return longint'(u) - (longint'(1) << mw);
    return longint'(u);
  endfunction

  function automatic longint asr(input longint v, input int d, input int mw);
    if (d >= mw) return (v < 0) ? -1 : 0;
    return v >>> d;
  endfunction

  // op: 0 add, 1 sub, 2 read, 3 write
  function automatic void apply(inout acc_t a, input int op, input longint unsigned fp,
                                input int ew, input int fw, input int mw);
    bit s; int e; longint m, sm, r;
    split(fp, ew, fw, s, e, m);
    a.ovf = 0;
    case (op)
      0, 1: begin
        if (op == 1) s = !s;
        if (e >= a.e) begin
          sm  = asr(a.m, e - a.e, mw);
          a.e = e;
        end else begin
          sm = a.m;
          m  = (a.e - e >= mw) ? 0 : (m >> (a.e - e));
        end
        r = s ? sm - m : sm + m;
        a.ovf = (r != wrap(r, mw));
        a.m = wrap(r, mw);
      end
      3: begin
        a.e = e;
        a.m = s ? -m : m;
      end
      default: ;
    endcase
  endfunction

  function automatic longint unsigned normalize(input int e, input longint m,
                                                input int ew, input int fw, input int mw);
    bit s; longint unsigned mag; int lead, ee;
    s   = (m < 0);
    mag = longint'(s ? -m : m) & ((64'd1 << mw) - 1);
    if (mag == 0) return longint'(s) << (ew + fw);
    lead = -1;
    // leading one among bits mw-2..0 (the table has no entry for the top bit)
    for (int i = 0; i < mw - 1; i++) if (mag[i]) lead = i;
    if (lead < 0) return longint'(s) << (ew + fw);
    if (lead >= fw) begin mag = mag >> (lead - fw); ee = e + (lead - fw); end
    else            begin mag = mag << (fw - lead); ee = e - (fw - lead); end
    if (ee <= 0) return longint'(s) << (ew + fw);
    if (ee >= (1 << ew) - 1) return (longint'(s) << (ew + fw)) | (((64'd1 << ew) - 1) << fw);
    return (longint'(s) << (ew + fw)) | (longint'(ee) << fw) | (mag & ((64'd1 << fw) - 1));
  endfunction

  // FP32 bit pattern of a real that is exactly representable as a normal FP32
  // number (conversion through the IEEE double layout).
  function automatic longint unsigned bits_of(input real r);
    logic [63:0] d;
    d = $realtobits(r);
    if (d[62:0] == '0) return longint'(d[63]) << 31;
    return (longint'(d[63]) << 31) | (longint'(int'(d[62:52]) - 1023 + 127) << 23)
           | longint'(d[51:29]);
  endfunction

endpackage

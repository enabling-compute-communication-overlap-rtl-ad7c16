// tb_ace_alu: self-checking testbench of the ACE ALU (four 64-byte units, FP16 or FP32).
//
// Random packets are added in both modes. The expected value of every element is computed here
// independently of the design: both operands are decoded into double precision, added there
// (exact for these formats, or at least correctly ordered for rounding), and the sum is rounded
// to the target format by integer arithmetic on the double's bits, to nearest with ties to even.
// NaN and infinity cases are classified separately. The ALU is combinational: one whole packet
// per clock is its rate, which the test checks by applying one packet per cycle.
module tb_ace_alu;
  import ace_pkg::*;

  logic                  clk = 1'b0;
  logic [PKT_W-1:0]      a, b, y;
  dtype_e                dtype;
  int                    checks = 0, failures = 0;

  ace_alu #(.UNITS(LANES)) dut (.a(a), .b(b), .dtype(dtype), .y(y));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real decode(input logic [31:0] v, input int ew, input int mw);
    int  bias, e;
    longint unsigned m;
    real r;
    bias = (1 << (ew - 1)) - 1;
    e    = int'((v >> mw) & ((32'd1 << ew) - 1));
    m    = longint'(v) & ((64'd1 << mw) - 1);
    if (e == 0) r = real'(m) * (2.0 ** (1 - bias - mw));
    else        r = real'(m + (64'd1 << mw)) * (2.0 ** (e - bias - mw));
    return v[ew + mw] ? -r : r;
  endfunction

  function automatic logic [31:0] encode(input real x, input int ew, input int mw);
    logic [63:0]     d;
    logic            sg;
    int              ed, et, sh, bias, emax;
    longint unsigned full, q, rem, half;
    d    = $realtobits(x);
    sg   = d[63];
    ed   = int'(d[62:52]);
    bias = (1 << (ew - 1)) - 1;
    emax = (1 << ew) - 1;
    if (ed == 0) return 32'(sg) << (ew + mw);
    et   = ed - 1023 + bias;
    full = {11'd0, 1'b1, d[51:0]};
    sh   = 52 - mw;
    if (et < 1) sh = sh + 1 - et;
    if (sh > 62) begin
      q = 0;
    end else begin
      q    = full >> sh;
      rem  = full & ((64'd1 << sh) - 1);
      half = 64'd1 << (sh - 1);
      if (rem > half || (rem == half && q[0])) q = q + 1;
    end
    if (et >= 1) begin
      if (q == (64'd1 << (mw + 1))) begin
        q  = q >> 1;
        et = et + 1;
      end
      if (et >= emax) return (32'(sg) << (ew + mw)) | (32'(emax) << mw);
      return (32'(sg) << (ew + mw)) | (32'(et) << mw) | (32'(q) & ((32'd1 << mw) - 1));
    end
    return (32'(sg) << (ew + mw)) | (q[mw] ? (32'd1 << mw) : 32'd0) | (32'(q) & ((32'd1 << mw) - 1));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] x, input logic [31:0] z,
                                          input int ew, input int mw);
    int  emax;
    logic xn, zn, xi, zi;
    logic [31:0] mm, ee;
    emax = (1 << ew) - 1;
    mm   = (32'd1 << mw) - 1;
    ee   = 32'(emax);
    xn = ((x >> mw) & ee) == ee && (x & mm) != 0;
    zn = ((z >> mw) & ee) == ee && (z & mm) != 0;
    xi = ((x >> mw) & ee) == ee && (x & mm) == 0;
    zi = ((z >> mw) & ee) == ee && (z & mm) == 0;
    if (xn || zn || (xi && zi && x[ew+mw] != z[ew+mw])) return (ee << mw) | (32'd1 << (mw - 1));
    if (xi) return x;
    if (zi) return z;
    return encode(decode(x, ew, mw) + decode(z, ew, mw), ew, mw);
  endfunction

  function automatic logic [31:0] rnd_operand(input int ew, input int mw, input logic [31:0] other);
    logic [31:0] v;
    int          w;
    w = ew + mw + 1;
    v = $urandom() & ((w == 32) ? 32'hffff_ffff : ((32'd1 << w) - 1));
    case ($urandom_range(0, 5))
      0: v = other ^ (32'd1 << (ew + mw)) ^ ($urandom() & 32'h7);     // near cancellation
      1: v = (other & ~((32'd1 << mw) - 1)) | ($urandom() & ((32'd1 << mw) - 1)); // same exponent
      2: v = v & ~(((32'd1 << ew) - 1) << mw);                          // subnormal
      default: ;
    endcase
    return v;
  endfunction

  initial begin
    logic [31:0] x, z, exp_v, got;
    int          ew, mw, w, ne;
    a = '0; b = '0; dtype = DT_FP16;
    for (int m = 0; m < 2; m++) begin
      dtype = (m == 0) ? DT_FP16 : DT_FP32;
      ew    = (m == 0) ? 5 : 8;
      mw    = (m == 0) ? 10 : 23;
      w     = ew + mw + 1;
      ne    = PKT_W / w;
      for (int p = 0; p < 300; p++) begin
        for (int k = 0; k < ne; k++) begin
          x = $urandom() & ((w == 32) ? 32'hffff_ffff : ((32'd1 << w) - 1));
          z = rnd_operand(ew, mw, x);
          if (m == 0) begin a[k*16 +: 16] = x[15:0]; b[k*16 +: 16] = z[15:0]; end
          else        begin a[k*32 +: 32] = x;       b[k*32 +: 32] = z;       end
        end
        @(posedge clk);   // one packet per clock
        #1;
        for (int k = 0; k < ne; k++) begin
          if (m == 0) begin x = 32'(a[k*16 +: 16]); z = 32'(b[k*16 +: 16]); got = 32'(y[k*16 +: 16]); end
          else        begin x = a[k*32 +: 32];      z = b[k*32 +: 32];      got = y[k*32 +: 32];      end
          exp_v = ref_add(x, z, ew, mw);
          checks++;
          if (got !== exp_v) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH %s elem %0d: %h + %h = %h, expected %h",
                       (m == 0) ? "fp16" : "fp32", k, x, z, got, exp_v);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

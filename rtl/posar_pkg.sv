// posar_pkg: shared types and width helpers of the posit arithmetic unit.
//
// A posit is carried between the units in an "unpacked" form: sign s,
// special-number flag sn (set for 0 and NaR), regime k, exponent e, the
// fraction f with its hidden bit set and fs, the number of fraction bits
// below the hidden bit, plus a sticky bit bm that remembers ones lost below
// f.  The widths of those fields depend on the posit size PS, so they are
// computed here by functions and declared inside each module.
//
// The operation codes follow the RISC-V single-precision (F) extension,
// whose instructions the unit executes on posits instead of IEEE 754
// numbers.  The encoding of the enum is this design's own.
package posar_pkg;

  // Integer register width of the host core (RV32 is assumed).
  localparam int unsigned XLEN = 32;
  // Number of floating-point (here: posit) registers of the F extension.
  localparam int unsigned NFREGS = 32;

  // Width of the signed regime value k inside the unit.
  function automatic int unsigned k_width(input int unsigned ps);
    return $clog2(ps) + 4;
  endfunction

  // Width of the raw fraction bus between the arithmetic units and the
  // normaliser: wide enough for a divider quotient (f << ps), an adder sum
  // (2ps-2 bits) and a converted XLEN-bit integer.
  function automatic int unsigned f_width(input int unsigned ps);
    return (3 * ps > XLEN + 1) ? 3 * ps : XLEN + 1;
  endfunction

  // Width of a fraction-size field able to hold 0 .. f_width(ps).
  function automatic int unsigned fs_width(input int unsigned ps);
    return $clog2(f_width(ps) + 1);
  endfunction

  // Width of the signed scale k*2^es + e.
  function automatic int unsigned sc_width(input int unsigned ps, input int unsigned es);
    return k_width(ps) + es + 2;
  endfunction

  // RISC-V F-extension operations executed by the unit.
  typedef enum logic [4:0] {
    OP_ADD     = 5'd0,   // fadd.s
    OP_SUB     = 5'd1,   // fsub.s
    OP_MUL     = 5'd2,   // fmul.s
    OP_DIV     = 5'd3,   // fdiv.s
    OP_SQRT    = 5'd4,   // fsqrt.s
    OP_MADD    = 5'd5,   // fmadd.s   rs1*rs2 + rs3
    OP_MSUB    = 5'd6,   // fmsub.s   rs1*rs2 - rs3
    OP_NMSUB   = 5'd7,   // fnmsub.s -(rs1*rs2) + rs3
    OP_NMADD   = 5'd8,   // fnmadd.s -(rs1*rs2) - rs3
    OP_SGNJ    = 5'd9,   // fsgnj.s
    OP_SGNJN   = 5'd10,  // fsgnjn.s
    OP_SGNJX   = 5'd11,  // fsgnjx.s
    OP_MIN     = 5'd12,  // fmin.s
    OP_MAX     = 5'd13,  // fmax.s
    OP_EQ      = 5'd14,  // feq.s   (integer result)
    OP_LT      = 5'd15,  // flt.s   (integer result)
    OP_LE      = 5'd16,  // fle.s   (integer result)
    OP_CLASS   = 5'd17,  // fclass.s (integer result)
    OP_CVT_W   = 5'd18,  // fcvt.w.s  posit -> int32
    OP_CVT_WU  = 5'd19,  // fcvt.wu.s posit -> uint32
    OP_CVT_S_W = 5'd20,  // fcvt.s.w  int32 -> posit
    OP_CVT_S_WU= 5'd21,  // fcvt.s.wu uint32 -> posit
    OP_MV_X_W  = 5'd22,  // fmv.x.w  register bits -> integer
    OP_MV_W_X  = 5'd23,  // fmv.w.x  integer bits -> register
    OP_LOAD    = 5'd24,  // flw data write-back
    OP_STORE   = 5'd25   // fsw data read-out
  } posar_op_e;

  // RISC-V rounding-mode field value for round-towards-zero.
  localparam logic [2:0] RM_RTZ = 3'b001;

  // Operations whose result goes to the integer register file.
  function automatic logic op_writes_int(input posar_op_e op);
    return op inside {OP_EQ, OP_LT, OP_LE, OP_CLASS, OP_CVT_W, OP_CVT_WU,
                      OP_MV_X_W, OP_STORE};
  endfunction

endpackage

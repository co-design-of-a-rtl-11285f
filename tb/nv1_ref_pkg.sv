// nv1_ref_pkg -- reference arithmetic for the NV-1 testbenches, written
// independently of the RTL: what a node's result must be for a given sum of
// inputs, instruction and immediate.
package nv1_ref_pkg;

  // 16-bit two's-complement wrap of an accumulated sum
  function automatic int wrap16(input int v);
    int r;
    r = v & 32'hFFFF;
    if (r >= 32768) r -= 65536;
    return r;
  endfunction

  // result of instruction op (0 sum, 1 mul, 2 shift, 3 sum) on sum s,
  // saturated to -128 .. 127
  function automatic int node_result(input int s, input int op, input int imm);
    int v, amt, simm;
    simm = (imm >= 128) ? imm - 256 : imm;
    amt  = imm % 16;
    case (op)
      1:       v = s * simm;
      2:       v = (imm >= 128) ? (s >>> amt) : (s * (1 << amt));
      default: v = s;
    endcase
    if (v > 127)  v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  function automatic bit saturates(input int s, input int op, input int imm);
    int simm, amt;
    longint v;
    simm = (imm >= 128) ? imm - 256 : imm;
    amt  = imm % 16;
    case (op)
      1:       v = longint'(s) * simm;
      2:       v = (imm >= 128) ? longint'(s >>> amt) : longint'(s) * (1 << amt);
      default: v = s;
    endcase
    return (v > 127) || (v < -128);
  endfunction

endpackage

// dec_ref_pkg: reference decimal arithmetic for the testbenches.
//
// Plain digit-by-digit models, written independently of the RTL: BCD
// addition with ripple carry, schoolbook BCD multiplication into a
// 32-digit product, binary-to-BCD by repeated division, and random BCD
// numbers. accel_model is an instruction-level model of the whole
// accelerator (register set, memory contents, every function7) used to
// predict responses, and it generates random legal command streams.
package dec_ref_pkg;
  import dec_pkg::*;
  localparam int D = 16;

  function automatic logic [4*D-1:0] rnd_bcd(int ndig = D);
    logic [4*D-1:0] r;
    r = '0;
    for (int i = 0; i < ndig; i++) r[4*i +: 4] = 4'($urandom_range(0, 9));
    return r;
  endfunction

  // {carry, sum}
  function automatic logic [4*D:0] bcd_add(logic [4*D-1:0] x, logic [4*D-1:0] y);
    logic [4*D-1:0] r;
    int t, c;
    c = 0;
    for (int i = 0; i < D; i++) begin
      t = int'(x[4*i +: 4]) + int'(y[4*i +: 4]) + c;
      c = t / 10;
      r[4*i +: 4] = 4'(t % 10);
    end
    return {c[0], r};
  endfunction

  function automatic logic [8*D-1:0] bcd_mul(logic [4*D-1:0] x, logic [4*D-1:0] y);
    int p [2*D];
    logic [8*D-1:0] r;
    for (int i = 0; i < 2*D; i++) p[i] = 0;
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++)
        p[i+j] += int'(x[4*i +: 4]) * int'(y[4*j +: 4]);
    for (int i = 0; i < 2*D - 1; i++) begin
      p[i+1] += p[i] / 10;
      p[i]    = p[i] % 10;
    end
    for (int i = 0; i < 2*D; i++) r[4*i +: 4] = 4'(p[i]);
    return r;
  endfunction

  function automatic logic [4*D-1:0] bin_to_bcd(logic [63:0] v);
    logic [4*D-1:0] r;
    for (int i = 0; i < D; i++) begin r[4*i +: 4] = 4'(v % 10); v = v / 10; end
    return r;
  endfunction

  function automatic bit is_bcd(logic [4*D-1:0] v);
    for (int i = 0; i < D; i++) if (v[4*i +: 4] > 4'd9) return 0;
    return 1;
  endfunction

  // Contents of the data memory: a BCD word derived from the address.
  function automatic logic [63:0] mem_word(logic [63:0] addr);
    logic [63:0] h, r;
    h = (addr ^ 64'h9E37_79B9_7F4A_7C15) * 64'hBF58_476D_1CE4_E5B9;
    for (int i = 0; i < D; i++) begin
      r[4*i +: 4] = 4'(h[3:0] % 10);
      h = {h[3:0], h[63:4]} ^ 64'h94D0_49BB_1331_11EB;
    end
    return r;
  endfunction

  function automatic rocc_cmd_t make_cmd(logic [6:0] f, logic xd, logic xs1, logic xs2,
                                          logic [4:0] rd, logic [4:0] rs1f, logic [4:0] rs2f,
                                          logic [63:0] v1, logic [63:0] v2);
    rocc_cmd_t c;
    c.inst.funct7 = f;
    c.inst.rs2    = rs2f;
    c.inst.rs1    = rs1f;
    c.inst.xd     = xd;
    c.inst.xs1    = xs1;
    c.inst.xs2    = xs2;
    c.inst.rd     = rd;
    c.inst.opcode = OPC_CUSTOM0;
    c.rs1         = v1;
    c.rs2         = v2;
    return c;
  endfunction

  class accel_model;
    logic [63:0] regs [32];
    int n_funct [16];
    int n_carry;      // DEC_ADD / DEC_ACCUM results that overflowed 16 digits
    int n_cnv_ovf;    // DEC_CNV inputs of more than 16 decimal digits

    function new();
      reset();
    endfunction

    function void reset();
      foreach (regs[i]) regs[i] = '0;
      foreach (n_funct[i]) n_funct[i] = 0;
      n_carry = 0;
      n_cnv_ovf = 0;
    endfunction

    // Apply one command; returns the response value (meaningful if xd).
    function logic [63:0] apply(rocc_cmd_t c);
      logic [63:0] a, b, r;
      logic [4:0]  addr;
      logic [4*D:0] s;
      logic [8*D-1:0] p;
      a    = c.inst.xs1 ? c.rs1 : regs[c.inst.rs1];
      b    = c.inst.xs2 ? c.rs2 : regs[c.inst.rs2];
      addr = c.inst.xs2 ? c.rs2[4:0] : c.inst.rs2;
      r    = '0;
      n_funct[(c.inst.funct7 > 7'd9) ? 9 : int'(c.inst.funct7)]++;
      case (c.inst.funct7)
        F_WR:        begin regs[addr] = a; r = a; end
        F_RD:        r = regs[addr];
        F_LD:        begin r = mem_word(a); regs[addr] = r; end
        F_ACCUM:     begin regs[addr] = regs[addr] + a; r = regs[addr]; end
        F_CLR_ALL:   foreach (regs[i]) regs[i] = '0;
        F_DEC_ADD:   begin s = bcd_add(a, b); n_carry += s[4*D]; r = s[4*D-1:0]; regs[c.inst.rd] = r; end
        F_DEC_ACCUM: begin s = bcd_add(regs[c.inst.rd], a); n_carry += s[4*D]; r = s[4*D-1:0]; regs[c.inst.rd] = r; end
        F_DEC_MUL:   begin
          p = bcd_mul(a, b);
          r = p[4*D-1:0];
          regs[c.inst.rd] = r;
          regs[5'(c.inst.rd + 5'd1)] = p[8*D-1:4*D];
        end
        F_DEC_CNV:   begin r = bin_to_bcd(a); n_cnv_ovf += (a >= 64'd10000000000000000); regs[c.inst.rd] = r; end
        default:     r = '0;
      endcase
      return r;
    endfunction

    // A random command whose decimal operands are valid BCD.
    function rocc_cmd_t random_cmd();
      logic [6:0] f;
      logic xd, xs1, xs2;
      logic [4:0] rd, r1, r2;
      logic [63:0] v1, v2;
      int k;
      k = $urandom_range(0, 99);
      if      (k < 10) f = F_WR;
      else if (k < 20) f = F_RD;
      else if (k < 28) f = F_LD;
      else if (k < 34) f = F_ACCUM;
      else if (k < 36) f = F_CLR_ALL;
      else if (k < 56) f = F_DEC_ADD;
      else if (k < 66) f = F_DEC_ACCUM;
      else if (k < 80) f = F_DEC_MUL;
      else if (k < 90) f = F_DEC_CNV;
      else if (k < 92) f = 7'($urandom_range(9, 127));
      else             f = F_WR;
      xd  = 1'($urandom_range(0, 3) != 0);
      xs1 = 1'($urandom_range(0, 1));
      xs2 = 1'($urandom_range(0, 1));
      rd  = 5'($urandom); r1 = 5'($urandom); r2 = 5'($urandom);
      v1  = ($urandom_range(0, 2) == 0) ? {$urandom, $urandom} : rnd_bcd($urandom_range(1, D));
      v2  = ($urandom_range(0, 2) == 0) ? {$urandom, $urandom} : rnd_bcd($urandom_range(1, D));
      if (f == F_DEC_ACCUM && !is_bcd(regs[rd])) f = F_DEC_ADD;
      if (f == F_DEC_ADD || f == F_DEC_MUL || f == F_DEC_ACCUM) begin
        if (!xs1 && !is_bcd(regs[r1])) xs1 = 1'b1;
        if (!is_bcd(v1)) v1 = rnd_bcd($urandom_range(1, D));
      end
      if (f == F_DEC_ADD || f == F_DEC_MUL) begin
        if (!xs2 && !is_bcd(regs[r2])) xs2 = 1'b1;
        if (!is_bcd(v2)) v2 = rnd_bcd($urandom_range(1, D));
      end
      return make_cmd(f, xd, xs1, xs2, rd, r1, r2, v1, v2);
    endfunction
  endclass
endpackage

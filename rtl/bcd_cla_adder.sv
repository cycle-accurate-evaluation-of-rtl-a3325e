// bcd_cla_adder: BCD-8421 carry-lookahead adder.
//
// Adds two DIGITS-digit BCD numbers and a carry-in; purely combinational.
// Each digit pair is first added in binary (0..19 with a carry). A digit
// "generates" a decimal carry when its binary sum is 10 or more and
// "propagates" one when the sum is exactly 9. The digit carries are then
// formed by a Kogge-Stone parallel-prefix network over (generate, propagate),
// so the carry path is log2(DIGITS) levels deep instead of DIGITS. Finally
// each digit adds its incoming carry and is corrected by +6 (mod 16) when it
// reaches 10 or more.
//
// The paper names the unit a BCD carry-lookahead adder; the digit-level
// generate/propagate scheme and the Kogge-Stone prefix are this design's
// choice. Inputs must be valid BCD (each digit 0..9); other codes give an
// unspecified sum.
module bcd_cla_adder #(
  parameter int DIGITS = 16
) (
  input  logic [4*DIGITS-1:0] a,
  input  logic [4*DIGITS-1:0] b,
  input  logic                cin,
  output logic [4*DIGITS-1:0] sum,
  output logic                cout
);

  localparam int LEVELS = (DIGITS > 1) ? $clog2(DIGITS) : 1;

  logic [4:0]      dsum [DIGITS];   // binary digit sums, 0..18
  logic [DIGITS-1:0] g, p;
  logic [DIGITS-1:0] gp, pp, gn, pn;
  logic [DIGITS:0]   c;

  always_comb begin
    for (int i = 0; i < DIGITS; i++) begin
      dsum[i] = {1'b0, a[4*i +: 4]} + {1'b0, b[4*i +: 4]};
      g[i]    = (dsum[i] >= 5'd10);
      p[i]    = (dsum[i] == 5'd9);
    end
    // Kogge-Stone prefix: after the loop gp[i]/pp[i] are the group
    // generate/propagate of digits i..0.
    gp = g;
    pp = p;
    for (int l = 0; l < LEVELS; l++) begin
      gn = gp;
      pn = pp;
      for (int i = 0; i < DIGITS; i++) begin
        if (i >= (1 << l)) begin
          gn[i] = gp[i] | (pp[i] & gp[i - (1 << l)]);
          pn[i] = pp[i] & pp[i - (1 << l)];
        end
      end
      gp = gn;
      pp = pn;
    end
    c[0] = cin;
    for (int i = 0; i < DIGITS; i++) begin
      c[i+1] = gp[i] | (pp[i] & cin);
    end
  end

  always_comb begin
    for (int i = 0; i < DIGITS; i++) begin
      logic [4:0] t;
      t = dsum[i] + {4'b0, c[i]};
      sum[4*i +: 4] = (t >= 5'd10) ? 4'(t + 5'd6) : t[3:0];
    end
    cout = c[DIGITS];
  end

endmodule

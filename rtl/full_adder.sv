// full_adder - one-bit full adder.
//
// One of these sits next to each LUTRAM of a TA team; chained, they form the ripple-carry
// adder that adds +1 or -1 to the addressed TA state.  Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);
  always_comb begin
    s    = a ^ b ^ cin;
    cout = (a & b) | (cin & (a ^ b));
  end
endmodule

// mo_module: minus-one logic (MOL) for a whole array row.
//
// Each WORD_W-bit word A read from the TOS array is decremented by a ripple
// of simplified one-bit cells. The second addend is fixed at all ones (-1 in
// two's complement), so a full adder reduces to the cell
//     SUM  = ~(A ^ Cin)        Cout = A | Cin
// (the truth table of the paper's MOL, with B = 1 in every row). The LSB
// carry-in is 0. The MSB carry-out is 1 exactly when A != 0: it is brought
// out as nz and used to keep zero pixels from being written back.
// Purely combinational: it works inside the MO phase, between the array read
// and the WWL_CMP write into the CMP module. The cell equations are the
// paper's; the per-row packaging is this design's.
module mo_module #(
  parameter int unsigned COLS   = 120,
  parameter int unsigned WORD_W = 5
) (
  input  logic [COLS-1:0][WORD_W-1:0] a,
  output logic [COLS-1:0][WORD_W-1:0] sum,
  output logic [COLS-1:0]             nz
);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic carry;
      carry = 1'b0;
      for (int b = 0; b < WORD_W; b++) begin
        sum[c][b] = ~(a[c][b] ^ carry);
        carry     = a[c][b] | carry;
      end
      nz[c] = carry;
    end
  end

endmodule

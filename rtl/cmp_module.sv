// cmp_module: threshold comparison for a whole array row (CMP module).
//
// Every column holds two rows of 8T SRAM type B: the TOS-1 row, written with
// the MOL result at the end of the MO phase (wwl_cmp = WWL_CMP), and the TH
// row, written once at configuration (th_we). The TH row stores the
// complement of the threshold's low WORD_W bits.
//
// Read-out per bit i, with s = TOS-1 bit and t = stored TH-row bit:
//   RBL  stays high only if s = 0 and t = 0   -> VOP1 = ~(s | t), VON1 = s | t
//   RBLb stays high only if ~s = 0 and ~t = 0 -> VOP2 =  s & t,  VON2 = ~(s & t)
// The customized full adder needs only these: carry(i+1) = VOP2 | (VON1 & carry(i)).
// With carry(0) = 1 the chain computes s + ~TH + 1 = s - TH + 2^WORD_W, so
// the MSB carry-out cout is 1 exactly when TOS-1 >= TH; it picks TOS-1 or 0
// for write-back. The NOR read-out and the carry use of the MSB are from the
// paper; storing ~TH with carry-in 1 is this design's encoding that makes
// the adder carry a comparison.
// Timing: tos1 is registered (end of MO); cout is combinational in the CMP
// phase and is latched by the write-back DFFs at the end of it.
module cmp_module #(
  parameter int unsigned COLS   = 120,
  parameter int unsigned WORD_W = 5
) (
  input  logic                        clk,
  input  logic                        wwl_cmp,
  input  logic [COLS-1:0][WORD_W-1:0] sum_in,
  input  logic                        th_we,
  input  logic [WORD_W-1:0]           th_in,
  output logic [COLS-1:0][WORD_W-1:0] tos1,
  output logic [COLS-1:0]             cout
);

  logic [COLS-1:0][WORD_W-1:0] th_row;   // TH row of type-B cells (stores ~TH)

  always_ff @(posedge clk) begin
    if (wwl_cmp) tos1 <= sum_in;
    if (th_we) begin
      for (int c = 0; c < COLS; c++) th_row[c] <= ~th_in;
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic carry, von1, vop2;
      carry = 1'b1;
      for (int b = 0; b < WORD_W; b++) begin
        von1  = tos1[c][b] | th_row[c][b];   // inverted RBL
        vop2  = tos1[c][b] & th_row[c][b];   // buffered RBLb
        carry = vop2 | (von1 & carry);
      end
      cout[c] = carry;
    end
  end

endmodule

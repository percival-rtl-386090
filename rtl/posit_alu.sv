// posit_alu: posit operations carried out by the integer ALU.
//
// Posits order like two's complement integers (NaR = most negative value, equal
// only to itself), so PMIN, PMAX, PEQ, PLT and PLE reuse a signed integer
// comparator. Comparison results (0/1) and PMV.X.W (posit bits sign-extended,
// as FMV.X.W does) go to the integer register file; PMIN/PMAX, the sign
// injections and PMV.W.X (low N bits of the integer) go to the posit register
// file. Posit negation is a two's complement, so sign injection negates the
// whole word when the sign must change (NaR and zero map to themselves).
// Combinational; the datapath registers the result for write-back in the next
// cycle (latency 0). Comparison via the integer ALU follows the paper; placing
// sign injection and moves here is this design's choice.
module posit_alu
  import posit_pkg::*;
#(
  parameter int unsigned N    = 32,
  parameter int unsigned XLEN = 64
) (
  input  pop_e            op_i,
  input  logic [XLEN-1:0] a_i,   // posit (low N bits) or integer (PMV.W.X)
  input  logic [N-1:0]    b_i,
  output logic [XLEN-1:0] result_o
);
  logic signed [N-1:0] pa, pb;
  logic lt, eq, want_neg;
  logic [N-1:0] sgnj;

  always_comb begin
    pa = $signed(a_i[N-1:0]);
    pb = $signed(b_i);
    lt = pa < pb;
    eq = pa == pb;
    case (op_i)
      OP_PSGNJ:  want_neg = pb[N-1];
      OP_PSGNJN: want_neg = !pb[N-1];
      default:   want_neg = pa[N-1] ^ pb[N-1];     // PSGNJX
    endcase
    sgnj = (pa[N-1] != want_neg) ? (~pa + 1'b1) : pa;
    case (op_i)
      OP_PMIN:  result_o = XLEN'(lt ? a_i[N-1:0] : b_i);
      OP_PMAX:  result_o = XLEN'(lt ? b_i : a_i[N-1:0]);
      OP_PEQ:   result_o = XLEN'(eq);
      OP_PLT:   result_o = XLEN'(lt);
      OP_PLE:   result_o = XLEN'(lt || eq);
      OP_PSGNJ, OP_PSGNJN, OP_PSGNJX:
                result_o = XLEN'(sgnj);
      OP_PMVXW: result_o = XLEN'(signed'(pa));
      OP_PMVWX: result_o = XLEN'(a_i[N-1:0]);
      default:  result_o = '0;
    endcase
  end
endmodule

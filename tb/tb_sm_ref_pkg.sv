// tb_sm_ref_pkg: reference model for the testbenches.
// The default selector functions written out as plain Boolean expressions
// (independently of the truth-table encoding in sa_pkg), the overflow guard
// and signed product / negation helpers.
package tb_sm_ref_pkg;

  // Decision of SM-(sel+1) for operands x, w; sel 3 selects no SM.
  function automatic bit sm_ref(input int sel, input logic [7:0] x, input logic [7:0] w);
    case (sel)
      0: return (!x[7] && w[0]) || (x[7] && x[6] && w[1] && !w[0]);
      1: return (x[7] ^ w[7]) && (x[0] || w[0]);
      2: return x[6] ^ w[1] ^ x[1] ^ w[2];
      default: return 1'b0;
    endcase
  endfunction

  // Whether the PE forms the product from (-x, -w).
  function automatic bit use_neg_ref(input int sel, input logic [7:0] x, input logic [7:0] w);
    return sm_ref(sel, x, w) && (x != 8'h80) && (w != 8'h80);
  endfunction

  function automatic int sprod(input logic [7:0] x, input logic [7:0] w);
    return int'($signed(x)) * int'($signed(w));
  endfunction

  function automatic logic [7:0] neg8(input logic [7:0] x);
    return 8'((256 - int'(x)) % 256);
  endfunction

endpackage

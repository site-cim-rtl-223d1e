// site_ref_pkg -- reference arithmetic shared by the testbenches.
//
// Computes the expected outputs of a column from first principles (integer products of the
// ternary weights and inputs), independently of the RTL: SiTe CiM I saturates the +1 count and
// the -1 count at 8 each and subtracts; SiTe CiM II subtracts first, then saturates the
// magnitude at 8, with sign +1 only when the +1 count is strictly larger.
package site_ref_pkg;

  function automatic int tval(logic [1:0] t);
    return (t == 2'b01) ? 1 : (t == 2'b10) ? -1 : 0;
  endfunction

  function automatic logic [1:0] tcode(int v);
    return (v > 0) ? 2'b01 : (v < 0) ? 2'b10 : 2'b00;
  endfunction

  function automatic int sat8(int x);
    return (x > 8) ? 8 : x;
  endfunction

  // a = number of products +1, b = number of products -1 in one access of one column
  function automatic int col_ref(bit flavor2, int a, int b);
    if (!flavor2) return sat8(a) - sat8(b);
    if (a > b)    return sat8(a - b);
    return -sat8(b - a);
  endfunction

  // random trit with probability of zero about pz percent
  function automatic logic [1:0] rand_trit(int pz);
    if (int'($urandom_range(99)) < pz) return 2'b00;
    return $urandom_range(1) ? 2'b01 : 2'b10;
  endfunction

endpackage

// tb_util_pkg: reference arithmetic shared by the DB-PIM testbenches.
// block_value gives the signed value of one stored dyadic block:
//   (sign ? -1 : +1) * (q ? 2 : 1) * 4^index
// (q is the upper bit of the block, so q=1 is "10" and q=0 is "01").
// to_csd returns the canonical signed digit form of an 8-bit value as two
// masks (positive digits, negative digits), built from LSB to MSB.
package tb_util_pkg;
  function automatic int block_value(bit q, bit sign, int unsigned index);
    int v;
    v = (q ? 2 : 1) << (2 * index);
    return sign ? -v : v;
  endfunction

  // CSD digits of x (|x| < 256): pos[i]=1 for digit +1, neg[i]=1 for -1
  function automatic void to_csd(int x, output bit [9:0] pos, output bit [9:0] neg);
    int n;
    n = x; pos = '0; neg = '0;
    for (int i = 0; i < 10; i++) begin
      if (n % 2 != 0) begin
        int d;
        d = ((n % 4 + 4) % 4 == 1) ? 1 : -1;
        if (d == 1) pos[i] = 1'b1; else neg[i] = 1'b1;
        n = n - d;
      end
      n = n / 2;
    end
  endfunction
endpackage

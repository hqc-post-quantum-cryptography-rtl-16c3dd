// Reference GF(2^8) arithmetic for the testbenches, written independently of
// the design package: polynomial-basis multiply with reduction by 0x11D,
// powers of alpha = 0x02 by repeated multiplication, polynomial evaluation.
package tb_gf_pkg;
  function automatic logic [7:0] mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11D << (i - 8);
    return p[7:0];
  endfunction
  function automatic logic [7:0] apow(input int e);
    logic [7:0] v;
    int ee;
    v  = 8'd1;
    ee = ((e % 255) + 255) % 255;
    for (int i = 0; i < ee; i++) v = mul(v, 8'd2);
    return v;
  endfunction
  function automatic logic [7:0] inv(input logic [7:0] a);
    for (int i = 1; i < 256; i++) if (mul(a, 8'(i)) == 8'd1) return 8'(i);
    return 8'd0;
  endfunction
endpackage

// tb_haven_pkg: reference functions shared by the testbenches. The flash
// model fills its whole address space with a fixed pseudo-random byte per
// address, so any testbench can work out what a vector holds from its address
// alone: byte(A) = bits [20:13] of (A * 2654435761) mod 2^32.
package tb_haven_pkg;
  import haven_pkg::*;

  function automatic logic [7:0] flash_byte(input logic [ADDR_W-1:0] a);
    logic [31:0] h;
    h = a[31:0] * 32'd2654435761 ^ {24'd0, a[39:32]};
    return h[20:13];
  endfunction

  // exact distance as the distance unit reports it
  function automatic logic [31:0] ref_dist(input logic [ADDR_W-1:0] vaddr,
                                           input logic [7:0] q[],
                                           input int dim, input bit ip, input bit sgn);
    longint acc;
    acc = 0;
    for (int j = 0; j < dim; j++) begin
      int x, y;
      logic [7:0] xb;
      xb = flash_byte(vaddr + ADDR_W'(j));
      x = sgn ? int'($signed(xb)) : int'(xb);
      y = sgn ? int'($signed(q[j])) : int'(q[j]);
      if (ip) acc += x * y; else acc += (x - y) * (x - y);
    end
    if (ip) return 32'(64'h8000_0000 - acc);
    return 32'(acc);
  endfunction
endpackage

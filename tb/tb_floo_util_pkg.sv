// tb_floo_util_pkg: helpers shared by the testbench AXI models. init_data gives the content a
// memory word has before it is first written: a fixed pseudo-random function of its address,
// so a reader can predict it without sharing state with the memory model.
package tb_floo_util_pkg;
  function automatic logic [511:0] init_data(longint unsigned addr);
    logic [511:0] d;
    logic [63:0]  x;
    x = addr ^ 64'h9e37_79b9_7f4a_7c15;
    for (int i = 0; i < 8; i++) begin
      x = x * 64'h5851_f42d_4c95_7f2d + 64'h1405_7b7e_f767_814f;
      d[i*64 +: 64] = x ^ (x >> 29);
    end
    return d;
  endfunction
endpackage

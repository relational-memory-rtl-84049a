// rme_tb_pkg: helpers shared by the testbenches.
//
// mem_byte() defines the content of simulated main memory: every byte is a
// fixed function of its address, so a table of any size exists without
// being stored, and a checker can recompute any expected byte.
package rme_tb_pkg;

  function automatic logic [7:0] mem_byte(input logic [39:0] a);
    logic [7:0] v;
    v = a[7:0] * 8'd29 + a[15:8] * 8'd7;
    v = v ^ a[23:16] ^ (a[31:24] * 8'd3) ^ a[39:32];
    return v ^ 8'h5a;
  endfunction

endpackage

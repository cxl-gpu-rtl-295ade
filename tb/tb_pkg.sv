// tb_pkg: helpers shared by the testbenches.
// init_line() is the content an endpoint returns for a line that was never
// written: the line address repeated, xor a constant, so every line differs.
//
// init_line() gives the value every line of an endpoint holds before it is
// written; used by the endpoint model and the scoreboards.
package tb_pkg;
  import cxl_pkg::*;
  function automatic logic [DATA_W-1:0] init_line(longint line_addr);
    return {8{64'(line_addr) ^ 64'h5A5A_0000_C3C3_0000}};
  endfunction
endpackage

// tb_pkg -- small helpers shared by the testbenches.
package tb_pkg;
  localparam real PI = 3.14159265358979323846;
  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction
endpackage

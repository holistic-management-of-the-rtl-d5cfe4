// tb_medic_util_pkg: helpers shared by the MeDiC testbenches.
// line_data() is the content every test assumes for a memory line: a
// pattern derived from the line address, so a reply can be checked without
// storing anything. The DRAM model returns exactly this pattern.
package tb_medic_util_pkg;
  import medic_pkg::*;

  function automatic logic [DATA_W-1:0] line_data(logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++)
      d[i*32 +: 32] = {7'(i), a} ^ 32'h5A5A_0000;
    return d;
  endfunction
endpackage

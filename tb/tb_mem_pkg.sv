// tb_mem_pkg: byte-addressed memory shared by the AXI memory models of a testbench.
//
// Stands in for the device DRAM. All AXI port models read and write this array, so
// ports of different widths see one memory, as the DMAs of the accelerator do.
package tb_mem_pkg;
  localparam int unsigned MEM_BYTES = 1 << 20;
  logic [7:0] mem [MEM_BYTES];

  function automatic void wr32(int unsigned a, logic [31:0] v);
    for (int i = 0; i < 4; i++) mem[a+i] = v[8*i +: 8];
  endfunction
  function automatic logic [31:0] rd32(int unsigned a);
    logic [31:0] v;
    for (int i = 0; i < 4; i++) v[8*i +: 8] = mem[a+i];
    return v;
  endfunction
endpackage

// dmac_system_tb_pkg -- helpers shared by the system-level testbenches:
// the default content of unwritten memory.
//
// The address-derived pattern is a testbench choice: it lets a checker know
// the source data of any transfer without storing it.
package dmac_system_tb_pkg;
  import dmac_pkg::*;

  // content the memory model returns for a word that was never written
  function automatic data_t mem_pattern(addr_t a);
    return {a[31:0] ^ 32'h5a5a_0f0f, ~a[31:0]};
  endfunction
endpackage

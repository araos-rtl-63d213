// araos_tb_pkg: helpers shared by the AraOS testbenches: the address map
// used by the behavioural MMU model and by the testbenches' reference
// models, so both sides agree on what each virtual page translates to.
//
// Page mapping: physical page = virtual page + 0x8_0000 (mod 2**44), the
// page offset is kept. A page is faulty when its page number equals the
// fault page programmed into the model.
package araos_tb_pkg;
  import araos_pkg::*;

  function automatic logic [PAddrWidth-1:0] tb_translate(logic [VAddrWidth-1:0] va);
    logic [43:0] ppn;
    ppn = 44'(va[VAddrWidth-1:PageOffset]) + 44'h8_0000;
    return {ppn, va[PageOffset-1:0]};
  endfunction

  function automatic logic [51:0] tb_vpn(logic [VAddrWidth-1:0] va);
    return va[63:12];
  endfunction

endpackage

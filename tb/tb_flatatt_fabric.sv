// tb_flatatt_fabric: end-to-end test of the fabric on a 4 x 4 mesh (the
// whole mesh as one FlatAttention group). The test body is in
// fabric_test.svh; see there for the sequence and what is checked.
module tb_flatatt_fabric;
  localparam int NX = 4;
  localparam int NY = 4;
  `include "tb/fabric_test.svh"
  defparam dut.NX = NX;
  defparam dut.NY = NY;
endmodule

// dcache_arbiter: static-priority arbiter of the data cache's single SRAM port.
//
// Port 0 has the highest priority and port NumPorts-1 the lowest. In the
// cache the ports are, in this order: miss handler (0), snoop controller (1),
// PTW (2), load unit (3), accelerator (4) and store unit (5), so that the
// line-state updates needed for coherence are never held up by core requests.
// The winner's request is passed combinationally to the SRAMs and gnt_o tells
// it that its access happens in this cycle; the read data returns to all
// requesters one cycle later and the one granted in the previous cycle takes
// it. A requester keeps its request up until granted.
module dcache_arbiter
  import culsans_pkg::*;
#(
  parameter int unsigned NumPorts = 6
) (
  input  sram_req_t            req_i [NumPorts],
  output logic [NumPorts-1:0]  gnt_o,
  output sram_req_t            req_o
);
  always_comb begin
    gnt_o = '0;
    req_o = '0;
    for (int i = NumPorts-1; i >= 0; i--) begin
      if (req_i[i].valid) begin
        gnt_o = '0;
        gnt_o[i] = 1'b1;
        req_o = req_i[i];
      end
    end
  end
endmodule

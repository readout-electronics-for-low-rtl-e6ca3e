// ipbus_fabric: address decoder of the IPbus slave bus.
//
// Splits one IPbus master bus (from the IPbus UDP transactor) among
// N_SLV slaves. Slave i is selected when (addr & SLV_MASK[i]) == SLV_BASE[i];
// the lowest matching index wins. Only the selected slave sees strobe; its
// read bus is returned to the master. An access that matches no slave is
// answered at once with err, so the master never hangs.
//
// Interface: ipbus-firmware style buses (pat_pkg::ipb_wbus_t/ipb_rbus_t);
// the master holds strobe until ack or err. Purely combinational.
//
// From the paper: the "IPbus Fabric" joining external component I/O and
// firmware telemetry to IPbus. Our own choices: the decoding rule and the
// address map set in the top.
module ipbus_fabric
  import pat_pkg::*;
#(
  parameter int unsigned               N_SLV    = 2,
  parameter logic [N_SLV-1:0][31:0]    SLV_BASE = {32'h0000_0100, 32'h0000_0000},
  parameter logic [N_SLV-1:0][31:0]    SLV_MASK = {32'hFFFF_FF00, 32'hFFFF_FF00}
)(
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out,
  output ipb_wbus_t slv_in  [N_SLV],
  input  ipb_rbus_t slv_out [N_SLV]
);

  logic                     hit;
  logic [$clog2(N_SLV+1)-1:0] sel;

  always_comb begin
    hit = 1'b0;
    sel = '0;
    for (int unsigned i = 0; i < N_SLV; i++) begin
      if (!hit && ((ipb_in.addr & SLV_MASK[i]) == SLV_BASE[i])) begin
        hit = 1'b1;
        sel = ($clog2(N_SLV+1))'(i);
      end
    end
    for (int unsigned i = 0; i < N_SLV; i++) begin
      slv_in[i]        = ipb_in;
      slv_in[i].strobe = ipb_in.strobe && hit && (sel == ($clog2(N_SLV+1))'(i));
    end
    ipb_out = '0;
    if (hit) begin
      for (int unsigned i = 0; i < N_SLV; i++)
        if (sel == ($clog2(N_SLV+1))'(i)) ipb_out = slv_out[i];
    end else begin
      ipb_out.err = ipb_in.strobe;
    end
  end

endmodule

// addr_decode: address-based routing-table lookup ("Addr Decode" of the crossbar).
//
// Each crosspoint routes a transaction by its destination address. The routing table is a
// list of NoRules rules, each an address range [start_addr, end_addr) and the crossbar master
// port that leads towards it. addr_decode compares the address against all rules in parallel
// and returns the port of the first rule that matches (dec_valid_o), or flags a decode error
// (dec_error_o) when no rule matches; the crossbar then sends the transaction to its error
// slave. Purely combinational. The table is a port so that the mesh can compute it for each
// crosspoint (the paper uses a generator script for this); first-match priority and half-open
// ranges are this design's choices.
module addr_decode #(
  parameter int unsigned NoIdx   = 5,
  parameter int unsigned NoRules = 16,
  localparam int unsigned IdxW   = (NoIdx > 1) ? $clog2(NoIdx) : 1
) (
  input  axi_pkg::addr_t      addr_i,
  input  axi_pkg::xbar_rule_t addr_map_i [NoRules],
  output logic [IdxW-1:0]     idx_o,
  output logic                dec_valid_o,
  output logic                dec_error_o
);
  always_comb begin
    idx_o       = '0;
    dec_valid_o = 1'b0;
    for (int unsigned i = 0; i < NoRules; i++) begin
      if (!dec_valid_o && addr_i >= addr_map_i[i].start_addr &&
          addr_i < addr_map_i[i].end_addr) begin
        dec_valid_o = 1'b1;
        idx_o       = IdxW'(addr_map_i[i].idx);
      end
    end
    dec_error_o = !dec_valid_o;
  end
endmodule

// Multi-address decoder of the multicast crossbar.
//
// Takes a request address with its multicast mask (mask bit = 1 means "this
// address bit is don't care") and an address map of NoRules interval rules,
// and returns which crossbar master ports hold at least one of the addressed
// locations (`select_o`), together with the subset of addresses that falls in
// each of them, again in address+mask form (`addr_o`, `mask_o`).
//
// Every rule is first converted from interval form to mask form
// (mask = end - start - 1, addr = start); this is exact for rules whose size is
// a power of two and whose start is aligned to it, which the address map must
// satisfy. A rule is then hit when every bit either is masked by the request or
// the rule, or agrees between request and rule; the subset inside the rule is
// the request with its masked bits resolved to the rule's bits wherever the
// rule fixes them. These formulas are the paper's. If several rules map to the
// same port, the subset of the highest-numbered hitting rule is reported (a
// design choice; the paper does not cover it). `dec_error_o` flags a request
// that hits no rule. Purely combinational.
module mcast_addr_decode
  import mcast_axi_pkg::*;
#(
  parameter int unsigned NoMstPorts = 16,
  parameter int unsigned NoRules    = NoMstPorts
) (
  input  addr_t          addr_i,
  input  addr_t          mask_i,
  input  rule_t          addr_map_i [NoRules],
  output logic [NoMstPorts-1:0] select_o,
  output addr_t          addr_o [NoMstPorts],
  output addr_t          mask_o [NoMstPorts],
  output logic           dec_error_o
);
  localparam int unsigned PIdxW = (NoMstPorts > 1) ? $clog2(NoMstPorts) : 1;

  always_comb begin
    addr_t rule_mask, rule_addr, masked_bits, match_bits;
    logic [PIdxW-1:0] pi;
    select_o = '0;
    for (int p = 0; p < NoMstPorts; p++) begin
      addr_o[p] = addr_i;
      mask_o[p] = mask_i;
    end
    for (int r = 0; r < NoRules; r++) begin
      // interval form -> mask form
      rule_addr   = addr_map_i[r].start_addr;
      rule_mask   = addr_map_i[r].end_addr - addr_map_i[r].start_addr - 1'b1;
      masked_bits = mask_i | rule_mask;
      match_bits  = ~(addr_i ^ rule_addr);
      pi          = PIdxW'(addr_map_i[r].idx);
      if (&(masked_bits | match_bits) && (addr_map_i[r].idx < NoMstPorts)) begin
        select_o[pi] = 1'b1;
        addr_o[pi]   = (~mask_i & addr_i) | (mask_i & rule_addr);
        mask_o[pi]   = mask_i & rule_mask;
      end
    end
    dec_error_o = (select_o == '0);
  end
endmodule

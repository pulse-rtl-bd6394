// range_xlate: range-based address translation and protection for one
// memory node, shared by its memory pipelines.
//
// The table holds NENT entries, each mapping the virtual range [vbase, vlimit)
// of this node to physical memory starting at pbase, with read and write
// permissions.  Every lookup port compares its address against all entries in
// parallel (the job a TCAM does) and uses the lowest-numbered match:
//   hit = some valid entry contains addr      (miss: the address belongs to
//                                              another memory node)
//   ok  = hit, the access fits below vlimit, and the entry grants the access
//   paddr = addr - vbase + pbase
// Lookups are combinational; the memory pipeline registers the result.
// Entries are written one per cycle through cfg_* by the control plane and
// are cleared by reset.
module range_xlate
  import pulse_pkg::*;
#(
  parameter int NENT   = 16,
  parameter int NPORTS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [$clog2(NENT)-1:0]  cfg_idx,
  input  xl_entry_t                cfg_entry,
  input  logic [63:0]              q_addr  [NPORTS],
  input  logic [15:0]              q_len   [NPORTS],   // bytes, > 0
  input  logic [NPORTS-1:0]        q_write,
  output logic [NPORTS-1:0]        r_hit,
  output logic [NPORTS-1:0]        r_ok,
  output logic [63:0]              r_paddr [NPORTS]
);

  xl_entry_t ent [NENT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NENT; i++) ent[i] <= '0;
    end else if (cfg_we) begin
      ent[cfg_idx] <= cfg_entry;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      r_hit[p]   = 1'b0;
      r_ok[p]    = 1'b0;
      r_paddr[p] = '0;
      for (int i = NENT - 1; i >= 0; i--) begin
        if (ent[i].valid && q_addr[p] >= ent[i].vbase && q_addr[p] < ent[i].vlimit) begin
          r_hit[p]   = 1'b1;
          r_paddr[p] = q_addr[p] - ent[i].vbase + ent[i].pbase;
          r_ok[p]    = (q_addr[p] + 64'(q_len[p]) <= ent[i].vlimit) &&
                       (q_write[p] ? ent[i].wr : ent[i].rd);
        end
      end
    end
  end

endmodule

// switch_router: the in-network part of PULSE's hierarchical translation.
//
// The rack's address space is range-partitioned over memory nodes.  The switch
// keeps only the coarse map, range -> memory node (NRANGE entries written
// through cfg_*); each node's accelerator keeps the fine-grained translation.
// Port 0 faces the CPU node, port k+1 memory node k.  The router looks at the
// header beat of every packet:
//   status ST_REQ (new request) or ST_NOT_LOCAL (a node found cur_ptr is not
//   its own): look cur_ptr up; on a hit forward the packet, with status set to
//   ST_REQ, to that node's port.  On a miss, or if the map names the very node
//   that just returned it, send it to the CPU node with status ST_INVALID.
//   any other status (finished traversal): send it to the CPU node.
// So a traversal that walks off one node continues on the next without a trip
// to the CPU.  Packets are forwarded whole (cut-through, one beat per cycle);
// each output is granted round-robin to one input at a time and stays locked
// until that packet's last beat.  n_reroute counts re-routed packets.
module switch_router
  import pulse_pkg::*;
#(
  parameter int NMN    = 4,
  parameter int NRANGE = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  logic [$clog2(NRANGE)-1:0] cfg_idx,
  input  rt_entry_t                 cfg_entry,
  input  logic [NMN:0]              in_valid,
  output logic [NMN:0]              in_ready,
  input  beat_t                     in_beat  [NMN+1],
  output logic [NMN:0]              out_valid,
  input  logic [NMN:0]              out_ready,
  output beat_t                     out_beat [NMN+1],
  output logic [31:0]               n_reroute,
  output logic [31:0]               n_invalid
);

  localparam int NP = NMN + 1;
  localparam int PW = $clog2(NP);

  rt_entry_t rt [NRANGE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < NRANGE; i++) rt[i] <= '0;
    else if (cfg_we) rt[cfg_idx] <= cfg_entry;
  end

  // ---- per-input routing decision ----
  logic [NP-1:0]  sop;                 // next beat of this input is a header
  logic [PW-1:0]  dst_q [NP];          // destination of the packet in flight
  logic [PW-1:0]  dst   [NP];
  beat_t          fwd   [NP];          // beat as forwarded (header rewritten)
  logic [NP-1:0]  is_rr, is_inv;

  for (genvar i = 0; i < NP; i++) begin : g_in
    hdr_t           h, hw;
    logic [NRANGE-1:0] m;
    logic           hit;
    logic [7:0]     node;
    assign h = hdr_t'(in_beat[i].data);
    for (genvar r = 0; r < NRANGE; r++) begin : g_r
      assign m[r] = rt[r].valid && h.cur_ptr >= rt[r].base && h.cur_ptr < rt[r].limit;
    end
    // lowest matching entry wins
    always_comb begin
      hit  = 1'b0;
      node = '0;
      for (int r = NRANGE - 1; r >= 0; r--)
        if (m[r]) begin hit = 1'b1; node = rt[r].node; end
    end
    always_comb begin
      hw        = h;
      dst[i]    = dst_q[i];
      is_rr[i]  = 1'b0;
      is_inv[i] = 1'b0;
      if (h.status == ST_REQ || h.status == ST_NOT_LOCAL) begin
        if (hit && int'(node) < NMN && !(h.status == ST_NOT_LOCAL && int'(node) + 1 == i)) begin
          hw.status = ST_REQ;
          if (sop[i]) begin
            dst[i]   = PW'(int'(node) + 1);
            is_rr[i] = (i != 0);
          end
        end else begin
          hw.status = ST_INVALID;
          if (sop[i]) begin
            dst[i]    = '0;
            is_inv[i] = 1'b1;
          end
        end
      end else if (sop[i]) begin
        dst[i] = '0;
      end
    end
    assign fwd[i].data = sop[i] ? BEAT_W'(hw) : in_beat[i].data;
    assign fwd[i].last = in_beat[i].last;
  end

  // ---- per-output arbitration ----
  logic [NP-1:0] locked;
  logic [PW-1:0] owner [NP];
  logic [PW-1:0] rrp   [NP];
  logic [PW-1:0] sel   [NP];
  logic [NP-1:0] act;

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      sel[o] = owner[o];
      act[o] = locked[o] && in_valid[owner[o]];
      if (!locked[o]) begin
        // scan inputs rrp, rrp+1, ... (mod NP); the first requester wins
        for (int k = NP - 1; k >= 0; k--) begin
          automatic logic [PW:0] i = {1'b0, rrp[o]} + (PW+1)'(k);
          if (i >= (PW+1)'(NP)) i = i - (PW+1)'(NP);
          if (in_valid[i[PW-1:0]] && sop[i[PW-1:0]] && int'(dst[i[PW-1:0]]) == o) begin
            sel[o] = i[PW-1:0];
            act[o] = 1'b1;
          end
        end
      end
      out_valid[o] = act[o];
      out_beat[o]  = fwd[sel[o]];
    end
    for (int i = 0; i < NP; i++) begin
      in_ready[i] = 1'b0;
      for (int o = 0; o < NP; o++)
        if (act[o] && int'(sel[o]) == i && out_ready[o]) in_ready[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sop <= '1; locked <= '0; n_reroute <= '0; n_invalid <= '0;
      for (int i = 0; i < NP; i++) begin dst_q[i] <= '0; owner[i] <= '0; rrp[i] <= '0; end
    end else begin
      for (int i = 0; i < NP; i++)
        if (in_valid[i] && in_ready[i]) begin
          sop[i] <= in_beat[i].last;
          if (sop[i]) dst_q[i] <= dst[i];
        end
      n_reroute <= n_reroute + 32'($countones(in_valid & in_ready & sop & is_rr));
      n_invalid <= n_invalid + 32'($countones(in_valid & in_ready & sop & is_inv));
      for (int o = 0; o < NP; o++)
        if (act[o] && out_ready[o]) begin
          owner[o]  <= sel[o];
          locked[o] <= !out_beat[o].last;
          if (!locked[o]) rrp[o] <= (int'(sel[o]) == NP - 1) ? '0 : sel[o] + 1'b1;
        end
    end
  end

endmodule

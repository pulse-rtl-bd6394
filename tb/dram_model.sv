// dram_model: behavioural model of a memory node's DRAM behind its memory
// interconnect, for simulation only (not synthesizable).
//
// NP independent ports with the memory-pipeline protocol: a request is taken
// when the port is idle; a read returns its beats on consecutive cycles
// starting LAT cycles later; a write takes its beats on m_w* (wready high).
// Storage is sparse, one 64 B beat per entry, addressed by byte address / 64.
// Testbenches reach it through poke()/peek() (64-bit words, 8 B aligned).
// While rst_n is low no request is accepted.
module dram_model
  import pulse_pkg::*;
#(
  parameter int NP  = 4,
  parameter int LAT = 28
) (
  input  logic              clk,
  input  logic              rst_n,       // requests are ignored during reset
  input  logic [NP-1:0]     m_req_valid,
  output logic [NP-1:0]     m_req_ready,
  input  mreq_t             m_req    [NP],
  input  logic [NP-1:0]     m_wvalid,
  output logic [NP-1:0]     m_wready,
  input  logic [BEAT_W-1:0] m_wdata  [NP],
  input  logic [NP-1:0]     m_wlast,
  output logic [NP-1:0]     m_rvalid,
  output logic [BEAT_W-1:0] m_rdata  [NP],
  output logic [NP-1:0]     m_rlast
);

  logic [BEAT_W-1:0] mem [longint unsigned];
  int reads = 0, writes = 0;

  function automatic void poke(input longint unsigned addr, input logic [63:0] v);
    logic [BEAT_W-1:0] b = mem.exists(addr >> 6) ? mem[addr >> 6] : '0;
    b[((addr >> 3) & 7) * 64 +: 64] = v;
    mem[addr >> 6] = b;
  endfunction

  function automatic logic [63:0] peek(input longint unsigned addr);
    logic [BEAT_W-1:0] b = mem.exists(addr >> 6) ? mem[addr >> 6] : '0;
    return b[((addr >> 3) & 7) * 64 +: 64];
  endfunction

  for (genvar p = 0; p < NP; p++) begin : g_port
    typedef enum {IDLE, WAIT, RD, WR} st_e;
    st_e st = IDLE;
    int  wait_cnt = 0, left = 0;
    longint unsigned ba = 0;
    assign m_req_ready[p] = (st == IDLE) && rst_n;
    assign m_wready[p]    = (st == WR);
    always @(posedge clk) begin
      m_rvalid[p] <= 1'b0;
      m_rlast[p]  <= 1'b0;
      case (st)
        IDLE: if (m_req_valid[p] && rst_n) begin
          ba = m_req[p].addr >> 6;
          left = int'(m_req[p].beats);
          if (m_req[p].write) begin st <= WR; writes++; end
          else begin st <= WAIT; wait_cnt = LAT; reads++; end
        end
        WAIT: begin
          wait_cnt--;
          if (wait_cnt <= 0) st <= RD;
        end
        RD: begin
          m_rvalid[p] <= 1'b1;
          m_rdata[p]  <= mem.exists(ba) ? mem[ba] : '0;
          m_rlast[p]  <= (left == 1);
          ba++; left--;
          if (left == 0) st <= IDLE;
        end
        WR: if (m_wvalid[p]) begin
          mem[ba] = m_wdata[p];
          ba++; left--;
          if (left == 0) st <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
    initial begin m_rvalid[p] = 1'b0; m_rlast[p] = 1'b0; m_rdata[p] = '0; end
  end

endmodule

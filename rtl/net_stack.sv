// net_stack: packet parser and deparser of a PULSE accelerator.
//
// Requests and responses share one format, so a response can go back to the
// CPU node or, unchanged, become a request for another memory node.  A packet
// is PKT_BEATS 64 B beats: a header (hdr_t: request ID, cur_ptr, iterations
// done so far, status, node), SP_BEATS beats of scratch_pad, then CODE_BEATS
// beats of code.  Link-layer framing (Ethernet/UDP) is outside this block.
//
// Receive: the header beat is accepted only when the scheduler grants a free
// workspace (otherwise the input stalls, back-pressuring the network).  The
// header's cur_ptr and every following beat are written straight into that
// workspace; the size of the iterator's aggregated LOAD is taken from its first
// instruction (LOAD with imm = bytes; any other first instruction means a full
// 256 B line).  After the last beat, rx_done hands the workspace to the
// scheduler.  One beat per cycle.
//
// Transmit: when the scheduler offers a finished workspace, the deparser
// streams its header (with the final cur_ptr and status), scratch_pad and code
// out, one beat per cycle while tx_out_ready is high, and signals tx_done on
// the last beat so the workspace can be freed.
module net_stack
  import pulse_pkg::*;
#(
  parameter int       WSW     = 3,
  parameter bit [7:0] NODE_ID = 8'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet input
  input  logic              rx_valid,
  output logic              rx_ready,
  input  beat_t             rx_beat,
  // allocation
  output logic              alloc_req,
  input  logic              alloc_avail,
  input  logic [WSW-1:0]    alloc_ws,
  // workspace writes
  output logic              n_we,
  output logic [WSW-1:0]    n_ws,
  output region_e           n_region,
  output logic [2:0]        n_beat,
  output logic [BEAT_W-1:0] n_wdata,
  output logic              rx_done,
  output logic [WSW-1:0]    rx_ws,
  output logic [63:0]       rx_req_id,
  output logic [15:0]       rx_iter,
  output logic [2:0]        rx_beats,
  // response side
  input  logic              tx_valid,
  output logic              tx_ready,
  input  logic [WSW-1:0]    tx_ws,
  input  logic [63:0]       tx_req_id,
  input  logic [15:0]       tx_iter,
  input  status_e           tx_status,
  output logic              tx_done,
  output logic [WSW-1:0]    tx_done_ws,
  output logic [WSW-1:0]    n_rws,
  output region_e           n_rregion,
  output logic [2:0]        n_rbeat,
  input  logic [BEAT_W-1:0] n_rdata,
  // packet output
  output logic              tx_out_valid,
  input  logic              tx_out_ready,
  output beat_t             tx_out_beat
);

  localparam int BODY = PKT_BEATS - 1;

  // ---------------- receive ----------------
  typedef enum logic {R_HDR, R_BODY} rs_e;
  rs_e            rs;
  logic [3:0]     rcnt;
  hdr_t           rhdr;
  instr_t         first_ins;
  logic [15:0]    ld_bytes;

  assign rhdr      = hdr_t'(rx_beat.data);
  assign alloc_req = (rs == R_HDR) && rx_valid && alloc_avail;
  assign rx_ready  = (rs == R_HDR) ? alloc_avail : 1'b1;
  assign first_ins = instr_t'(rx_beat.data[XLEN-1:0]);
  assign ld_bytes  = first_ins.imm[15:0];

  always_comb begin
    n_we     = rx_valid && rx_ready;
    n_ws     = (rs == R_HDR) ? alloc_ws : rx_ws;
    n_region = RG_CUR;
    n_beat   = '0;
    n_wdata  = rx_beat.data;
    if (rs == R_HDR) begin
      n_wdata = {{(BEAT_W-XLEN){1'b0}}, rhdr.cur_ptr};
    end else if (int'(rcnt) < SP_BEATS) begin
      n_region = RG_SP;
      n_beat   = rcnt[2:0];
    end else begin
      n_region = RG_CODE;
      n_beat   = 3'(int'(rcnt) - SP_BEATS);
    end
  end

  assign rx_done = (rs == R_BODY) && rx_valid && (int'(rcnt) == BODY - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_HDR; rcnt <= '0; rx_ws <= '0; rx_req_id <= '0; rx_iter <= '0;
      rx_beats <= 3'(LINE_BEATS);
    end else if (rx_valid && rx_ready) begin
      if (rs == R_HDR) begin
        rs        <= R_BODY;
        rcnt      <= '0;
        rx_ws     <= alloc_ws;
        rx_req_id <= rhdr.req_id;
        rx_iter   <= rhdr.iter_cnt;
      end else begin
        rcnt <= rcnt + 1'b1;
        if (int'(rcnt) == SP_BEATS) begin
          if (first_ins.op == OP_LOAD && ld_bytes != 16'd0 && ld_bytes <= 16'(LINE_BEATS * 64))
            rx_beats <= 3'((ld_bytes + 16'd63) >> 6);
          else
            rx_beats <= 3'(LINE_BEATS);
        end
        if (int'(rcnt) == BODY - 1) rs <= R_HDR;
      end
    end
  end

  // ---------------- transmit ----------------
  typedef enum logic [1:0] {T_IDLE, T_HDR, T_BODY} ts_e;
  ts_e         ts;
  logic [3:0]  tcnt;
  logic [WSW-1:0] tws;
  logic [63:0] treq;
  logic [15:0] titer;
  status_e     tstat;
  hdr_t        thdr;

  assign tx_ready = (ts == T_IDLE);
  assign n_rws    = tws;

  always_comb begin
    n_rregion = RG_CUR;
    n_rbeat   = '0;
    if (ts == T_BODY) begin
      if (int'(tcnt) < SP_BEATS) begin
        n_rregion = RG_SP;
        n_rbeat   = tcnt[2:0];
      end else begin
        n_rregion = RG_CODE;
        n_rbeat   = 3'(int'(tcnt) - SP_BEATS);
      end
    end
    thdr          = '0;
    thdr.req_id   = treq;
    thdr.cur_ptr  = n_rdata[XLEN-1:0];
    thdr.iter_cnt = titer;
    thdr.status   = tstat;
    thdr.node     = NODE_ID;
    tx_out_valid     = (ts != T_IDLE);
    tx_out_beat.data = (ts == T_HDR) ? BEAT_W'(thdr) : n_rdata;
    tx_out_beat.last = (ts == T_BODY) && (int'(tcnt) == BODY - 1);
  end

  assign tx_done    = tx_out_valid && tx_out_ready && tx_out_beat.last;
  assign tx_done_ws = tws;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE; tcnt <= '0; tws <= '0; treq <= '0; titer <= '0; tstat <= ST_REQ;
    end else begin
      unique case (ts)
        T_IDLE: if (tx_valid) begin
          ts <= T_HDR; tws <= tx_ws; treq <= tx_req_id; titer <= tx_iter; tstat <= tx_status;
        end
        T_HDR: if (tx_out_ready) begin ts <= T_BODY; tcnt <= '0; end
        T_BODY: if (tx_out_ready) begin
          tcnt <= tcnt + 1'b1;
          if (int'(tcnt) == BODY - 1) ts <= T_IDLE;
        end
        default: ts <= T_IDLE;
      endcase
    end
  end

  // A packet must end exactly on its last beat.
  property p_rx_framing;
    @(posedge clk) disable iff (!rst_n)
      (rx_valid && rx_ready && rs == R_BODY) |-> (rx_beat.last == (int'(rcnt) == BODY - 1));
  endproperty
  a_rx_framing: assert property (p_rx_framing);

endmodule

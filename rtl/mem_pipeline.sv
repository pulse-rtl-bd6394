// mem_pipeline: one PULSE memory pipeline.
//
// It is stateless between jobs.  A job from the scheduler names a workspace
// (global index) and says what to do:
//   wb   : first write the workspace's dirty data line (job_beats beats, as
//          many as were loaded) back to wb_addr, the address loaded in the
//          previous iteration, then clear dirty;
//   load : translate cur_ptr, check read permission and burst ld_beats 64 B
//          beats from DRAM into the workspace's data line.
// Each address goes through the node's translation table for one cycle (the
// result is registered).  A miss means the address lives on another memory
// node (MS_MISS); a hit without permission, or an access running past the
// range, is a protection failure (MS_PROT).  'done' pulses once per job with
// the status.  Loads start at the 64 B boundary at or below cur_ptr.
//
// Memory port: a request (mreq_t) with valid/ready, then for a write the
// beats on m_w* with valid/ready, or for a read the burst on m_r* (valid only;
// the pipeline always accepts read data).
//
// Cycle cost of a load job without write-back: accept (1) + translate (1) +
// request handshake (>=1) + DRAM latency + ld_beats beats + done (1).
module mem_pipeline
  import pulse_pkg::*;
#(
  parameter int WSW = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // job from the scheduler
  input  logic              job_valid,
  output logic              job_ready,
  input  logic [WSW-1:0]    job_ws,
  input  logic              job_load,
  input  logic [63:0]       job_addr,
  input  logic [2:0]        job_beats,
  input  logic              job_wb,
  input  logic [63:0]       job_wb_addr,
  output logic              done,
  output logic [WSW-1:0]    done_ws,
  output ms_e               done_status,
  // translation lookup
  output logic [63:0]       q_addr,
  output logic [15:0]       q_len,
  output logic              q_write,
  input  logic              r_hit,
  input  logic              r_ok,
  input  logic [63:0]       r_paddr,
  // workspace fill / write-back read / dirty clear
  output logic              f_valid,
  output logic [WSW-1:0]    f_ws,
  output logic [1:0]        f_beat,
  output logic [BEAT_W-1:0] f_data,
  output logic [WSW-1:0]    r_ws,
  output logic [1:0]        r_beat,
  input  logic [BEAT_W-1:0] r_data,
  output logic              c_valid,
  output logic [WSW-1:0]    c_ws,
  // memory port
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output mreq_t             m_req,
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [BEAT_W-1:0] m_wdata,
  output logic              m_wlast,
  input  logic              m_rvalid,
  input  logic [BEAT_W-1:0] m_rdata,
  input  logic              m_rlast
);

  typedef enum logic [3:0] {
    S_IDLE, S_WB_XL, S_WB_REQ, S_WB_DATA, S_LD_XL, S_LD_REQ, S_LD_DATA, S_DONE
  } st_e;
  st_e st;

  logic [WSW-1:0] ws;
  logic           load;
  logic [63:0]    addr, wb_addr, paddr;
  logic [2:0]     beats;
  logic [1:0]     cnt;
  ms_e            status;

  assign job_ready = (st == S_IDLE);

  always_comb begin
    q_write = (st == S_WB_XL);
    q_addr  = (st == S_WB_XL) ? wb_addr : addr;
    q_len   = {7'd0, beats, 6'd0};
  end

  assign f_valid = (st == S_LD_DATA) && m_rvalid;
  assign f_ws    = ws;
  assign f_beat  = cnt;
  assign f_data  = m_rdata;
  assign r_ws    = ws;
  assign r_beat  = cnt;
  assign c_valid = (st == S_WB_DATA) && m_wvalid && m_wready && m_wlast;
  assign c_ws    = ws;

  assign m_req_valid = (st == S_WB_REQ) || (st == S_LD_REQ);
  assign m_req.write = (st == S_WB_REQ);
  assign m_req.addr  = paddr;
  assign m_req.beats = 8'(beats);
  assign m_wvalid    = (st == S_WB_DATA);
  assign m_wdata     = r_data;
  assign m_wlast     = (3'(cnt) == beats - 3'd1);

  assign done        = (st == S_DONE);
  assign done_ws     = ws;
  assign done_status = status;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ws <= '0; load <= 1'b0; addr <= '0; wb_addr <= '0;
      paddr <= '0; beats <= 3'd1; cnt <= '0; status <= MS_OK;
    end else begin
      unique case (st)
        S_IDLE: if (job_valid) begin
          ws      <= job_ws;
          load    <= job_load;
          addr    <= {job_addr[63:6], 6'd0};
          beats   <= (job_beats == 3'd0 || job_beats > 3'(LINE_BEATS)) ? 3'(LINE_BEATS) : job_beats;
          wb_addr <= {job_wb_addr[63:6], 6'd0};
          status  <= MS_OK;
          cnt     <= '0;
          st      <= job_wb ? S_WB_XL : (job_load ? S_LD_XL : S_DONE);
        end
        S_WB_XL: begin
          paddr <= r_paddr;
          if (!r_hit)     begin status <= MS_MISS; st <= S_DONE; end
          else if (!r_ok) begin status <= MS_PROT; st <= S_DONE; end
          else st <= S_WB_REQ;
        end
        S_WB_REQ: if (m_req_ready) st <= S_WB_DATA;
        S_WB_DATA: if (m_wready) begin
          cnt <= cnt + 1'b1;
          if (m_wlast) begin
            cnt <= '0;
            st  <= load ? S_LD_XL : S_DONE;
          end
        end
        S_LD_XL: begin
          paddr <= r_paddr;
          if (!r_hit)     begin status <= MS_MISS; st <= S_DONE; end
          else if (!r_ok) begin status <= MS_PROT; st <= S_DONE; end
          else st <= S_LD_REQ;
        end
        S_LD_REQ: if (m_req_ready) st <= S_LD_DATA;
        S_LD_DATA: if (m_rvalid) begin
          cnt <= cnt + 1'b1;
          if (m_rlast) st <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule

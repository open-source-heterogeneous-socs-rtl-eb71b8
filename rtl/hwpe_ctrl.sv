// HWPE controller: the memory-mapped target through which cores program the
// accelerator, with a two-context job queue.
//
// A core offloads a job in three steps: it reads ACQUIRE, which locks a free
// context and returns the job's ID (or 0xFFFFFFFF if both contexts are taken
// or another core holds the lock); it writes the job registers, which land in
// the locked context; it writes TRIGGER, which commits the context to the
// queue. Because there are two contexts, the next job can be programmed while
// the current one runs; when a job finishes, the FSM starts the next
// committed one by itself in the following cycle. The other registers are
// FINISHED (jobs completed since the last clear), STATUS (bit 0: a job is
// queued or running, bit 1: a job is running, bits 3:2: committed contexts,
// bit 4: a context is locked), RUNNING_JOB (ID of the job at the head of the
// queue) and SOFT_CLEAR (a write empties the queue and pulses clear_o to the
// streamer and datapath). Each finished job pulses evt_eoc_o, the
// end-of-computation event sent to the cluster's synchronizer.
// Timing: the target grants every request at once and answers one cycle later.
// The register names and the two contexts are the paper's; their offsets,
// the failure value of ACQUIRE and the STATUS bit layout are this design's.
module hwpe_ctrl
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned NREGS = HWPE_JOB_REGS
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  periph_req_t            cfg_req_i,
  output periph_rsp_t            cfg_rsp_o,
  // to the streamer/datapath
  output logic [NREGS-1:0][31:0] job_o,
  output logic                   start_o,
  input  logic                   done_i,
  output logic                   clear_o,
  output logic                   evt_eoc_o
);
  logic [1:0][NREGS-1:0][31:0] regs_q;
  logic [1:0][7:0]             ctx_id_q;
  logic [1:0]                  ctx_valid_q;
  logic                        wr_ctx_q, run_ctx_q, locked_q, running_q;
  logic [7:0]                  next_id_q;
  logic [31:0]                 finished_q, rdata_q;
  logic                        rvalid_q;
  logic [5:0]                  widx;
  logic                        rd, wr, acquire_ok;

  assign widx = cfg_req_i.addr[7:2];
  assign rd   = cfg_req_i.req && !cfg_req_i.wen;
  assign wr   = cfg_req_i.req &&  cfg_req_i.wen;
  assign acquire_ok = !locked_q && !ctx_valid_q[wr_ctx_q];

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign job_o            = regs_q[run_ctx_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_q <= '0; ctx_id_q <= '0; ctx_valid_q <= '0; wr_ctx_q <= 1'b0; run_ctx_q <= 1'b0;
      locked_q <= 1'b0; running_q <= 1'b0; next_id_q <= '0; finished_q <= '0;
      rdata_q <= '0; rvalid_q <= 1'b0; start_o <= 1'b0; clear_o <= 1'b0; evt_eoc_o <= 1'b0;
    end else begin
      rvalid_q  <= cfg_req_i.req;
      start_o   <= 1'b0;
      clear_o   <= 1'b0;
      evt_eoc_o <= 1'b0;

      // ---- job sequencing ----
      if (running_q && done_i) begin
        running_q              <= 1'b0;
        ctx_valid_q[run_ctx_q] <= 1'b0;
        run_ctx_q              <= ~run_ctx_q;
        finished_q             <= finished_q + 32'd1;
        evt_eoc_o              <= 1'b1;
      end else if (!running_q && ctx_valid_q[run_ctx_q] && !start_o) begin
        running_q <= 1'b1;
        start_o   <= 1'b1;
      end

      // ---- register accesses ----
      if (rd) begin
        unique case (widx)
          HWPE_REG_ACQUIRE: begin
            if (acquire_ok) begin
              locked_q <= 1'b1;
              rdata_q  <= 32'(next_id_q);
            end else rdata_q <= 32'hFFFF_FFFF;
          end
          HWPE_REG_FINISHED:    rdata_q <= finished_q;
          HWPE_REG_STATUS:      rdata_q <= {27'd0, locked_q, 2'(ctx_valid_q[0]) + 2'(ctx_valid_q[1]),
                                            running_q, |ctx_valid_q};
          HWPE_REG_RUNNING_JOB: rdata_q <= 32'(ctx_id_q[run_ctx_q]);
          default: begin
            if (widx >= HWPE_REG_JOB0 && 32'(widx) < 32'(HWPE_REG_JOB0) + NREGS)
              rdata_q <= regs_q[wr_ctx_q][widx - HWPE_REG_JOB0];
            else rdata_q <= '0;
          end
        endcase
      end else if (wr) begin
        if (widx == HWPE_REG_TRIGGER) begin
          if (locked_q) begin
            ctx_valid_q[wr_ctx_q] <= 1'b1;
            ctx_id_q[wr_ctx_q]    <= next_id_q;
            next_id_q             <= next_id_q + 8'd1;
            wr_ctx_q              <= ~wr_ctx_q;
            locked_q              <= 1'b0;
          end
        end else if (widx == HWPE_REG_SOFT_CLEAR) begin
          ctx_valid_q <= '0; locked_q <= 1'b0; running_q <= 1'b0; start_o <= 1'b0;
          wr_ctx_q <= 1'b0; run_ctx_q <= 1'b0; finished_q <= '0; clear_o <= 1'b1;
        end else if (widx >= HWPE_REG_JOB0 && 32'(widx) < 32'(HWPE_REG_JOB0) + NREGS) begin
          regs_q[wr_ctx_q][widx - HWPE_REG_JOB0] <= cfg_req_i.wdata;
        end
      end
    end
  end

  // A job is never started while the previous one runs.
  always_ff @(posedge clk_i)
    if (rst_ni) assert (!(start_o && running_q && done_i)) else $error("overlapping jobs");
endmodule

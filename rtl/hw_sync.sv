// Cluster hardware synchronizer (event unit): event lines, barrier and
// mutex for the cores.
//
// Each core c has an event buffer and an event mask. Hardware events set a
// bit in the buffers of all cores: the DMA's end of transfer (EOT, bit 0) and
// the HWPE's end of computation (EOC, bit 1). The barrier (bit 2) fires when
// every core in BAR_MASK has written BARRIER; it then sets bit 2 in those
// cores' buffers and re-arms. A write to SW_EVT sets bit 3 in the cores whose
// bits are set in the written value. core_evt_o[c] is high while core c has
// an unmasked pending event: it is the wake-up line a core sleeping in
// "wait for event" watches. Reading EVT_BUFFER returns the pending events of
// the reading core; writing it clears the bits written as 1. MUTEX implements
// a critical section: a read returns 0 and takes the lock if it was free,
// 1 if it was taken; a write releases it.
// Accesses carry the initiating core's index (id_i); the target grants at
// once and answers one cycle later.
// The paper gives the synchronizer's purpose (fast barriers, critical
// sections, EOT/EOC notification); the register map is this design's choice.
module hw_sync
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned NC = NCORES
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  periph_req_t          cfg_req_i,
  input  logic [$clog2(NC)-1:0] id_i,
  output periph_rsp_t          cfg_rsp_o,
  input  logic                 evt_dma_eot_i,
  input  logic                 evt_hwpe_eoc_i,
  output logic [NC-1:0]        core_evt_o,
  output logic                 barrier_evt_o
);
  logic [NC-1:0][NEVT-1:0] buf_q, mask_q;
  logic [NC-1:0]           arrived_q, bar_mask_q;
  logic                    mutex_q, rvalid_q;
  logic [31:0]             rdata_q;
  logic [3:0]              reg_idx;
  logic                    wr, rd, bar_fire;
  logic [NC-1:0]           arrived_next;

  assign reg_idx = cfg_req_i.addr[5:2];
  assign wr = cfg_req_i.req &&  cfg_req_i.wen;
  assign rd = cfg_req_i.req && !cfg_req_i.wen;

  always_comb begin
    arrived_next = arrived_q;
    if (wr && reg_idx == SYNC_REG_BARRIER) arrived_next[id_i] = 1'b1;
    bar_fire = (bar_mask_q != '0) && ((arrived_next & bar_mask_q) == bar_mask_q);
  end
  assign barrier_evt_o = bar_fire;

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;

  always_comb
    for (int c = 0; c < NC; c++) core_evt_o[c] = |(buf_q[c] & mask_q[c]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      buf_q <= '0; mask_q <= '1; arrived_q <= '0; bar_mask_q <= '1; mutex_q <= 1'b0;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      // register accesses first, so that events of this cycle are not lost
      if (wr) begin
        unique case (reg_idx)
          SYNC_REG_EVT_MASK:   mask_q[id_i] <= cfg_req_i.wdata[NEVT-1:0];
          SYNC_REG_EVT_BUFFER: buf_q[id_i]  <= buf_q[id_i] & ~cfg_req_i.wdata[NEVT-1:0];
          SYNC_REG_BAR_MASK:   bar_mask_q   <= cfg_req_i.wdata[NC-1:0];
          SYNC_REG_MUTEX:      mutex_q      <= 1'b0;
          SYNC_REG_SW_EVT:
            for (int c = 0; c < NC; c++)
              if (cfg_req_i.wdata[c]) buf_q[c][EVT_SW] <= 1'b1;
          default: ;
        endcase
      end else if (rd) begin
        unique case (reg_idx)
          SYNC_REG_EVT_MASK:   rdata_q <= 32'(mask_q[id_i]);
          SYNC_REG_EVT_BUFFER: rdata_q <= 32'(buf_q[id_i]);
          SYNC_REG_BAR_MASK:   rdata_q <= 32'(bar_mask_q);
          SYNC_REG_MUTEX: begin
            rdata_q <= 32'(mutex_q);
            mutex_q <= 1'b1;
          end
          default:             rdata_q <= '0;
        endcase
      end
      // barrier
      arrived_q <= bar_fire ? '0 : arrived_next;
      // hardware events
      for (int c = 0; c < NC; c++) begin
        if (evt_dma_eot_i)                buf_q[c][EVT_DMA_EOT]  <= 1'b1;
        if (evt_hwpe_eoc_i)               buf_q[c][EVT_HWPE_EOC] <= 1'b1;
        if (bar_fire && bar_mask_q[c])    buf_q[c][EVT_BARRIER]  <= 1'b1;
      end
    end
  end
endmodule

// Cluster DMA engine: copies tiles between the system side (L2, reached over
// a 64-bit port) and the TCDM (reached over four 32-bit ports), so that
// kernels find their data in L1.
//
// A core programs EXT_ADDR, TCDM_ADDR and LEN (bytes) and writes CMD with the
// direction in bit 0 (0: copy-in, system -> TCDM; 1: copy-out, TCDM ->
// system). Each command is queued (up to QDEPTH) and gets an ID; reading CMD
// returns the ID the next command will receive, STATUS the number of commands
// queued or running and DONE_ID the ID of the last one completed. Commands run
// one after the other. Every completed command pulses evt_eot_o, the
// end-of-transfer event sent to the synchronizer.
// Data move in 64-bit beats: the low word of a beat goes through its own
// word FIFO and TCDM port (port 0 for copy-in writes, port 2 for copy-out
// reads), the high word through another (ports 1 and 3). The two halves
// advance independently, so a bank conflict on one word does not hold up the
// other. Reads on either side are issued only while the FIFO has room for
// every response in flight.
// External port: req/gnt handshake, one rvalid per granted access (with data
// for reads), in order, after any latency. Addresses and LEN must be multiples
// of 8 bytes.
// The paper gives the DMA's role, its 4x32-bit TCDM ports and 64-bit system
// ports, and the EOT event; the register map, the queue and the split into
// word lanes are this design's choice.
module cluster_dma
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned QDEPTH = 4,
  parameter int unsigned FDEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  periph_req_t                cfg_req_i,
  output periph_rsp_t                cfg_rsp_o,
  output logic                       evt_eot_o,
  // TCDM side
  output tcdm_req_t [DMA_PORTS-1:0]  tcdm_req_o,
  input  tcdm_rsp_t [DMA_PORTS-1:0]  tcdm_rsp_i,
  // system side (64 bit)
  output logic                       ext_req_o,
  output logic                       ext_we_o,
  output logic [31:0]                ext_addr_o,
  output logic [63:0]                ext_wdata_o,
  output logic [7:0]                 ext_be_o,
  input  logic                       ext_gnt_i,
  input  logic                       ext_rvalid_i,
  input  logic [63:0]                ext_rdata_i
);
  typedef struct packed {
    logic        dir;
    logic [31:0] ext;
    logic [31:0] tcdm;
    logic [31:0] len;
    logic [7:0]  id;
  } cmd_t;

  localparam int unsigned CW = $clog2(FDEPTH + 1);

  logic [31:0] ext_q, tcdm_q, len_q, rdata_q;
  logic        rvalid_q;
  logic [7:0]  next_id_q, done_id_q;
  cmd_t        cmd_in, cmd;
  logic        q_full, q_empty, q_pop;
  logic [$clog2(QDEPTH+1)-1:0] q_cnt;
  logic        active_q;
  logic [31:0] beats;
  // counters
  logic [31:0] ext_n_q, ext_ack_q, n_lo_q, n_hi_q, ack_lo_q, ack_hi_q;
  logic [CW-1:0] infl_ext_q, infl_lo_q, infl_hi_q;
  // word FIFOs
  logic lo_push, hi_push, lo_pop, hi_pop, lo_full, hi_full, lo_empty, hi_empty;
  logic [31:0] lo_din, hi_din, lo_dout, hi_dout;
  logic [CW-1:0] lo_cnt, hi_cnt;
  logic finish;

  // ---------------- configuration port ----------------
  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign cmd_in = '{dir: cfg_req_i.wdata[0], ext: ext_q, tcdm: tcdm_q, len: len_q, id: next_id_q};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_q <= '0; tcdm_q <= '0; len_q <= '0; rdata_q <= '0; rvalid_q <= 1'b0; next_id_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.wen) begin
        unique case (cfg_req_i.addr[5:2])
          DMA_REG_EXT_ADDR:  ext_q  <= cfg_req_i.wdata;
          DMA_REG_TCDM_ADDR: tcdm_q <= cfg_req_i.wdata;
          DMA_REG_LEN:       len_q  <= cfg_req_i.wdata;
          DMA_REG_CMD:       if (!q_full) next_id_q <= next_id_q + 8'd1;
          default: ;
        endcase
      end else if (cfg_req_i.req) begin
        unique case (cfg_req_i.addr[5:2])
          DMA_REG_EXT_ADDR:  rdata_q <= ext_q;
          DMA_REG_TCDM_ADDR: rdata_q <= tcdm_q;
          DMA_REG_LEN:       rdata_q <= len_q;
          DMA_REG_CMD:       rdata_q <= 32'(next_id_q);
          DMA_REG_STATUS:    rdata_q <= 32'(q_cnt);
          DMA_REG_DONE_ID:   rdata_q <= 32'(done_id_q);
          default:           rdata_q <= '0;
        endcase
      end
    end
  end

  sync_fifo #(.DW($bits(cmd_t)), .DEPTH(QDEPTH)) i_cmdq (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .push_i(cfg_req_i.req && cfg_req_i.wen && cfg_req_i.addr[5:2] == DMA_REG_CMD),
    .data_i(cmd_in), .pop_i(q_pop), .data_o(cmd), .full_o(q_full), .empty_o(q_empty), .count_o(q_cnt));

  // the head of the queue is the running command; it is popped when it ends
  assign beats = {3'b000, cmd.len[31:3]};
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) active_q <= 1'b0;
    else if (finish) active_q <= 1'b0;
    else if (!q_empty) active_q <= 1'b1;
  end
  assign q_pop = finish;

  // ---------------- data movement ----------------
  logic ext_issue, lo_issue, hi_issue;
  logic in_dir, out_dir;
  assign in_dir  = active_q && !cmd.dir;
  assign out_dir = active_q &&  cmd.dir;

  always_comb begin
    // system port
    ext_we_o    = out_dir;
    ext_be_o    = 8'hff;
    ext_addr_o  = cmd.ext + (ext_n_q << 3);
    ext_wdata_o = {hi_dout, lo_dout};
    if (in_dir)
      ext_req_o = (ext_n_q < beats) &&
                  (32'(lo_cnt) + 32'(infl_ext_q) < FDEPTH) && (32'(hi_cnt) + 32'(infl_ext_q) < FDEPTH);
    else
      ext_req_o = out_dir && (ext_n_q < beats) && !lo_empty && !hi_empty;
    ext_issue = ext_req_o && ext_gnt_i;

    // TCDM ports: 0/1 write (copy-in), 2/3 read (copy-out)
    tcdm_req_o = '0;
    tcdm_req_o[0] = '{req: in_dir && !lo_empty, wen: 1'b1, addr: cmd.tcdm + (n_lo_q << 3),
                      wdata: lo_dout, be: 4'hf};
    tcdm_req_o[1] = '{req: in_dir && !hi_empty, wen: 1'b1, addr: cmd.tcdm + (n_hi_q << 3) + 32'd4,
                      wdata: hi_dout, be: 4'hf};
    tcdm_req_o[2] = '{req: out_dir && (n_lo_q < beats) && (32'(lo_cnt) + 32'(infl_lo_q) < FDEPTH),
                      wen: 1'b0, addr: cmd.tcdm + (n_lo_q << 3), wdata: '0, be: 4'hf};
    tcdm_req_o[3] = '{req: out_dir && (n_hi_q < beats) && (32'(hi_cnt) + 32'(infl_hi_q) < FDEPTH),
                      wen: 1'b0, addr: cmd.tcdm + (n_hi_q << 3) + 32'd4, wdata: '0, be: 4'hf};
    lo_issue = in_dir ? (tcdm_req_o[0].req && tcdm_rsp_i[0].gnt) : (tcdm_req_o[2].req && tcdm_rsp_i[2].gnt);
    hi_issue = in_dir ? (tcdm_req_o[1].req && tcdm_rsp_i[1].gnt) : (tcdm_req_o[3].req && tcdm_rsp_i[3].gnt);

    // word FIFOs
    lo_push = in_dir ? ext_rvalid_i : tcdm_rsp_i[2].rvalid;
    hi_push = in_dir ? ext_rvalid_i : tcdm_rsp_i[3].rvalid;
    lo_din  = in_dir ? ext_rdata_i[31:0]  : tcdm_rsp_i[2].rdata;
    hi_din  = in_dir ? ext_rdata_i[63:32] : tcdm_rsp_i[3].rdata;
    lo_pop  = in_dir ? lo_issue : ext_issue;
    hi_pop  = in_dir ? hi_issue : ext_issue;

    finish = in_dir  ? (ack_lo_q == beats && ack_hi_q == beats)
                     : (out_dir && ext_ack_q == beats);
  end

  sync_fifo #(.DW(32), .DEPTH(FDEPTH)) i_lo (
    .clk_i, .rst_ni, .clear_i(finish), .push_i(lo_push), .data_i(lo_din), .pop_i(lo_pop),
    .data_o(lo_dout), .full_o(lo_full), .empty_o(lo_empty), .count_o(lo_cnt));
  sync_fifo #(.DW(32), .DEPTH(FDEPTH)) i_hi (
    .clk_i, .rst_ni, .clear_i(finish), .push_i(hi_push), .data_i(hi_din), .pop_i(hi_pop),
    .data_o(hi_dout), .full_o(hi_full), .empty_o(hi_empty), .count_o(hi_cnt));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_n_q <= '0; ext_ack_q <= '0; n_lo_q <= '0; n_hi_q <= '0; ack_lo_q <= '0; ack_hi_q <= '0;
      infl_ext_q <= '0; infl_lo_q <= '0; infl_hi_q <= '0; evt_eot_o <= 1'b0; done_id_q <= '0;
    end else begin
      evt_eot_o <= 1'b0;
      if (finish) begin
        ext_n_q <= '0; ext_ack_q <= '0; n_lo_q <= '0; n_hi_q <= '0; ack_lo_q <= '0; ack_hi_q <= '0;
        infl_ext_q <= '0; infl_lo_q <= '0; infl_hi_q <= '0;
        evt_eot_o <= 1'b1; done_id_q <= cmd.id;
      end else begin
        if (ext_issue)    ext_n_q   <= ext_n_q + 32'd1;
        if (ext_rvalid_i) ext_ack_q <= ext_ack_q + 32'd1;
        infl_ext_q <= infl_ext_q + CW'(ext_issue) - CW'(ext_rvalid_i);
        if (lo_issue) n_lo_q <= n_lo_q + 32'd1;
        if (hi_issue) n_hi_q <= n_hi_q + 32'd1;
        if (in_dir ? tcdm_rsp_i[0].rvalid : 1'b0) ack_lo_q <= ack_lo_q + 32'd1;
        if (in_dir ? tcdm_rsp_i[1].rvalid : 1'b0) ack_hi_q <= ack_hi_q + 32'd1;
        infl_lo_q <= infl_lo_q + CW'(out_dir && lo_issue) - CW'(out_dir && tcdm_rsp_i[2].rvalid);
        infl_hi_q <= infl_hi_q + CW'(out_dir && hi_issue) - CW'(out_dir && tcdm_rsp_i[3].rvalid);
      end
    end
  end

  always_ff @(posedge clk_i)
    if (rst_ni) assert (!(lo_push && lo_full) && !(hi_push && hi_full)) else $error("DMA FIFO overflow");
endmodule

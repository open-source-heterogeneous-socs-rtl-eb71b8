// End-to-end test of the cluster at its default size (8 cores, 16 banks,
// 12 x 4 RedMulE, 288-bit HWPE port). The testbench plays the cores through
// their ports and provides a 64-bit system memory behind the DMA.
// Core 0 runs the double-buffer-style offload sequence: DMA copy-in of A, B
// and C (waits for the EOT events), acquires the HWPE twice (two queued jobs,
// both C += A*B, with a third acquire that must fail), waits for the EOC
// events, then copies C out and the testbench compares it with
// C0 + 2*A*B computed here in real arithmetic. Meanwhile core 1 keeps
// reading a bank the HWPE uses, so the HCI arbiter must stall the wide branch,
// all cores meet at a barrier, two cores contend for the mutex and core 4
// loads words into its NN-RF and runs dot-products in all four precisions.
// Each mechanism (HWPE array stall, HCI starvation guard, EOT, EOC, job queue,
// barrier, mutex, NN-RF load, dot-product) must be seen at least once.
`include "fp16_ref.svh"
module tb_pulp_cluster;
  import pulp_cluster_pkg::*;
  localparam int MR = 12, KR = 24, NCOL = 16;  // GEMM size: one 12 x 16 tile, 6 chunks
  localparam int A_AD = 32'h0000, B_AD = 32'h0400, C_AD = 32'h0800, OUT_AD = 32'h1000;

  logic clk = 0; always #5 clk = ~clk;
  logic rst_n;
  tcdm_req_t   [NCORES-1:0] creq;  tcdm_rsp_t   [NCORES-1:0] crsp;
  periph_req_t [NCORES-1:0] preq;  periph_rsp_t [NCORES-1:0] prsp;
  logic [NCORES-1:0] cevt;
  logic [NCORES-1:0] xl, xgp, xsa, xsb;
  logic [NCORES-1:0][2:0] xlr, xra, xrb;
  logic [NCORES-1:0][31:0] xgpa, xacc, xres;
  dotp_prec_e [NCORES-1:0] xprec;
  logic ext_req, ext_we, ext_gnt, ext_rvalid; logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata; logic [7:0] ext_be;
  logic hwpe_busy, hwpe_stall, starve, barrier;

  pulp_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .core_req_i(creq), .core_rsp_o(crsp),
    .core_periph_req_i(preq), .core_periph_rsp_o(prsp), .core_evt_o(cevt),
    .xnn_load_i(xl), .xnn_load_reg_i(xlr), .xnn_ra_i(xra), .xnn_rb_i(xrb), .xnn_a_from_gp_i(xgp),
    .xnn_gp_a_i(xgpa), .xnn_acc_i(xacc), .xnn_prec_i(xprec), .xnn_sign_a_i(xsa), .xnn_sign_b_i(xsb),
    .xnn_result_o(xres),
    .ext_req_o(ext_req), .ext_we_o(ext_we), .ext_addr_o(ext_addr), .ext_wdata_o(ext_wdata),
    .ext_be_o(ext_be), .ext_gnt_i(ext_gnt), .ext_rvalid_i(ext_rvalid), .ext_rdata_i(ext_rdata),
    .hwpe_busy_o(hwpe_busy), .hwpe_stall_o(hwpe_stall), .hci_starve_o(starve), .barrier_o(barrier));

  int checks = 0, failures = 0;
  int n_stall = 0, n_starve = 0, n_barrier = 0, n_eot = 0, n_eoc = 0;
  int n_queue = 0, n_mutex = 0, n_nnload = 0, n_dotp = 0;
  bit hammer = 0;
  int bar_done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- system memory behind the DMA ----------------
  logic [63:0] l2 [1024];
  assign ext_gnt = 1'b1;
  always_ff @(posedge clk) begin
    ext_rvalid <= ext_req;
    if (ext_req && ext_we) l2[ext_addr[12:3]] <= ext_wdata;
    if (ext_req) ext_rdata <= l2[ext_addr[12:3]];
  end
  function automatic void l2_put16(int addr, logic [15:0] v);
    l2[addr >> 3][16*((addr >> 1) & 3) +: 16] = v;
  endfunction
  function automatic logic [15:0] l2_get16(int addr);
    return l2[addr >> 3][16*((addr >> 1) & 3) +: 16];
  endfunction

  // ---------------- core port tasks ----------------
  task automatic pacc(int c, bit we, int addr, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    preq[c] = '{req: 1'b1, wen: we, addr: 12'(addr), wdata: wd};
    do @(posedge clk); while (!prsp[c].gnt);
    @(negedge clk); preq[c].req = 1'b0;
    while (!prsp[c].rvalid) @(negedge clk);
    rd = prsp[c].rdata;
  endtask
  task automatic pwr(int c, int addr, logic [31:0] wd);
    logic [31:0] dummy; pacc(c, 1'b1, addr, wd, dummy);
  endtask
  task automatic prd(int c, int addr, output logic [31:0] rd);
    pacc(c, 1'b0, addr, '0, rd);
  endtask
  task automatic tacc(int c, bit we, int addr, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    creq[c] = '{req: 1'b1, wen: we, addr: 32'(addr), wdata: wd, be: 4'hf};
    do @(posedge clk); while (!crsp[c].gnt);
    @(negedge clk); creq[c].req = 1'b0;
    while (!crsp[c].rvalid) @(negedge clk);
    rd = crsp[c].rdata;
  endtask

  localparam int HWPE = 32'h000, DMA = 32'h400, SYNC = 32'h800;
  task automatic dma(int c, int ext, int tcdm, int len, bit dir);
    pwr(c, DMA + 4*DMA_REG_EXT_ADDR, ext);
    pwr(c, DMA + 4*DMA_REG_TCDM_ADDR, tcdm);
    pwr(c, DMA + 4*DMA_REG_LEN, len);
    pwr(c, DMA + 4*DMA_REG_CMD, 32'(dir));
  endtask
  task automatic wait_evt(int c, int bitn);
    logic [31:0] r;
    do begin
      while (!cevt[c]) @(negedge clk);
      prd(c, SYNC + 4*SYNC_REG_EVT_BUFFER, r);
    end while (!r[bitn]);
    pwr(c, SYNC + 4*SYNC_REG_EVT_BUFFER, 32'(1 << bitn));
  endtask

  // ---------------- mechanism counters ----------------
  always_ff @(posedge clk) if (rst_n) begin
    if (hwpe_stall) n_stall <= n_stall + 1;
    if (starve)     n_starve <= n_starve + 1;
    if (barrier)    n_barrier <= n_barrier + 1;
    if (dut.i_dma.evt_eot_o) n_eot <= n_eot + 1;
    if (dut.evt_eoc) n_eoc <= n_eoc + 1;
  end

  // ---------------- reference data ----------------
  real A [MR][KR]; real B [KR][NCOL]; real C0 [MR][NCOL];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // cores 1, 5, 6, 7 keep reading banks 2, 6, 10, 14 while asked to, so
  // that every wide access of the HWPE conflicts with one of them
  for (genvar h = 0; h < 4; h++) begin : g_hammer
    localparam int HC = (h == 0) ? 1 : 4 + h;
    initial begin
      logic [31:0] r;
      wait (rst_n);
      forever begin
        if (hammer) tacc(HC, 1'b0, 32'h2008 + 16*h, '0, r);
        else @(negedge clk);
      end
    end
  end

  initial begin
    logic [31:0] r, id0, id1, id2;
    creq = '0; preq = '0; xl = '0; xgp = '0; xsa = '0; xsb = '0; xlr = '0; xra = '0; xrb = '0;
    xgpa = '0; xacc = '0; xprec = '{default: DOTP_8B};
    for (int i = 0; i < 1024; i++) l2[i] = '0;
    for (int i = 0; i < MR; i++) for (int k = 0; k < KR; k++) begin
      A[i][k] = real'($urandom_range(0, 16)) / 4.0 - 2.0; l2_put16(A_AD + 2*(i*KR + k), real_to_fp16(A[i][k]));
    end
    for (int k = 0; k < KR; k++) for (int j = 0; j < NCOL; j++) begin
      B[k][j] = real'($urandom_range(0, 8)) - 4.0; l2_put16(B_AD + 2*(k*NCOL + j), real_to_fp16(B[k][j]));
    end
    for (int i = 0; i < MR; i++) for (int j = 0; j < NCOL; j++) begin
      C0[i][j] = real'($urandom_range(0, 32)) / 4.0; l2_put16(C_AD + 2*(i*NCOL + j), real_to_fp16(C0[i][j]));
    end
    rst_n = 0; repeat (4) @(posedge clk); @(negedge clk); rst_n = 1;

    // ---- copy-in of A, B, C ----
    dma(0, A_AD, A_AD, 2*MR*KR, 1'b0);
    dma(0, B_AD, B_AD, 2*KR*NCOL, 1'b0);
    dma(0, C_AD, C_AD, 2*MR*NCOL, 1'b0);
    do prd(0, DMA + 4*DMA_REG_STATUS, r); while (r != 0);
    prd(0, DMA + 4*DMA_REG_DONE_ID, r);
    check(r == 2, "DMA done id after three copy-ins");
    check(n_eot == 3, "three EOT events");
    wait_evt(0, EVT_DMA_EOT);

    // ---- two HWPE jobs in the two contexts ----
    prd(0, HWPE + 4*HWPE_REG_ACQUIRE, id0);
    check(id0 == 0, "first acquire returns job 0");
    pwr(0, HWPE + 4*(HWPE_REG_JOB0 + JOB_A_ADDR), A_AD);
    pwr(0, HWPE + 4*(HWPE_REG_JOB0 + JOB_B_ADDR), B_AD);
    pwr(0, HWPE + 4*(HWPE_REG_JOB0 + JOB_C_ADDR), C_AD);
    pwr(0, HWPE + 4*(HWPE_REG_JOB0 + JOB_M), MR);
    pwr(0, HWPE + 4*(HWPE_REG_JOB0 + JOB_K), KR);
    pwr(0, HWPE + 4*(HWPE_REG_JOB0 + JOB_N), NCOL);
    hammer = 1;
    pwr(0, HWPE + 4*HWPE_REG_TRIGGER, 0);
    prd(0, HWPE + 4*HWPE_REG_ACQUIRE, id1);
    check(id1 == 1, "second acquire while job 0 runs returns job 1");
    for (int j = 0; j < 6; j++) begin
      automatic int v[6] = '{A_AD, B_AD, C_AD, MR, KR, NCOL};
      pwr(0, HWPE + 4*(HWPE_REG_JOB0 + j), v[j]);
    end
    pwr(0, HWPE + 4*HWPE_REG_TRIGGER, 0);
    prd(0, HWPE + 4*HWPE_REG_ACQUIRE, id2);
    check(id2 == 32'hFFFF_FFFF, "third acquire fails while both contexts are taken");
    prd(0, HWPE + 4*HWPE_REG_STATUS, r);
    if (r[3:2] == 2) n_queue++;
    do prd(0, HWPE + 4*HWPE_REG_FINISHED, r); while (r != 2);
    hammer = 0;
    check(n_eoc == 2, "two EOC events");
    wait_evt(0, EVT_HWPE_EOC);

    // ---- copy-out and compare ----
    dma(0, OUT_AD, C_AD, 2*MR*NCOL, 1'b1);
    wait_evt(0, EVT_DMA_EOT);
    do prd(0, DMA + 4*DMA_REG_STATUS, r); while (r != 0);
    for (int i = 0; i < MR; i++) for (int j = 0; j < NCOL; j++) begin
      automatic real ab = 0.0;
      for (int k = 0; k < KR; k++) ab += A[i][k] * B[k][j];
      check(l2_get16(OUT_AD + 2*(i*NCOL + j)) == real_to_fp16(C0[i][j] + 2.0*ab),
            $sformatf("C[%0d][%0d]", i, j));
    end

    // ---- barrier with all cores ----
    for (int c = 0; c < NCORES; c++) begin
      automatic int cc = c;
      fork begin pwr(cc, SYNC + 4*SYNC_REG_BARRIER, 0); bar_done++; end join_none
    end
    wait (bar_done == NCORES);
    repeat (3) @(negedge clk);
    check(n_barrier == 1, "barrier fired once");
    for (int c = 0; c < NCORES; c++) check(cevt[c], "barrier event reaches every core");

    // ---- mutex ----
    prd(2, SYNC + 4*SYNC_REG_MUTEX, r); check(r == 0, "core 2 takes the mutex");
    prd(3, SYNC + 4*SYNC_REG_MUTEX, r); check(r == 1, "core 3 finds the mutex taken");
    if (r == 1) n_mutex++;
    pwr(2, SYNC + 4*SYNC_REG_MUTEX, 0);
    prd(3, SYNC + 4*SYNC_REG_MUTEX, r); check(r == 0, "core 3 takes the released mutex");

    // ---- Xpulpnn: NN-RF loads from TCDM and dot-products ----
    tacc(4, 1'b1, 32'h2000, 32'h7f80_03fd, r);
    tacc(4, 1'b1, 32'h2004, 32'h1234_89ab, r);
    xl[4] = 1; xlr[4] = 3'd1; tacc(4, 1'b0, 32'h2000, '0, r); n_nnload++;
    @(negedge clk);
    xlr[4] = 3'd2; tacc(4, 1'b0, 32'h2004, '0, r); n_nnload++;
    @(negedge clk); xl[4] = 0; xra[4] = 3'd1; xrb[4] = 3'd2; xacc[4] = 32'd100;
    for (int p = 0; p < 4; p++) begin
      automatic int w = 2 << p;
      automatic longint s = 100;
      xprec[4] = dotp_prec_e'(p); xsa[4] = 1; xsb[4] = 1;
      for (int k = 0; k < 32 / w; k++) begin
        automatic longint la = (32'h7f80_03fd >> (w*k)) & ((1 << w) - 1);
        automatic longint lb = (32'h1234_89ab >> (w*k)) & ((1 << w) - 1);
        if (la >= (1 << (w-1))) la -= (1 << w);
        if (lb >= (1 << (w-1))) lb -= (1 << w);
        s += la * lb;
      end
      #1; check(xres[4] == 32'(s), $sformatf("signed dot-product, %0d-bit lanes", w));
      n_dotp++;
    end

    // ---- mechanisms ----
    check(n_stall > 0, "HWPE array stalled at least once");
    check(n_starve > 0, "HCI starvation guard fired at least once");
    check(n_queue > 0, "two jobs queued at once");
    check(n_mutex > 0 && n_nnload > 0 && n_dotp > 0, "mutex, NN-RF load and dot-product exercised");
    $display("mechanisms: stall=%0d starve=%0d eot=%0d eoc=%0d barrier=%0d queue=%0d mutex=%0d nnload=%0d dotp=%0d",
             n_stall, n_starve, n_eot, n_eoc, n_barrier, n_queue, n_mutex, n_nnload, n_dotp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

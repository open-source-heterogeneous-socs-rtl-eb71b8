// Testbench of the HWPE controller (register file with a two-entry job queue).
// A core-side task performs register reads and writes. Scenario: acquire a
// context, program the job registers, trigger; program and trigger a second
// job while the first runs; a third acquire must fail while both contexts are
// taken. The engine is modelled by pulsing done_i a few cycles after start_o.
// Checks job ids, job_o contents per job, start/EOC pulses, the finished
// counter, running_job, status bits and soft clear.
`timescale 1ns/1ps
module tb_hwpe_ctrl;
  import pulp_cluster_pkg::*;
  localparam int NREGS = HWPE_JOB_REGS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  periph_req_t req;
  periph_rsp_t rsp;
  logic [NREGS-1:0][31:0] job;
  logic start, done, clear, eoc;
  int checks = 0, failures = 0, nstart = 0, neoc = 0, nclear = 0;

  hwpe_ctrl #(.NREGS(NREGS)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_rsp_o(rsp),
    .job_o(job), .start_o(start), .done_i(done), .clear_o(clear), .evt_eoc_o(eoc));

  always @(posedge clk) if (rst_n) begin if (start) nstart++; if (eoc) neoc++; if (clear) nclear++; end

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("%0t %s", $time, what); end
  endtask
  task automatic wr(input int widx, input logic [31:0] d);
    @(negedge clk); req = '{req: 1, wen: 1, addr: 12'(widx * 4), wdata: d};
    #1 chk(rsp.gnt, "write not granted");
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input int widx, output logic [31:0] d);
    @(negedge clk); req = '{req: 1, wen: 0, addr: 12'(widx * 4), wdata: 0};
    @(negedge clk); req = '0;
    chk(rsp.rvalid, "no rvalid"); d = rsp.rdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0; done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    rd(HWPE_REG_ACQUIRE, d); chk(d == 0, "first job id");
    rd(HWPE_REG_STATUS, d);  chk(d[4] == 1 && d[0] == 0, "locked, idle");
    for (int r = 0; r < NREGS; r++) wr(HWPE_REG_JOB0 + r, 32'h100 + r);
    rd(HWPE_REG_JOB0 + 3, d); chk(d == 32'h103, "job register readback");
    wr(HWPE_REG_TRIGGER, 0);
    wait (start); @(negedge clk);
    chk(job[0] == 32'h100 && job[NREGS-1] == 32'h100 + NREGS - 1, "job 0 registers");
    rd(HWPE_REG_STATUS, d);  chk(d[1] == 1 && d[3:2] == 1, "running, one committed");
    rd(HWPE_REG_ACQUIRE, d); chk(d == 1, "second job id");
    for (int r = 0; r < NREGS; r++) wr(HWPE_REG_JOB0 + r, 32'h200 + r);
    wr(HWPE_REG_TRIGGER, 0);
    rd(HWPE_REG_STATUS, d);  chk(d[3:2] == 2, "two committed");
    rd(HWPE_REG_ACQUIRE, d); chk(d == 32'hFFFF_FFFF, "acquire must fail with full queue");
    chk(job[0] == 32'h100, "running job unchanged by programming");
    rd(HWPE_REG_RUNNING_JOB, d); chk(d == 0, "running job 0");
    chk(nstart == 1, $sformatf("only one start so far (%0d)", nstart));
    @(negedge clk); done = 1; @(negedge clk); done = 0;
    @(negedge clk); chk(neoc == 1, "eoc after done");
    wait (start); @(negedge clk);
    chk(job[0] == 32'h200 && job[5] == 32'h205, "job 1 registers");
    rd(HWPE_REG_RUNNING_JOB, d); chk(d == 1, "running job 1");
    rd(HWPE_REG_FINISHED, d); chk(d == 1, "finished count 1");
    @(negedge clk); done = 1; @(negedge clk); done = 0;
    repeat (3) @(negedge clk);
    chk(nstart == 2 && neoc == 2, $sformatf("two starts, two EOCs (%0d %0d)", nstart, neoc));
    rd(HWPE_REG_STATUS, d); chk(d == 0, "idle at the end");
    rd(HWPE_REG_FINISHED, d); chk(d == 2, "finished count 2");
    rd(HWPE_REG_ACQUIRE, d); chk(d == 2, "third job id");
    wr(HWPE_REG_SOFT_CLEAR, 0);
    @(negedge clk); chk(nclear == 1 && clear == 0, "clear is a pulse");
    rd(HWPE_REG_STATUS, d); chk(d == 0, "soft clear releases the lock");
    rd(HWPE_REG_FINISHED, d); chk(d == 0, "soft clear resets the counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

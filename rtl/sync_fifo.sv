// Synchronous first-word-fall-through FIFO used by the streamer, the DMA and
// the HCI queue. push_i when !full_o writes data_i; the oldest entry is
// always on data_o while !empty_o, and pop_i removes it. A full FIFO may be
// pushed in the cycle it is popped. clear_i empties it synchronously.
// count_o gives the fill level. Entirely this design's choice.
module sync_fifo #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clear_i,
  input  logic                       push_i,
  input  logic [DW-1:0]              data_i,
  input  logic                       pop_i,
  output logic [DW-1:0]              data_o,
  output logic                       full_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);
  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic do_push, do_pop;

  assign empty_o = (cnt_q == 0);
  assign full_o  = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]) && !pop_i;
  assign count_o = cnt_q;
  assign do_pop  = pop_i && !empty_o;
  assign do_push = push_i && !full_o;
  assign data_o  = mem[rd_q];

  function automatic logic [PW-1:0] nxt(logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else if (clear_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= nxt(wr_q);
      if (do_pop)  rd_q <= nxt(rd_q);
      cnt_q <= cnt_q + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk_i)
    if (do_push) mem[wr_q] <= data_i;

  always_ff @(posedge clk_i)
    if (rst_ni) assert (!(pop_i && empty_o)) else $error("pop from empty FIFO");
endmodule

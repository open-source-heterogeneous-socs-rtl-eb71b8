// Streamer address generator: walks a loop nest of up to ND dimensions and
// emits one address per accepted handshake.
//
// addr = base + sum_d idx_d * stride_d, with idx_0 the innermost index running
// 0..cnt_0-1. It is computed incrementally, without multipliers: dbase[d]
// holds the address at which the current iteration of dimension d started.
// start_i loads the configuration; the generator then offers addresses with
// valid_o/ready_i and raises last_o with the final one. A dimension with
// cnt = 0 is treated as 1. Strides are signed byte offsets.
// The paper names address generators as streamer parts; the loop-nest form
// and its depth (4) are this design's choice.
module hwpe_addr_gen #(
  parameter int unsigned ND = 4
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   clear_i,
  input  logic                   start_i,
  input  logic [31:0]            base_i,
  input  logic [ND-1:0][15:0]    cnt_i,
  input  logic [ND-1:0][31:0]    stride_i,
  output logic                   valid_o,
  input  logic                   ready_i,
  output logic [31:0]            addr_o,
  output logic                   last_o
);
  logic                 busy_q;
  logic [ND-1:0][15:0]  idx_q, cnt_q;
  logic [ND-1:0][31:0]  stride_q, dbase_q;
  logic [ND-1:0]        at_end;

  always_comb
    for (int d = 0; d < ND; d++)
      at_end[d] = (idx_q[d] + 16'd1 >= cnt_q[d]);

  assign valid_o = busy_q;
  assign addr_o  = dbase_q[0];
  assign last_o  = busy_q && (&at_end);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; idx_q <= '0; cnt_q <= '0; stride_q <= '0; dbase_q <= '0;
    end else if (clear_i) begin
      busy_q <= 1'b0;
    end else if (start_i) begin
      busy_q   <= 1'b1;
      idx_q    <= '0;
      cnt_q    <= cnt_i;
      stride_q <= stride_i;
      for (int d = 0; d < ND; d++) dbase_q[d] <= base_i;
    end else if (busy_q && ready_i) begin
      if (&at_end) begin
        busy_q <= 1'b0;
      end else begin
        // lowest dimension that can still advance
        automatic int adv = 0;
        for (int d = ND - 1; d >= 0; d--)
          if (!at_end[d]) adv = d;
        for (int d = 0; d < ND; d++) begin
          if (d < adv) begin
            idx_q[d]   <= '0;
            dbase_q[d] <= dbase_q[adv] + stride_q[adv];
          end else if (d == adv) begin
            idx_q[d]   <= idx_q[d] + 16'd1;
            dbase_q[d] <= dbase_q[adv] + stride_q[adv];
          end
        end
      end
    end
  end
endmodule

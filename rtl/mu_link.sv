// mu_link: dedicated point-to-point link between two Multifunctional Units
// (i_t and f_t to the cell-updater gate, c_t and tanh(c_t) to the output
// gate). A value sent is visible at the receiver LAT cycles later (the
// 2-cycle MU communication latency of the reference design) and waits in a
// DEPTH-entry FIFO until the receiving MU takes it. The sender may send when
// the values in flight plus those stored are fewer than DEPTH, so nothing is
// ever dropped; this credit rule and the FIFO are this design's choice.
module mu_link #(
  parameter int LAT   = 2,
  parameter int DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  output logic        in_ready,
  output logic        out_valid,
  output logic [31:0] out_data,
  input  logic        out_pop
);
  logic [LAT-1:0]  pv;
  logic [31:0]     pd [LAT];
  logic [31:0]     fifo [DEPTH];
  logic [$clog2(DEPTH):0] cnt;
  logic [$clog2(DEPTH)-1:0] rp, wp;
  logic [$clog2(LAT+1)-1:0] inflight;
  logic push, pop;

  always_comb begin
    inflight = '0;
    for (int i = 0; i < LAT; i++) inflight += pv[i];
  end
  assign in_ready  = (32'(cnt) + 32'(inflight)) < DEPTH;
  assign push      = pv[LAT-1];
  assign pop       = out_pop && out_valid;
  assign out_valid = cnt != 0;
  assign out_data  = fifo[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv  <= '0;
      cnt <= '0;
      rp  <= '0;
      wp  <= '0;
      for (int i = 0; i < LAT; i++) pd[i] <= '0;
    end else begin
      pv[0] <= in_valid && in_ready;
      pd[0] <= in_data;
      for (int i = 1; i < LAT; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (push) begin
        fifo[wp] <= pd[LAT-1];
        wp       <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + push - pop;
    end
  end

  always_ff @(posedge clk) begin
    assert (!rst_n || !(push && !pop && 32'(cnt) == DEPTH)) else $error("mu_link: overflow");
  end
endmodule

// tb_mu_link: self-checking testbench of mu_link. A sender offers values at
// random and a receiver takes them at random; the test checks that values
// arrive in order, none is lost or duplicated, a value is never visible
// earlier than LAT cycles after it was sent, and the sender is throttled
// (in_ready low) when the receiver stops taking values.
module tb_mu_link;
  localparam int LAT = 2, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_pop = 1'b0, in_ready, out_valid;
  logic [31:0] in_data = '0, out_data;
  int checks = 0, failures = 0, sent = 0, recvd = 0, cyc = 0, throttled = 0;
  int sent_at [int];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  mu_link #(.LAT(LAT), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_data, .in_ready,
                                           .out_valid, .out_data, .out_pop);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      sent_at[sent] = cyc;
      sent++;
    end
    if (in_valid && !in_ready) throttled++;
    if (out_valid && out_pop) begin
      checks++;
      if (out_data != 32'(recvd) * 32'd3 + 32'd7 || cyc - sent_at[recvd] < LAT) failures++;
      recvd++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0) && (sent < 500);
      in_data  = 32'(sent) * 32'd3 + 32'd7;
      // receiver pauses for long stretches to force back-pressure
      out_pop  = ((i / 40) % 2 == 0) ? ($urandom_range(0, 3) == 0) : 1'b1;
    end
    @(negedge clk) in_valid = 1'b0;
    out_pop = 1'b1;
    repeat (10) @(posedge clk);
    checks++;
    if (recvd != 500 || throttled == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

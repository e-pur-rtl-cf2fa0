// tb_om: self-checking testbench of om, the 6 MB intermediate-result memory,
// at its full size. It checks the host row write and read, the N-word
// broadcast read, FP32 word writes of h_t into both halves, and the four
// independent byte lanes: each gate writes its own 8-bit partials and reads
// them back while the other lanes of the same word keep their values. All
// reads have one cycle of latency. Words never written hold unknown values
// and are not compared.
module tb_om;
  localparam int N = 16;
  localparam int WORDS = 6291456 / 4;
  localparam int WA_W = $clog2(WORDS), RA_W = $clog2(WORDS / N);
  localparam int REGION = WORDS / 3;
  logic clk = 1'b0;
  logic rd_en = 1'b0, hw_en = 1'b0, host_we = 1'b0, host_re = 1'b0;
  logic [RA_W-1:0] rd_row = '0, host_row = '0;
  logic [N-1:0][31:0] rd_data, host_wdata = '0;
  logic [3:0][WA_W-1:0] lrd_addr = '0, lw_addr = '0;
  logic [3:0][7:0] lrd_data, lw_data = '0;
  logic [3:0] lwe = '0;
  logic [WA_W-1:0] hw_addr = '0;
  logic [31:0] hw_data = '0;
  logic [31:0] shadow [int];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  om #(.BYTES(6291456), .N(N)) dut (.clk, .rd_en, .rd_row, .rd_data, .lrd_addr, .lrd_data,
    .hw_en, .hw_addr, .hw_data, .lwe, .lw_addr, .lw_data, .host_we, .host_re, .host_row, .host_wdata);

  // memory words never written hold unknown values and are not compared
  function automatic logic [31:0] sh(int a);
    return shadow.exists(a) ? shadow[a] : 32'd0;
  endfunction

  initial begin
    // host writes rows in half 0 (x), with zero rows for the lanes region
    for (int i = 0; i < 50; i++) begin
      int r;
      r = (i < 40) ? i : int'($urandom_range(0, WORDS / N - 1));
      @(negedge clk);
      host_we = 1'b1; host_row = RA_W'(r);
      for (int w = 0; w < N; w++) begin
        host_wdata[w] = $urandom;
        shadow[r * N + w] = host_wdata[w];
      end
    end
    @(negedge clk) host_we = 1'b0;
    // h_t word writes into half 1
    for (int i = 0; i < 100; i++) begin
      int a;
      a = REGION + int'($urandom_range(0, 4000));
      @(negedge clk);
      hw_en = 1'b1; hw_addr = WA_W'(a); hw_data = $urandom; shadow[a] = hw_data;
    end
    @(negedge clk) hw_en = 1'b0;
    // broadcast reads of half 0 and host reads of half 1
    for (int r = 0; r < 40; r++) begin
      @(negedge clk) begin rd_en = 1'b1; rd_row = RA_W'(r); end
      @(negedge clk) rd_en = 1'b0;
      checks++;
      for (int w = 0; w < N; w++) if (shadow.exists(r * N + w) && rd_data[w] != shadow[r * N + w]) begin failures++; break; end
    end
    for (int r = REGION / N; r < REGION / N + 250; r++) begin
      @(negedge clk) begin host_re = 1'b1; host_row = RA_W'(r); end
      @(negedge clk) host_re = 1'b0;
      checks++;
      for (int w = 0; w < N; w++) if (shadow.exists(r * N + w) && rd_data[w] != shadow[r * N + w]) begin failures++; break; end
    end
    // lanes: partial words of four gates at the same addresses (all four
    // lanes are written, so every compared byte is defined)
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      for (int g = 0; g < 4; g++) begin
        int a;
        a = 2 * REGION + i;
        lwe[g] = 1'b1; lw_addr[g] = WA_W'(a); lw_data[g] = 8'($urandom);
        shadow[a][8*g +: 8] = lw_data[g];
      end
    end
    // gate 2 rewrites its lane alone
    for (int i = 0; i < 64; i += 3) begin
      @(negedge clk);
      lwe = 4'b0100; lw_addr[2] = WA_W'(2 * REGION + i); lw_data[2] = 8'($urandom);
      shadow[2 * REGION + i][23:16] = lw_data[2];
    end
    @(negedge clk) lwe = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      for (int g = 0; g < 4; g++) lrd_addr[g] = WA_W'(2 * REGION + ((i + 17 * g) % 64));
      @(negedge clk);
      for (int g = 0; g < 4; g++) begin
        checks++;
        if (lrd_data[g] != sh(2 * REGION + ((i + 17 * g) % 64))[8*g +: 8]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

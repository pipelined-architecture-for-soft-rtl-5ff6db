// tb_ipa_reg_array -- Self-checking testbench of the register array.
// Depth 3, 8 coordinates. A scoreboard queue models the vectors in flight:
// random writes (never more than DEPTH vectors outstanding) and releases,
// sometimes in the same cycle; data_out must always show the oldest vector
// not yet released.
module tb_ipa_reg_array;
  localparam int N = 8, W = 5, D = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                wen, ren;
  logic signed [W-1:0] din [N];
  logic signed [W-1:0] dout [N];

  ipa_reg_array #(.N(N), .W(W), .DEPTH(D)) dut (
    .clk, .rst_n, .wen, .data_in(din), .ren, .data_out(dout));

  int checks = 0, failures = 0;
  int q [$][N];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [N];
    int wraps;
    wen = 0; ren = 0;
    for (int z = 0; z < N; z++) din[z] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wraps = 0;
    for (int t = 0; t < 1000; t++) begin
      #1;
      // check the head
      if (q.size() > 0) begin
        for (int z = 0; z < N; z++) begin
          checks++;
          if (int'(dout[z]) != q[0][z]) begin
            failures++;
            if (failures < 10) $display("t=%0d z=%0d got %0d exp %0d", t, z, dout[z], q[0][z]);
          end
        end
      end
      ren = (q.size() > 0) && ($urandom_range(0, 2) == 0);
      wen = (q.size() < D || ren) && ($urandom_range(0, 1) == 0);
      for (int z = 0; z < N; z++) begin
        v[z] = $urandom_range(0, 31) - 16;
        din[z] = W'(v[z]);
      end
      @(posedge clk);
      if (ren) void'(q.pop_front());
      if (wen) q.push_back(v);
      if (q.size() == D) wraps++;
    end
    checks++;
    if (wraps == 0) begin failures++; $display("array never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

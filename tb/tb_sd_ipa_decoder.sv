// tb_sd_ipa_decoder -- End-to-end testbench of the decoder at its default
// configuration: RM(7,2), n = 128, P = 4 processing units, 5-bit Q(3:2)
// LLRs, two iterations.
//
// Random RM(7,2) codewords are sent over a simulated BPSK/AWGN channel
// (sigma = 1.0, about 3 dB Eb/N0 at rate 29/128) and quantised to Q(3:2).
// Frames are fed at the full rate of one per n/P = 32 cycles, then with
// gaps. For every frame the testbench checks
//   * the decoded codeword against a bit-exact reference of two IPA
//     iterations plus the hard decision,
//   * the latency, 2 * 46 = 92 cycles,
//   * the throughput: results leave at the same spacing frames entered.
// It also counts how often the mechanisms of the architecture were
// exercised and fails if one never was: two vectors held in one iteration's
// register array, both iterations busy at once, the dummy projection i = 0,
// register array wrap-around, and frames in which decoding corrected channel
// errors. The frame error rate against the transmitted codewords is printed
// for information.
module tb_sd_ipa_decoder;
  import tb_ipa_ref_pkg::*;

  localparam int M = 7, N = 128, W = 5, P = 4, G = N / P, NMAX = 2;
  localparam int T_ITR = 1 + 4 + 1 + (G - 1) + M + 2;   // 46
  localparam int LATENCY = NMAX * T_ITR;                 // 92
  localparam int NF = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                valid_in, valid_out;
  logic signed [W-1:0] llr_in [N];
  logic [N-1:0]        codeword;

  sd_ipa_decoder dut (.clk, .rst_n, .valid_in, .llr_in, .valid_out, .codeword);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ivec_t tx [NF];
  ivec_t rx [NF];
  int    t_in [NF];

  // mechanism counters
  int n_two_in_flight = 0, n_itr_overlap = 0, n_dummy = 0, n_wrap = 0;
  int n_corrected = 0, n_frame_err = 0, n_raw_err = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.g_itr[0].u_itr.u_regarr.count == 2) n_two_in_flight++;
    if (dut.g_itr[0].u_itr.proj_en && dut.g_itr[1].u_itr.proj_en) n_itr_overlap++;
    if (dut.g_itr[0].u_itr.agg_en && dut.g_itr[0].u_itr.agg_sel == 0) n_dummy++;
    if (dut.g_itr[0].u_itr.wen && dut.g_itr[0].u_itr.u_regarr.wptr != 0 &&
        dut.g_itr[0].u_itr.u_regarr.incr(dut.g_itr[0].u_itr.u_regarr.wptr) == 0) n_wrap++;
  end

  initial begin
    repeat (NF * 50 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid_in = 0;
    for (int z = 0; z < N; z++) llr_in[z] = '0;
    for (int f = 0; f < NF; f++) begin
      tx[f] = rand_codeword(M, 2);
      rx[f] = channel(tx[f], 1000, 2, W);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      #1;
      t_in[f] = cyc;
      valid_in = 1;
      for (int z = 0; z < N; z++) llr_in[z] = W'(rx[f][z]);
      @(posedge clk);
      #1;
      valid_in = 0;
      repeat (G - 1 + ((f >= 3 * NF / 4) ? $urandom_range(0, 40) : 0)) @(posedge clk);
    end
  end

  initial begin
    int nf, last_out;
    ivec_t l;
    nf = 0; last_out = -1;
    @(posedge rst_n);
    while (nf < NF) begin
      @(posedge clk);
      #2;
      if (valid_out) begin
        int errs, raw, miss;
        l = ref_iteration(ref_iteration(rx[nf], W), W);
        checks++;
        if (cyc - t_in[nf] != LATENCY) begin
          failures++;
          $display("frame %0d: latency %0d, expected %0d", nf, cyc - t_in[nf], LATENCY);
        end
        if (nf > 0) begin
          checks++;
          if (cyc - last_out != t_in[nf] - t_in[nf-1]) begin
            failures++;
            $display("frame %0d: output spacing %0d, input spacing %0d",
                     nf, cyc - last_out, t_in[nf] - t_in[nf-1]);
          end
        end
        last_out = cyc;
        errs = 0; raw = 0; miss = 0;
        for (int z = 0; z < N; z++) begin
          checks++;
          if (int'(codeword[z]) != int'(l[z] < 0)) begin
            failures++;
            if (failures < 10) $display("frame %0d bit %0d: got %0d, reference %0d", nf, z, codeword[z], l[z] < 0);
          end
          if (int'(codeword[z]) != tx[nf][z]) errs++;
          if (int'(rx[nf][z] < 0) != tx[nf][z]) raw++;
          if (rx[nf][z] == 0) miss++;
        end
        if (errs > 0) n_frame_err++;
        if (raw + miss > 0) n_raw_err++;
        if (errs == 0 && raw > 0) n_corrected++;
        nf++;
      end
    end
    $display("frames %0d, with channel errors %0d, corrected %0d, frame errors after decoding %0d",
             NF, n_raw_err, n_corrected, n_frame_err);
    $display("two vectors in one register array: %0d cycles", n_two_in_flight);
    $display("both iterations projecting: %0d cycles", n_itr_overlap);
    $display("dummy projection pre-aggregated: %0d times", n_dummy);
    $display("register array wrap-arounds: %0d", n_wrap);
    checks += 5;
    if (n_two_in_flight == 0) begin failures++; $display("never two vectors in flight"); end
    if (n_itr_overlap == 0)   begin failures++; $display("iterations never overlapped"); end
    if (n_dummy != NF)        begin failures++; $display("dummy projection count wrong"); end
    if (n_wrap == 0)          begin failures++; $display("register array never wrapped"); end
    if (n_corrected == 0)     begin failures++; $display("no channel error was corrected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_scal_decoder_l4 -- end-to-end test of the SCAL-4 configuration (L = 4, first
// four default permutations); otherwise identical to tb_scal_decoder at its default size
// (P(128,60), 6-bit LLRs, 8-bit PMs).
//
// Random information words are encoded (x = u G_N with the butterfly of the
// polar transform), sent over BPSK/AWGN (Box-Muller noise) and quantised to
// 6-bit LLRs (2y/sigma^2 scaled by LLR_SCALE, rounded, clamped to +/-31).
// Frames are streamed into the pipeline one per cycle with random gaps.
// Checks, all computed here from the channel values and not from the RTL:
//  * the information set has K = 60 bits;
//  * every output is a code word (its inverse transform is 0 on frozen bits);
//  * noise-free frames decode to the sent word with PM 0;
//  * min-sum list decoding makes a path's final metric equal the correlation
//    discrepancy of its code word, sum |llr_i| over x_i != hard(llr_i); this
//    is checked whenever the metric is below 31, where no saturation can have
//    touched it;
//  * the frame error rate at the highest SNR is at most MAX_FER_PCT percent;
//  * outputs leave in input order, exactly LATENCY cycles after their input.
// The average number of distinct input permutations among the final list is
// printed per SNR and must be larger at the highest SNR than at the lowest.
// Mechanisms counted (each must occur): back-to-back frames, input gaps,
// path splitting surviving to the end (fewer than L distinct origins in the
// final list), all L permutations surviving, a non-identity permutation
// winning.
module tb_scal_decoder_l4;
  import scal_pkg::*;

  localparam int unsigned L  = 4;
  localparam int unsigned NB = 7;
  localparam int unsigned N  = 1 << NB;
  localparam int unsigned LW = $clog2(L);
  localparam int unsigned FRAMES_PER_SNR = 60;
  localparam int unsigned NSNR = 4;
  localparam real LLR_SCALE = 2.0;
  localparam int unsigned MAX_FER_PCT = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic valid_i = 1'b0;
  llr_t [N-1:0] llr_i;
  logic valid_o;
  logic [N-1:0] x_o;
  pm_t pm_o;
  logic [LW-1:0] origin_o, path_o;
  logic [L-1:0][LW-1:0] list_origin_o;

  scal_decoder #(.L(L)) dut (.*);

  always #5 clk = ~clk;

  localparam mask_t INFO = info_mask(NB, 27);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- reference helpers
  function automatic logic [N-1:0] polar_transform(logic [N-1:0] v);
    for (int h = 1; h < N; h *= 2)
      for (int j = 0; j < N; j += 2 * h)
        for (int i = j; i < j + h; i++) v[i] ^= v[i + h];
    return v;
  endfunction

  function automatic bit is_codeword(logic [N-1:0] x);
    logic [N-1:0] u;
    u = polar_transform(x);
    return (u & ~INFO[N-1:0]) == '0;
  endfunction

  function automatic int discrepancy(llr_t [N-1:0] llr, logic [N-1:0] x);
    int d = 0;
    for (int i = 0; i < N; i++) begin
      if (llr[i] < 0 && !x[i]) d -= int'(llr[i]);
      if (llr[i] >= 0 && x[i]) d += int'(llr[i]);
    end
    return d;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1)) ) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0)) ) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // ---- stimulus bookkeeping
  typedef struct {
    logic [N-1:0] x;
    llr_t [N-1:0] llr;
    int           t_in;
    int           snr_idx;
  } frame_t;
  frame_t sent[$];

  int errors_per_snr[NSNR];
  int origins_per_snr[NSNR];   // sum over frames of distinct origins in the final list
  int frames_out = 0;
  int n_back_to_back = 0, n_gap = 0, n_split_survive = 0, n_all_perm = 0, n_perm_win = 0;
  int n_pm_checked = 0;
  int lat_seen = -1;
  localparam int total_frames = 8 + NSNR * FRAMES_PER_SNR;

  task automatic make_frame(int snr_idx, bit noiseless, output frame_t f);
    logic [N-1:0] u;
    real ebn0_db, ebn0, sigma2, y, llr_r;
    int q;
    u = '0;
    for (int i = 0; i < N; i++) if (INFO[i]) u[i] = 1'($urandom);
    f.x = polar_transform(u);
    ebn0_db = 1.0 + real'(snr_idx);               // 1, 2, 3, 4 dB
    ebn0 = 10.0 ** (ebn0_db / 10.0);
    sigma2 = 1.0 / (2.0 * (60.0 / 128.0) * ebn0);
    for (int i = 0; i < N; i++) begin
      y = f.x[i] ? -1.0 : 1.0;
      if (!noiseless) y += $sqrt(sigma2) * gauss();
      llr_r = LLR_SCALE * 2.0 * y / sigma2;
      if (noiseless) llr_r = f.x[i] ? -real'(1 + (i % 9)) : real'(1 + (i % 9));
      q = (llr_r >= 0.0) ? int'(llr_r + 0.5) : -int'(-llr_r + 0.5);
      if (q > 31) q = 31;
      if (q < -31) q = -31;
      f.llr[i] = llr_t'(q);
    end
    f.snr_idx = noiseless ? -1 : snr_idx;
  endtask

  // ---- driver
  initial begin
    frame_t f;
    bit prev_valid;
    if (popcount_mask(INFO, NB) != 60) begin
      failures++;
      $display("FAIL: K = %0d, expected 60", popcount_mask(INFO, NB));
    end
    checks++;
    $display("decoder latency %0d cycles", dut.LATENCY);
    llr_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    prev_valid = 1'b0;
    for (int k = 0; k < total_frames; k++) begin
      if (k < 8) make_frame(0, 1'b1, f);
      else       make_frame((k - 8) / FRAMES_PER_SNR, 1'b0, f);
      // random gap before some frames
      if ($urandom_range(3, 0) == 0) begin
        valid_i <= 1'b0;
        @(posedge clk);
        n_gap++;
        prev_valid = 1'b0;
      end
      if (prev_valid) n_back_to_back++;
      valid_i <= 1'b1;
      llr_i   <= f.llr;
      f.t_in = cyc;
      sent.push_back(f);
      @(posedge clk);
      prev_valid = 1'b1;
    end
    valid_i <= 1'b0;
  end

  // ---- monitor
  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      frame_t f;
      int d;
      int distinct;
      logic [L-1:0] seen;
      if (sent.size() == 0) begin
        failures++;
        $display("FAIL: output without input at cycle %0d", cyc);
      end else begin
        f = sent.pop_front();
        // latency: the input is captured at the first edge after t_in, the
        // output is visible LATENCY edges later and sampled here one edge
        // after that, hence LATENCY + 1 between the two counter values
        checks++;
        if (lat_seen < 0) lat_seen = cyc - f.t_in;
        if (cyc - f.t_in != dut.LATENCY + 1) begin
          failures++;
          $display("FAIL: frame %0d latency %0d, expected %0d", frames_out, cyc - f.t_in - 1, dut.LATENCY);
        end
        checks++;
        if (!is_codeword(x_o)) begin
          failures++;
          $display("FAIL: frame %0d output is not a code word", frames_out);
        end
        d = discrepancy(f.llr, x_o);
        if (pm_o < 31) begin
          checks++;
          n_pm_checked++;
          if (int'(pm_o) != d) begin
            failures++;
            $display("FAIL: frame %0d PM %0d, discrepancy of output %0d", frames_out, pm_o, d);
          end
        end
        if (f.snr_idx < 0) begin
          checks++;
          if (x_o !== f.x || pm_o != 0) begin
            failures++;
            $display("FAIL: noise-free frame %0d decoded wrongly (PM %0d)", frames_out, pm_o);
          end
        end else if (x_o !== f.x) errors_per_snr[f.snr_idx]++;
        seen = '0;
        for (int l = 0; l < L; l++) seen[list_origin_o[l]] = 1'b1;
        distinct = $countones(seen);
        if (f.snr_idx >= 0) origins_per_snr[f.snr_idx] += distinct;
        if (distinct < L) n_split_survive++;
        if (distinct == L) n_all_perm++;
        if (origin_o != 0) n_perm_win++;
        checks++;
        if (list_origin_o[path_o] != origin_o) begin
          failures++;
          $display("FAIL: frame %0d origin mismatch", frames_out);
        end
      end
      frames_out++;
    end
  end

  // ---- end of test
  initial begin
    wait (rst_n);
    wait (frames_out == total_frames);
    repeat (5) @(posedge clk);
    for (int s = 0; s < NSNR; s++)
      $display("Eb/N0 %0d dB: %0d / %0d frame errors, %0.2f distinct permutations in the final list on average",
               s + 1, errors_per_snr[s], FRAMES_PER_SNR, real'(origins_per_snr[s]) / real'(FRAMES_PER_SNR));
    // permutations survive more often as the SNR rises (splitting dominates at low SNR)
    checks++;
    if (origins_per_snr[NSNR-1] <= origins_per_snr[0]) begin
      failures++;
      $display("FAIL: number of surviving permutations does not grow with the SNR");
    end
    checks++;
    if (errors_per_snr[NSNR-1] * 100 > int'(MAX_FER_PCT * FRAMES_PER_SNR)) begin
      failures++;
      $display("FAIL: too many frame errors at the highest SNR");
    end
    $display("mechanisms: back_to_back=%0d gaps=%0d split_paths_survive=%0d all_perms_survive=%0d nonidentity_winner=%0d pm_checked=%0d",
             n_back_to_back, n_gap, n_split_survive, n_all_perm, n_perm_win, n_pm_checked);
    checks += 5;
    if (n_back_to_back == 0) begin failures++; $display("FAIL: no back-to-back frames"); end
    if (n_gap == 0)          begin failures++; $display("FAIL: no input gaps"); end
    if (n_split_survive == 0) begin failures++; $display("FAIL: path splitting never survived"); end
    if (n_all_perm == 0)     begin failures++; $display("FAIL: never all permutations survived"); end
    if (n_perm_win == 0)     begin failures++; $display("FAIL: identity permutation always won"); end
    checks++;
    if (n_pm_checked < 8) begin failures++; $display("FAIL: too few PM checks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

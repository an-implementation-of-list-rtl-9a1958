// tb_lscd_full: end-to-end test of the list SC decoder (default size: N = 4096, L = 32, LB = 4, P = 128, CRC-24 0x864cfb).
//
// Builds a polar code by the Bhattacharyya bound (K most reliable indices
// carry information, the last R of them a CRC of the others; the worst
// 30% of the information bits are marked unreliable for selective
// expansion), sends random CRC-protected messages over BPSK/AWGN at several
// Eb/N0 values, quantises the LLRs to 8 bits and decodes them with the RTL
// and with the copy-based reference of lscd_ref_pkg. Checks, per frame:
// decoded vector equal to the reference bit for bit, CRC verdict equal,
// and the number of cycles from the last input word to frame_done equal to
// the schedule (F/G node passes, bubbles, sorting rounds, read-out).
// Also counts the mechanisms of the design (serial G, parallel F, low-stage
// G, list management with no sort / several sort rounds, list not full,
// CRC choosing a path other than the best-metric one, CRC failure) and
// fails if any of them never happened.
module tb_lscd_full;
  import lscd_pkg::*;
  import lscd_ref_pkg::*;

  localparam int N = 4096, L = 32, LB = 4, P = 128, QPM = 9, MLOG = 2, EPS = 3;
  localparam int R = 24;
  localparam logic [R-1:0] POLY = 24'h864cfb;
  localparam int K = 2048;
  localparam int NFRAMES = 1;
  localparam int NL = $clog2(N), M = 1 << MLOG, NW = N / P, SPB = L / LB;
  localparam real SNR_LO = 2.0, SNR_HI = 2.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [NL-1:0] cfg_addr = '0;
  logic [1:0] cfg_type = '0;
  logic in_valid = 1'b0, in_ready;
  logic [P-1:0][7:0] in_llr = '0;
  logic out_valid, frame_done, crc_pass;
  logic [$clog2(NW > 1 ? NW : 2)-1:0] out_chunk;
  logic [P-1:0] out_bits;

  always #5 clk = ~clk;

  lscd_top  u_dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_type, .in_valid, .in_ready, .in_llr,
    .out_valid, .out_chunk, .out_bits, .frame_done, .crc_pass
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, from the design's own control signals
  int n_f = 0, n_g = 0, n_lowg = 0, n_nosort = 0, n_multisort = 0, n_notfull = 0;
  int n_crc_other = 0, n_crc_fail = 0, n_ok = 0;
  always @(posedge clk) begin
    if (u_dut.pf_op == OP_F) n_f++;
    if (u_dut.pf_op == OP_G) n_g++;
    if (u_dut.lo_op == OP_G) n_lowg++;
    if (u_dut.lm_done && u_dut.lm_rounds == 0) n_nosort++;
    if (u_dut.lm_done && u_dut.lm_rounds >= 2) n_multisort++;
    if (u_dut.lm_start && !(&u_dut.lm_valid)) n_notfull++;
  end

  lscd_ref #(N, L, MLOG, QPM, R) rm;
  int   btype [N];
  bit   u [N], x [N], uref [N], udut [N];
  int   llr [N];
  int   exp_cycles;

  initial begin
    real z [];
    real rc, z0, snr, sigma2;
    int  rank [N];
    int  info_rank [N];
    int  ninfo;
    rm = new(POLY);
    rc = real'(K) / real'(N);
    z0 = $exp(-rc * (10.0 ** (2.0 / 10.0)));
    bhattacharyya(N, z0, z);
    for (int i = 0; i < N; i++) begin
      rank[i] = 0;
      for (int j = 0; j < N; j++)
        if (z[j] < z[i] || (z[j] == z[i] && j < i)) rank[i]++;
    end
    for (int i = 0; i < N; i++) begin
      if (rank[i] >= K) btype[i] = 0;
      else if (rank[i] >= K - (K * 30) / 100) btype[i] = 2;
      else btype[i] = 1;
      rm.btype[i] = btype[i];
    end
    // schedule length of one frame (from last input word to frame_done)
    exp_cycles = 1;
    for (int j = 0; j < N / M; j++) begin
      int stop, mu;
      if (j == 0) stop = NL - 1;
      else begin
        int t; t = 0;
        while (((j >> t) & 1) == 0) t++;
        stop = MLOG + t;
      end
      for (int s = stop; s >= MLOG; s--) begin
        int ch;
        ch = ((1 << s) > P) ? (1 << s) / P : 1;
        if (s > EPS) exp_cycles += ((s == stop && j != 0) ? L : SPB) * ch + 1;
        else exp_cycles += 1;
      end
      mu = 0;
      for (int i = 0; i < M; i++) mu += (btype[j * M + i] == 2);
      exp_cycles += 2 + ((1 << mu) - 1);
    end
    exp_cycles += 1 + NW + 1;   // select, read-out, registered frame_done

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      cfg_we <= 1'b1; cfg_addr <= NL'(i); cfg_type <= 2'(btype[i]);
      @(posedge clk);
    end
    cfg_we <= 1'b0;

    for (int fr = 0; fr < NFRAMES; fr++) begin
      logic [R-1:0] c;
      int k, t_last, t_done;
      bit fail_pass;
      snr = SNR_LO + (SNR_HI - SNR_LO) * real'(fr % 4) / 3.0;
      sigma2 = 1.0 / (2.0 * rc * (10.0 ** (snr / 10.0)));
      // message, CRC and polar encoding
      c = '0; k = 0;
      for (int i = 0; i < N; i++) begin
        u[i] = 1'b0;
        if (btype[i] != 0) begin
          if (k < K - R) begin
            u[i] = 1'($urandom_range(1, 0));
            c = rm.crc_step(c, u[i]);
          end else begin
            u[i] = c[R - 1 - (k - (K - R))];
          end
          k++;
        end
        x[i] = u[i];
      end
      for (int h = 1; h < N; h *= 2)
        for (int i = 0; i < N; i++)
          if ((i & h) == 0) x[i] ^= x[i + h];
      for (int i = 0; i < N; i++) begin
        real y, lr;
        int q;
        y  = (x[i] ? -1.0 : 1.0) + $sqrt(sigma2) * gauss();
        lr = 2.0 * y / sigma2;
        q  = int'(lr * 2.0);
        if (q > 127) q = 127;
        if (q < -127) q = -127;
        llr[i] = q;
      end
      rm.decode(llr, uref);
      // drive the frame
      for (int w = 0; w < NW; w++) begin
        in_valid <= 1'b1;
        for (int i = 0; i < P; i++) in_llr[i] <= 8'(llr[w * P + i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      t_last = int'(cyc);
      in_valid <= 1'b0;
      // collect the output
      do begin
        @(posedge clk);
        if (out_valid)
          for (int i = 0; i < P; i++) udut[int'(out_chunk) * P + i] = out_bits[i];
        if (u_dut.u_ctrl.state == 3'd6) begin
          int ba; ba = -1;
          for (int l = 0; l < L; l++)
            if (u_dut.lm_valid[l] && (ba < 0 || u_dut.lm_pm[l] < u_dut.lm_pm[ba])) ba = l;
          if (u_dut.sel_pass && int'(u_dut.sel_path) != ba) n_crc_other++;
        end
      end while (!frame_done);
      t_done = int'(cyc);
      // checks
      checks++;
      if (udut != uref) begin
        failures++;
        $display("frame %0d: decoded vector differs from the reference", fr);
      end
      checks++;
      if (crc_pass != rm.pass) begin
        failures++;
        $display("frame %0d: crc_pass %0d, reference %0d", fr, crc_pass, rm.pass);
      end
      checks++;
      if (t_done - t_last != exp_cycles) begin
        failures++;
        $display("frame %0d: %0d cycles, schedule %0d", fr, t_done - t_last, exp_cycles);
      end
      if (!crc_pass) n_crc_fail++;
      if (udut == u) n_ok++;
      $display("frame %0d snr %0.2f dB: cycles %0d, crc_pass %0d, correct %0d",
               fr, snr, t_done - t_last, crc_pass, udut == u);
    end
    $display("mechanisms: F cmds %0d, G cmds %0d, low G %0d, LM no sort %0d, LM >=2 rounds %0d, list not full %0d, CRC picks other path %0d, CRC fail %0d; correct frames %0d/%0d",
             n_f, n_g, n_lowg, n_nosort, n_multisort, n_notfull, n_crc_other, n_crc_fail, n_ok, NFRAMES);
    checks++; if (n_f == 0)         begin failures++; $display("parallel F never ran"); end
    checks++; if (n_g == 0)         begin failures++; $display("serial G never ran"); end
    checks++; if (n_lowg == 0)      begin failures++; $display("low-stage G never ran"); end
    checks++; if (n_nosort == 0)    begin failures++; $display("LM without sorting never happened"); end
    checks++; if (n_multisort == 0) begin failures++; $display("LM with several sort rounds never happened"); end
    checks++; if (n_notfull == 0)   begin failures++; $display("list never partly empty"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_workload_rates -- runs the default-size decoder (N = 1024, omega = 2,
// TMAX = 100, sorter length 50) on codes of different rates: 128, 256, 512,
// 768 and 896 information positions (rates 1/8, 1/4, 1/2, 3/4 and 7/8, the
// last one being PC(1024,896)), each including a 16-bit CRC. For every rate
// the information set is rebuilt with the polarisation-weight rule and a few
// noisy BPSK/AWGN frames (Eb/N0 with the rate KA/N) are decoded near the
// rate's waterfall region.
// Every frame is checked like in the end-to-end test: a successful frame
// must carry exactly the transmitted message, a failed one must have used
// its attempt budget or emptied the candidate list. Per rate it reports
// frames decoded in the first attempt, frames fixed by flipping and the
// average number of clock cycles per frame.
module tb_workload_rates;
  import dscf_pkg::*;

  localparam int N    = 1024;
  localparam int PE   = 64;
  int KA = 512;                        // information positions incl. CRC
  localparam int TMAX = 100;
  localparam int NFRAMES = 12;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]          info_mask;
  logic                  ld_we = 1'b0;
  logic [3:0]            ld_row = '0;
  logic [PE-1:0][QC-1:0] ld_data = '0;
  logic                  start = 1'b0;
  logic                  busy, done, success;
  logic [N-1:0]          u_hat;
  logic [$clog2(TMAX+2)-1:0] attempts;
  logic ev_attempt, ev_flip, ev_r0_merge, ev_spc_fix, ev_insert;
  logic [1:0] ev_drop;

  fast_dscf_decoder dut (
    .clk, .rst_n, .info_mask, .ld_we, .ld_row, .ld_data, .start, .busy, .done,
    .success, .u_hat, .attempts, .ev_attempt, .ev_flip, .ev_r0_merge,
    .ev_spc_fix, .ev_insert, .ev_drop
  );

  int checks = 0, failures = 0;
  int n_attempt = 0, n_flip = 0, n_r0 = 0, n_spcfix = 0, n_insert = 0, n_drop = 0;
  int n_flip_rep = 0, n_flip_r1 = 0, n_flip_spc = 0, n_order2 = 0;
  int n_tmax = 0, n_fixed = 0, n_first = 0;
  longint cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      n_attempt += int'(ev_attempt);
      n_flip    += int'(ev_flip);
      n_r0      += int'(ev_r0_merge);
      n_spcfix  += int'(ev_spc_fix);
      n_insert  += int'(ev_insert);
      n_drop    += int'(ev_drop);
      if (ev_flip) begin
        if (dut.nd_type == NT_REP) n_flip_rep++;
        if (dut.nd_type == NT_R1)  n_flip_r1++;
        if (dut.nd_type == NT_SPC) n_flip_spc++;
      end
      if (dut.core_start && dut.lam[0].order == 2) n_order2++;
    end
  end

  // watchdog
  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  real w [N];
  int  info_pos [N];
  logic [N-1:0] u_ref;

  function automatic logic [15:0] crc16(input logic bits [], input int len);
    logic [15:0] r;
    r = '0;
    for (int i = 0; i < len; i++) begin
      logic fb;
      fb = r[15] ^ bits[i];
      r = {r[14:0], 1'b0};
      if (fb) r = r ^ 16'h1021;
    end
    return r;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic build_code();
    int cnt;
    for (int i = 0; i < N; i++) begin
      w[i] = 0.0;
      for (int j = 0; j < 10; j++) if ((i >> j) & 1) w[i] += 2.0 ** (real'(j) / 4.0);
    end
    info_mask = '0;
    for (int i = 0; i < N; i++) begin
      int better;
      better = 0;
      for (int j = 0; j < N; j++)
        if (w[j] > w[i] || (w[j] == w[i] && j > i)) better++;
      if (better < KA) info_mask[i] = 1'b1;
    end
    cnt = 0;
    for (int i = 0; i < N; i++) if (info_mask[i]) begin info_pos[cnt] = i; cnt++; end
  endtask

  // returns quantised LLRs for a random message at the given Eb/N0
  task automatic make_frame(input real ebn0_db, input bit noiseless,
                            output logic signed [QC-1:0] q [N]);
    logic bits [];
    logic [15:0] c;
    logic [N-1:0] x;
    real sigma, y, l;
    int v, qmax;
    bits = new[KA];
    for (int i = 0; i < KA - 16; i++) bits[i] = logic'($urandom & 1);
    c = crc16(bits, KA - 16);
    for (int i = 0; i < 16; i++) bits[KA - 16 + i] = c[15 - i];
    u_ref = '0;
    for (int i = 0; i < KA; i++) u_ref[info_pos[i]] = bits[i];
    x = u_ref;
    for (int t = 0; t < 10; t++)
      for (int i = 0; i < N; i++)
        if (((i >> t) & 1) == 0) x[i] = x[i] ^ x[i + (1 << t)];
    sigma = $sqrt(1.0 / (2.0 * (real'(KA) / real'(N)) * (10.0 ** (ebn0_db / 10.0))));
    qmax = (1 << (QC - 1)) - 1;
    for (int i = 0; i < N; i++) begin
      y = (x[i] ? -1.0 : 1.0) + (noiseless ? 0.0 : sigma * gauss());
      l = 2.0 * y / (sigma * sigma) * real'(1 << FRAC);
      v = (l >= 0.0) ? int'(l + 0.5) : -int'(-l + 0.5);
      if (v > qmax) v = qmax;
      if (v < -qmax) v = -qmax;
      q[i] = QC'(v);
    end
  endtask

  task automatic run_frame(input real ebn0_db, input bit noiseless);
    logic signed [QC-1:0] q [N];
    longint t0, lat;
    logic bits [];
    make_frame(ebn0_db, noiseless, q);
    @(negedge clk);
    for (int r = 0; r < N / PE; r++) begin
      ld_we = 1'b1;
      ld_row = 4'(r);
      for (int p = 0; p < PE; p++) ld_data[p] = q[r * PE + p];
      @(negedge clk);
    end
    ld_we = 1'b0;
    start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    checks++;
    if (success) begin
      bits = new[KA];
      for (int i = 0; i < KA; i++) bits[i] = u_hat[info_pos[i]];
      if (crc16(bits, KA) != 16'h0 || u_hat != u_ref) begin
        failures++;
        $display("frame with success flag but wrong bits (attempts %0d)", attempts);
      end
      if (attempts == 0) n_first++; else n_fixed++;
    end else begin
      if (!(int'(attempts) == TMAX || !dut.lam[1].valid)) begin
        failures++;
        $display("failure reported before the attempt budget was used");
      end
      if (int'(attempts) == TMAX) n_tmax++;
    end
    if (noiseless) begin
      checks++;
      if (!success || attempts != 0 || lat > 620 || lat < 200) begin
        failures++;
        $display("noiseless frame: success %0d attempts %0d latency %0d", success, attempts, lat);
      end
      $display("noiseless frame latency: %0d cycles", lat);
    end
    $display("frame Eb/N0 %0.2f dB: success %0d attempts %0d cycles %0d", ebn0_db, success, attempts, lat);
  endtask

  initial begin
    int ks [5];
    real snr [5];
    ks  = '{128, 256, 512, 768, 896};
    snr = '{2.0, 1.75, 1.75, 2.5, 3.5};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 5; r++) begin
      longint c0;
      int f0, x0, nf;
      KA = ks[r];
      build_code();
      c0 = cyc; f0 = n_first; x0 = n_fixed;
      run_frame(6.0, 1'b1);
      for (int f = 0; f < NFRAMES; f++) run_frame(snr[r], 1'b0);
      nf = NFRAMES + 1;
      $display("PC(1024,%0d) at %0.2f dB: first attempt %0d, fixed by flipping %0d, of %0d frames, %0d cycles per frame",
               KA, snr[r], n_first - f0, n_fixed - x0, nf, (cyc - c0) / nf);
    end
    checks++;
    if (n_fixed == 0) begin
      failures++;
      $display("no frame was fixed by flipping");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

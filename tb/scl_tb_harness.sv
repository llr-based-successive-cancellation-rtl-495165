// scl_tb_harness: stimulus and checking for one scl_decoder instance.
//
// For NCW codewords it builds a polar code (frozen set from Bhattacharyya
// bounds, |A| = N/2 information bits plus CRC_LEN CRC bits on every odd
// codeword, which then also runs with crc_en), encodes random data, sends it
// over a BPSK/AWGN channel (codeword 0 noiseless; codewords 1, 4, 11, 14, ... replaced by
// random full-scale LLRs, so that every path pays heavily and the metrics of
// the worse paths saturate; the rest at Eb/N0 between 0 and 4 dB), loads the
// LLRs, starts the decoder and compares with the behavioural reference of
// scl_ref_pkg: decided bits, chosen metric, CRC flag, and the cycle count
// 2N + (N/P)log2(N/(4P)) + |A| (+ frozen runs with the pruned sorter). It
// also counts how often each mechanism of the decoder happened, observed on
// the decoder's internal commit signals.
module scl_tb_harness #(
  parameter int          N        = 64,
  parameter int          L        = 4,
  parameter int          P        = 4,
  parameter int          Q        = 6,
  parameter int          M        = 8,
  parameter bit          PRUNED   = 1'b1,
  parameter int          CRC_LEN  = 8,
  parameter int unsigned CRC_POLY = 32'hD5,
  parameter int          NCW      = 20,
  localparam int AW = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                   clk,
  output logic                   rst_n,
  output logic                   llr_in_valid,
  output logic [AW-1:0]          llr_in_addr,
  output logic signed [Q-1:0]    llr_in_data [P],
  output logic                   start,
  output logic [N-1:0]           frozen,
  output logic                   crc_en,
  input  logic                   busy,
  input  logic                   done,
  input  logic [N-1:0]           u_hat,
  input  logic [M-1:0]           out_metric,
  input  logic                   out_crc_pass,
  // observed inside the decoder
  input  scl_pkg::commit_kind_e  commit_kind,
  input  logic [LW-1:0]          commit_src [L],
  input  logic [L-1:0]           valid,
  input  logic [M-1:0]           pm [L],
  input  logic                   op_valid,
  input  logic [AW-1:0]          op_cyc,
  output int                     checks,
  output int                     failures,
  output bit                     finished,
  output int                     cnt [8]
);
  import scl_ref_pkg::*;
  import scl_pkg::*;

  // cnt[0] info sorts, [1] re-sorts, [2] multi-cycle operations,
  // [3] duplications, [4] dropped paths, [5] saturated metrics,
  // [6] CRC picked a non-minimum path, [7] no path passed the CRC
  int mon [6];
  int crcc [2];
  initial foreach (mon[j]) mon[j] = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (commit_kind == CM_INFO) begin
        mon[0] <= mon[0] + 1;
        for (int s = 0; s < L; s++) begin
          automatic int kids;
          kids = 0;
          for (int t = 0; t < L; t++) if (commit_src[t] == LW'(s)) kids++;
          if (valid[s] && kids == 2) mon[3] <= mon[3] + 1;
          if (valid[s] && kids == 0) mon[4] <= mon[4] + 1;
        end
      end
      if (commit_kind == CM_RESORT) mon[1] <= mon[1] + 1;
      if (op_valid && op_cyc != '0) mon[2] <= mon[2] + 1;
      for (int s = 0; s < L; s++) if (valid[s] && pm[s] == '1) begin
        mon[5] <= mon[5] + 1;
        break;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < 6; j++) cnt[j] = mon[j];
    cnt[6] = crcc[0];
    cnt[7] = crcc[1];
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    scl_model ref_m;
    checks = 0; failures = 0; finished = 0;
    crcc[0] = 0; crcc[1] = 0;
    rst_n = 0; llr_in_valid = 0; llr_in_addr = '0; start = 0; frozen = '0; crc_en = 0;
    foreach (llr_in_data[p]) llr_in_data[p] = '0;
    ref_m = new(N, L, Q, M, PRUNED, CRC_LEN, CRC_POLY);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int cw = 0; cw < NCW; cw++) begin
      automatic bit    use_crc = (cw % 2 == 1);
      automatic int    n_info  = N / 2 + (use_crc ? CRC_LEN : 0);
      automatic bitq_t fr, msg, info, u, x, rem;
      automatic intq_t ch;
      automatic real   ebn0_db, sigma2;
      automatic int    fc, expect_cyc, cyc;
      automatic logic [N-1:0] fmask;
      fr = make_frozen(N, n_info, 0.5);
      for (int j = 0; j < n_info - (use_crc ? CRC_LEN : 0); j++) msg.push_back(bit'($urandom % 2));
      info = msg;
      if (use_crc) begin
        rem = crc_remainder(msg, CRC_LEN, CRC_POLY);
        foreach (rem[j]) info.push_back(rem[j]);
      end
      begin
        automatic int k = 0;
        for (int j = 0; j < N; j++) begin
          u.push_back(fr[j] ? 1'b0 : info[k]);
          if (!fr[j]) k++;
        end
      end
      x = polar_encode(u);
      ebn0_db = 4.0 * real'(cw % 9) / 8.0;
      sigma2  = 1.0 / $pow(10.0, ebn0_db / 10.0);
      for (int j = 0; j < N; j++) begin
        automatic real y, llr;
        y = (x[j] ? -1.0 : 1.0);
        if (cw == 0) llr = y * 100.0;
        else if (cw % 10 == 1 || cw % 10 == 4) llr = ($urandom % 2 == 1) ? 40.0 : -40.0;
        else llr = 2.0 * (y + $sqrt(sigma2) * gauss()) / sigma2;
        ch.push_back(sat(int'($rtoi(llr + (llr >= 0 ? 0.5 : -0.5))), Q));
      end
      // load the channel memory
      for (int w = 0; w < N / P; w++) begin
        llr_in_valid <= 1'b1;
        llr_in_addr  <= AW'(w);
        for (int p = 0; p < P; p++) llr_in_data[p] <= Q'(ch[w * P + p]);
        @(posedge clk);
      end
      llr_in_valid <= 1'b0;
      for (int j = 0; j < N; j++) fmask[j] = fr[j];
      frozen <= fmask;
      crc_en <= use_crc;
      start  <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      cyc = 0;
      while (!done) begin
        @(posedge clk);
        cyc++;
      end
      @(posedge clk);  // outputs are registered on done
      // expected cycle count
      fc = 0;
      for (int j = 0; j < N; j++) if (fr[j] && (j == N - 1 || !fr[j + 1])) fc++;
      expect_cyc = 2 * N + (N / P) * ($clog2(N / (4 * P))) + n_info + (PRUNED ? fc : 0);
      if (N >= 1024)
        $display("cw %0d: |A| = %0d, F_C = %0d, %0d cycles", cw, n_info, fc, cyc - 1);
      checks++;
      if (cyc - 1 != expect_cyc) begin
        failures++;
        $display("cw %0d: %0d cycles, expected %0d", cw, cyc - 1, expect_cyc);
      end
      ref_m.decode(ch, fr, use_crc);
      checks++;
      for (int j = 0; j < N; j++) begin
        if (u_hat[j] != ref_m.u_out[j]) begin
          failures++;
          $display("cw %0d: bit %0d decoded %0d, reference %0d", cw, j, u_hat[j], ref_m.u_out[j]);
          break;
        end
      end
      checks++;
      if (int'(out_metric) != ref_m.metric_out) begin
        failures++;
        $display("cw %0d: metric %0d, reference %0d", cw, out_metric, ref_m.metric_out);
      end
      checks++;
      if (out_crc_pass != ref_m.pass_out) begin
        failures++;
        $display("cw %0d: crc flag %0d, reference %0d", cw, out_crc_pass, ref_m.pass_out);
      end
      if (cw == 0) begin
        checks++;
        for (int j = 0; j < N; j++) if (u_hat[j] != u[j]) begin
          failures++;
          $display("cw 0: noiseless codeword not recovered at bit %0d", j);
          break;
        end
      end
      if (use_crc && ref_m.chose_non_min) crcc[0]++;
      if (ref_m.none_passed) crcc[1]++;
    end
    finished = 1;
  end
endmodule

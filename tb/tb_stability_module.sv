// tb_stability_module -- self-checking test of the stability module, SSR and FSR builds.
//
// Two instances (ORDER=2 and ORDER=1) get the same 32-frame spike sequences for 4
// pixels over many batches. Spikes come from an integrate-and-fire pixel model (light
// level changes now and then, plus occasional noise spikes and dark stretches). A
// reference written independently of the RTL keeps the full list of intervals of each
// open segment and re-checks the stability rules over the whole list for every new
// interval; its expected records are compared in order with what the modules emit.
// The record outputs are randomly back-pressured. The per-pixel cycle cost (about 34
// clocks for 32 frames when not stalled) is checked too.
module tb_stability_module;
  import ssr_pkg::*;

  localparam int NPIX  = 4;
  localparam int NB    = 60;     // batches
  localparam int B     = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- reference model ----------------
  typedef struct {
    int gap;
    int seg[$];
  } ref_px_t;

  ref_px_t   rpx [2][NPIX];
  enc_rec_t  exp_q [2][NPIX][$];
  int        exp_brk [2][3];

  function automatic bit zo_ok(int vals[$]);
    int lo, hi;
    if (vals.size() == 0) return 1;
    lo = vals[0]; hi = vals[0];
    foreach (vals[i]) begin
      if (vals[i] < lo) lo = vals[i];
      if (vals[i] > hi) hi = vals[i];
    end
    return (hi - lo) <= 1;
  endfunction

  // second-order check over a whole segment: for every value, the distances between its
  // successive positions must be zero-order stable
  function automatic bit so_ok(int s[$]);
    int d[$];
    int last;
    foreach (s[i]) begin
      d.delete();
      last = -1;
      foreach (s[j]) if (s[j] == s[i]) begin
        if (last >= 0) d.push_back(j - last);
        last = j;
      end
      if (!zo_ok(d)) return 0;
    end
    return 1;
  endfunction

  task automatic ref_interval(int o, int p, int v);
    int trial[$];
    int sum;
    bit f, s2, c;
    if (rpx[o][p].seg.size() == 0) begin
      rpx[o][p].seg.push_back(v);
      return;
    end
    trial = rpx[o][p].seg;
    trial.push_back(v);
    sum = 0;
    foreach (rpx[o][p].seg[i]) sum += rpx[o][p].seg[i];
    f  = zo_ok(trial);
    s2 = (o == 0) ? so_ok(trial) : 1'b1;
    c  = (sum + v) <= 255;
    if (f && s2 && c) begin
      rpx[o][p].seg.push_back(v);
    end else begin
      enc_rec_t r;
      int n;
      n = rpx[o][p].seg.size();
      r.dur   = 8'(sum);
      r.inten = 8'((255 * n) / sum);
      exp_q[o][p].push_back(r);
      if (!f) exp_brk[o][0]++;
      else if (!s2) exp_brk[o][1]++;
      else exp_brk[o][2]++;
      rpx[o][p].seg.delete();
      rpx[o][p].seg.push_back(v);
    end
  endtask

  task automatic ref_batch(int p, logic [B-1:0] bits);
    for (int o = 0; o < 2; o++)
      for (int t = 0; t < B; t++) begin
        int g;
        g = rpx[o][p].gap + 1;
        if (bits[t] || g == 255) begin
          ref_interval(o, p, g);
          rpx[o][p].gap = 0;
        end else rpx[o][p].gap = g;
      end
  endtask

  // ---------------- spike source: integrate-and-fire pixels ----------------
  int acc [NPIX];
  int rate [NPIX];   // accumulation per frame, threshold 1000

  function automatic logic [B-1:0] gen_bits(int p);
    logic [B-1:0] b;
    for (int t = 0; t < B; t++) begin
      acc[p] += rate[p];
      b[t] = 1'b0;
      if (acc[p] >= 1000) begin
        acc[p] -= 1000;
        b[t] = 1'b1;
      end
      if ($urandom_range(0, 199) == 0) b[t] = ~b[t];   // sensor noise
    end
    return b;
  endfunction

  // ---------------- DUTs ----------------
  logic             seq_valid;
  logic [1:0]       seq_slot;
  logic [PIX_W-1:0] seq_pix;
  logic [B-1:0]     seq_bits;
  logic [1:0]       seq_ready, rec_valid, rec_ready, busy;
  pix_rec_t         rec_out [2];
  logic [15:0]      nf [2], ns [2], nc [2];

  for (genvar o = 0; o < 2; o++) begin : g_dut
    stability_module #(.PIX_PER_MOD(NPIX), .BATCH(B), .ORDER(o == 0 ? 2 : 1)) dut (
      .clk, .rst_n,
      .seq_valid(seq_valid && seq_ready == 2'b11), .seq_ready(seq_ready[o]),
      .seq_slot, .seq_pix, .seq_bits,
      .rec_valid(rec_valid[o]), .rec_ready(rec_ready[o]), .rec_out(rec_out[o]),
      .busy(busy[o]), .n_break_fsr(nf[o]), .n_break_ssr(ns[o]), .n_break_cap(nc[o]));
  end

  // record checker
  int got [2];
  always @(posedge clk) if (rst_n) begin
    rec_ready <= 2'($urandom_range(0, 3));
    for (int o = 0; o < 2; o++) if (rec_valid[o] && rec_ready[o]) begin
      int p;
      p = int'(rec_out[o].pix) - 100;
      checks++;
      got[o]++;
      if (exp_q[o][p].size() == 0) begin
        failures++;
        $display("FAIL order%0d pix %0d unexpected record dur=%0d I=%0d", o == 0 ? 2 : 1, p,
                 rec_out[o].rec.dur, rec_out[o].rec.inten);
      end else begin
        enc_rec_t e;
        e = exp_q[o][p].pop_front();
        if (e != rec_out[o].rec) begin
          failures++;
          if (failures < 10)
            $display("FAIL order%0d pix %0d got dur=%0d I=%0d exp dur=%0d I=%0d", o == 0 ? 2 : 1, p,
                     rec_out[o].rec.dur, rec_out[o].rec.inten, e.dur, e.inten);
        end
      end
    end
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    int t0, t1, pending;
    seq_valid = 0; seq_slot = 0; seq_pix = 0; seq_bits = 0;
    for (int p = 0; p < NPIX; p++) begin
      acc[p] = 0; rate[p] = 100 + 150 * p;
      for (int o = 0; o < 2; o++) rpx[o][p].gap = 0;
    end
    for (int o = 0; o < 2; o++) for (int k = 0; k < 3; k++) exp_brk[o][k] = 0;
    got[0] = 0; got[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      for (int p = 0; p < NPIX; p++) begin
        // light changes: sometimes a new level, sometimes darkness
        if ($urandom_range(0, 7) == 0) rate[p] = $urandom_range(40, 1000);
        if (b == 20 && p == 3) rate[p] = 0;
        if (b == 30 && p == 3) rate[p] = 500;
        seq_bits = gen_bits(p);
        seq_slot = 2'(p);
        seq_pix  = PIX_W'(p + 100);
        ref_batch(p, seq_bits);
        // drive on the falling edge so the module samples stable inputs
        @(negedge clk);
        while (seq_ready != 2'b11) @(negedge clk);
        seq_valid = 1;
        t0 = cyc;
        @(negedge clk);
        seq_valid = 0;
        while (seq_ready != 2'b11) @(negedge clk);
        t1 = cyc;
        // unstalled cost must stay near one frame per clock
        checks++;
        if (t1 - t0 > 3 * B + 10) begin
          failures++;
          $display("FAIL pixel took %0d cycles", t1 - t0);
        end
      end
    end
    // drain
    repeat (50) @(posedge clk);
    for (int o = 0; o < 2; o++) begin
      pending = 0;
      for (int p = 0; p < NPIX; p++) pending += exp_q[o][p].size();
      checks++;
      if (pending != 0) begin
        failures++;
        $display("FAIL order%0d: %0d expected records never emitted", o == 0 ? 2 : 1, pending);
      end
      checks += 3;
      if (nf[o] != 16'(exp_brk[o][0]) || ns[o] != 16'(exp_brk[o][1]) || nc[o] != 16'(exp_brk[o][2])) begin
        failures++;
        $display("FAIL order%0d break counters %0d/%0d/%0d exp %0d/%0d/%0d", o == 0 ? 2 : 1,
                 nf[o], ns[o], nc[o], exp_brk[o][0], exp_brk[o][1], exp_brk[o][2]);
      end
    end
    $display("records: SSR %0d FSR %0d; SSR breaks fsr=%0d ssr=%0d cap=%0d", got[0], got[1], nf[0], ns[0], nc[0]);
    checks++;
    if (ns[0] == 0 || nc[0] == 0 || got[0] <= got[1] - 1000) begin
      failures++;
      $display("FAIL: stimulus did not exercise SSR and duration-cap breaks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

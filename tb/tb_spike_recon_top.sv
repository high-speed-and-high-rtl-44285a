// tb_spike_recon_top -- end-to-end test of the reconstruction engine at reduced size.
//
// A 16x10 image is generated by integrate-and-fire pixels whose light level changes at
// random times, with occasional noise spikes, one fully lit pixel (interval 1, so
// segments reach the 255-frame limit) and one pixel that goes dark (255-frame
// intervals). Two engines see the same frames:
//
//  A  paced input (one frame per PERIOD clocks), LAG = 600 frames, 128-record rings,
//     8 pixels per stability module (one full reader of 16 modules and a last reader of
//     4 modules with 4 lanes each). A reference that knows nothing of the RTL segments
//     every pixel's stream with the second-order stability rules, and every output pixel
//     of every finished frame must equal the intensity of the segment covering it. The
//     batch time must stay below 32 frame periods and the output must keep pace with
//     the input.
//  B  input at full rate, LAG = 40, 2-record rings, 10 pixels per module. It must show
//     the engine's protective mechanisms: batch overruns, dropped records and frames
//     shown before their record exists.
//
// Each mechanism (first-order break, second-order break, 255-frame cap, ping-pong batch
// swap, overrun, record drop, underrun) is counted, and one that never occurs fails.
module tb_spike_recon_top;
  import ssr_pkg::*;
  localparam int IW = 16, IH = 10, NP = IW * IH, WPF = NP / 16, NFR = 800, PERIOD = 100;
  localparam int LAG_A = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- stimulus ----------------
  logic [NP-1:0] frames [NFR];

  task automatic gen_frames();
    int acc [NP];
    int rate [NP];
    for (int p = 0; p < NP; p++) begin acc[p] = 0; rate[p] = $urandom_range(60, 900); end
    rate[5] = 1000;                       // lit every frame
    for (int f = 0; f < NFR; f++) begin
      if (f == 100) rate[9] = 0;          // goes dark
      if (f == 500) rate[9] = 300;
      for (int p = 0; p < NP; p++) begin
        if (p != 5 && p != 9 && $urandom_range(0, 149) == 0) rate[p] = $urandom_range(60, 900);
        acc[p] += rate[p];
        frames[f][p] = 1'b0;
        if (acc[p] >= 1000) begin acc[p] -= 1000; frames[f][p] = 1'b1; end
        if (p != 5 && p != 9 && $urandom_range(0, 399) == 0) frames[f][p] = ~frames[f][p];
      end
    end
  endtask

  // ---------------- reference (second-order stability segmentation) ----------------
  logic [7:0] timeline [NP][NFR];
  int         covered  [NP];        // frames covered by closed segments
  int         ref_brk [3];

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

  task automatic ref_pixel(int p);
    int seg[$];
    int trial[$];
    int gap, sum;
    gap = 0;
    covered[p] = 0;
    for (int f = 0; f < NFR; f++) begin
      int g;
      g = gap + 1;
      if (frames[f][p] || g == 255) begin
        gap = 0;
        if (seg.size() == 0) seg.push_back(g);
        else begin
          bit fo, so, c;
          trial = seg;
          trial.push_back(g);
          sum = 0;
          foreach (seg[i]) sum += seg[i];
          fo = zo_ok(trial);
          so = so_ok(trial);
          c  = (sum + g) <= 255;
          if (fo && so && c) seg.push_back(g);
          else begin
            int inten;
            inten = (255 * seg.size()) / sum;
            for (int k = 0; k < sum; k++)
              if (covered[p] + k < NFR) timeline[p][covered[p] + k] = 8'(inten);
            covered[p] += sum;
            if (!fo) ref_brk[0]++; else if (!so) ref_brk[1]++; else ref_brk[2]++;
            seg.delete();
            seg.push_back(g);
          end
        end
      end else gap = g;
    end
  endtask

  // ---------------- engines ----------------
  logic                 a_valid, b_valid;
  logic [15:0]          a_data, b_data;
  logic                 a_pv, b_pv, a_sof, b_sof, a_eol, b_eol;
  logic                 a_pr, b_pr;
  logic [7:0][7:0]      a_pd, b_pd;
  recon_status_t        a_st, b_st;

  spike_recon_top #(.IMG_W(IW), .IMG_H(IH), .PIX_PER_MOD(8), .LAG(LAG_A), .DEPTH(128)) u_a (
    .clk, .rst_n, .spk_valid(a_valid), .spk_data(a_data),
    .pix_valid(a_pv), .pix_ready(a_pr), .pix_data(a_pd), .pix_sof(a_sof), .pix_eol(a_eol),
    .status(a_st));

  spike_recon_top #(.IMG_W(IW), .IMG_H(IH), .PIX_PER_MOD(10), .LAG(40), .DEPTH(2)) u_b (
    .clk, .rst_n, .spk_valid(b_valid), .spk_data(b_data),
    .pix_valid(b_pv), .pix_ready(b_pr), .pix_data(b_pd), .pix_sof(b_sof), .pix_eol(b_eol),
    .status(b_st));

  always @(negedge clk) begin
    a_pr <= ($urandom_range(0, 9) != 0);
    b_pr <= 1'b1;
  end

  // ---------------- output checking (engine A) ----------------
  int a_frame = -1, a_word = 0, a_checked = 0, b_frames = 0;
  int last_out_cyc = 0, max_out_gap = 0, cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (a_pv && a_pr) begin
      if (a_sof) begin
        if (a_frame >= 0) begin
          checks++;
          if (a_word != NP / 8) begin failures++; $display("FAIL frame %0d had %0d words", a_frame, a_word); end
        end
        a_frame++;
        a_word = 0;
        if (a_frame > 2 && cyc - last_out_cyc > max_out_gap) max_out_gap = cyc - last_out_cyc;
        last_out_cyc = cyc;
      end
      checks++;
      if (a_eol != (a_word % (IW / 8) == IW / 8 - 1)) begin failures++; $display("FAIL eol"); end
      for (int d = 0; d < 8; d++) begin
        int p;
        p = a_word * 8 + d;
        if (a_frame < covered[p]) begin
          checks++;
          a_checked++;
          if (a_pd[d] != timeline[p][a_frame]) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d pixel %0d got %0d exp %0d", a_frame, p, a_pd[d], timeline[p][a_frame]);
          end
        end
      end
      a_word++;
    end
    if (b_pv && b_pr && b_sof) b_frames++;
  end

  // ---------------- drive ----------------
  initial begin
    #20_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_valid = 0; a_data = '0;
    b_valid = 0; b_data = '0;
    for (int k = 0; k < 3; k++) ref_brk[k] = 0;
    gen_frames();
    for (int p = 0; p < NP; p++) ref_pixel(p);
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      // engine A: one frame every PERIOD clocks
      for (int f = 0; f < NFR; f++) begin
        for (int w = 0; w < WPF; w++) begin
          @(negedge clk);
          a_valid = 1;
          a_data  = frames[f][w * 16 +: 16];
        end
        @(negedge clk) a_valid = 0;
        repeat (PERIOD - WPF - 1) @(negedge clk);
      end
      // engine B: back-to-back frames
      for (int f = 0; f < NFR; f++)
        for (int w = 0; w < WPF; w++) begin
          @(negedge clk);
          b_valid = 1;
          b_data  = frames[f][w * 16 +: 16];
          if (f == NFR - 1 && w == WPF - 1) begin @(negedge clk) b_valid = 0; end
        end
    join
    repeat (3 * PERIOD) @(negedge clk);

    $display("A: frames in %0d out %0d checked pixels %0d; breaks fsr %0d ssr %0d cap %0d (ref %0d/%0d/%0d)",
             a_st.frames_in, a_st.frames_out, a_checked, a_st.n_break_fsr, a_st.n_break_ssr, a_st.n_break_cap,
             ref_brk[0], ref_brk[1], ref_brk[2]);
    $display("A: batches %0d last batch %0d clocks, overruns %0d drops %0d underruns %0d, max output frame gap %0d",
             a_st.batches, a_st.last_batch_cycles, a_st.overrun_cnt, a_st.rec_drop_cnt, a_st.underrun_cnt, max_out_gap);
    $display("B: batches %0d overruns %0d drops %0d underruns %0d frames out %0d",
             b_st.batches, b_st.overrun_cnt, b_st.rec_drop_cnt, b_st.underrun_cnt, b_frames);

    // engine A: clean run
    checks++;
    if (a_checked < 100 * NP) begin failures++; $display("FAIL too few pixels checked"); end
    checks++;
    if (a_st.overrun_cnt != 0 || a_st.rec_drop_cnt != 0 || a_st.underrun_cnt != 0) begin
      failures++; $display("FAIL engine A was not clean");
    end
    checks++;   // the closed segments seen by the engine cannot exceed the reference's
    if (a_st.n_break_fsr > 32'(ref_brk[0]) || a_st.n_break_ssr > 32'(ref_brk[1]) || a_st.n_break_cap > 32'(ref_brk[2])) begin
      failures++; $display("FAIL break counts above reference");
    end
    checks++;   // deadline: a batch is read within 32 frame periods
    if (a_st.last_batch_cycles == 0 || a_st.last_batch_cycles > 32'(32 * PERIOD)) begin
      failures++; $display("FAIL batch time %0d", a_st.last_batch_cycles);
    end
    checks++;   // the output keeps the input's frame rate
    if (max_out_gap > PERIOD + PERIOD / 2) begin failures++; $display("FAIL output frame gap %0d", max_out_gap); end
    checks++;
    if (a_st.frames_out != 32'(a_frame + 1)) begin failures++; $display("FAIL frames_out"); end

    // mechanisms
    checks++; if (a_st.n_break_fsr == 0) begin failures++; $display("FAIL no first-order break"); end
    checks++; if (a_st.n_break_ssr == 0) begin failures++; $display("FAIL no second-order break"); end
    checks++; if (a_st.n_break_cap == 0) begin failures++; $display("FAIL no 255-frame cap"); end
    checks++; if (a_st.batches < 3) begin failures++; $display("FAIL too few batch swaps"); end
    checks++; if (b_st.overrun_cnt == 0) begin failures++; $display("FAIL no overrun"); end
    checks++; if (b_st.rec_drop_cnt == 0) begin failures++; $display("FAIL no record drop"); end
    checks++; if (b_st.underrun_cnt == 0) begin failures++; $display("FAIL no underrun"); end
    checks++; if (b_frames == 0) begin failures++; $display("FAIL engine B produced no frame"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rec_writer -- per-pixel record rings: order, full-ring drops, two read ports.
//
// 64-pixel image, 4 writers, rings of 4 records; this writer gets pixels p mod 4 = 1.
// Rounds of random writes (some pixels overfilled so records are dropped and counted)
// are followed by both read ports reading and popping every pixel of their bank until
// empty; each head record must be the oldest unread one kept by a queue model.
module tb_rec_writer;
  import ssr_pkg::*;
  localparam int NP = 64, NWR = 4, D = 4, NU = NP / (2 * NWR);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  pix_rec_t in_rec = '0;
  logic [1:0] rd_en = '0, rd_avail, pop = '0;
  logic [1:0][2:0] rd_u = '0, pop_u = '0;
  enc_rec_t [1:0] rd_rec;
  logic init_done;
  logic [15:0] drop_cnt;

  rec_writer #(.NPIX(NP), .N_WR(NWR), .DEPTH(D)) dut (.*);

  enc_rec_t model [2][NU][$];
  int drops = 0;

  initial begin
    #500_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_rec(int p);
    int b, u;
    @(negedge clk);
    in_valid   = 1;
    in_rec.pix = PIX_W'(p);
    in_rec.rec = 16'($urandom);
    b = (p / NWR) % 2;
    u = p / (2 * NWR);
    if (model[b][u].size() < D) model[b][u].push_back(in_rec.rec);
    else drops++;
    @(negedge clk);
    in_valid = 0;
  endtask

  // drain one bank through its port, checking order
  task automatic drain(int b);
    for (int u = 0; u < NU; u++) begin
      forever begin
        @(negedge clk);
        rd_en[b] = 1; rd_u[b] = 3'(u);
        @(negedge clk);
        rd_en[b] = 0;
        checks++;
        if (rd_avail[b] != (model[b][u].size() > 0)) begin
          failures++; $display("FAIL avail b%0d u%0d", b, u);
          break;
        end
        if (!rd_avail[b]) break;
        checks++;
        if (rd_rec[b] != model[b][u][0]) begin failures++; $display("FAIL order b%0d u%0d", b, u); end
        void'(model[b][u].pop_front());
        pop[b] = 1; pop_u[b] = 3'(u);
        @(negedge clk);
        pop[b] = 0;
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!init_done) @(posedge clk);
    for (int round = 0; round < 3; round++) begin
      repeat (60) write_rec(NWR * $urandom_range(0, NP / NWR - 1) + 1);
      fork
        drain(0);
        drain(1);
      join
    end
    checks++;
    if (drop_cnt != 16'(drops) || drops == 0) begin failures++; $display("FAIL drops %0d exp %0d", drop_cnt, drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

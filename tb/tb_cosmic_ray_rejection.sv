// tb_cosmic_ray_rejection: two interleaved detectors with random samples and flagged
// pulse intervals. Every output is compared with a software model: outside a pulse the
// sample passes unchanged and enters an 8-sample boxcar; inside a pulse it is replaced
// by the boxcar average (sum >>> 3) and out_infill is set.
module tb_cosmic_ray_rejection;
  import kid_pkg::*;
  localparam int NT = 2, MA = 8, NS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_sof = 0, in_in_pulse = 0;
  det_sample_t in_sample = '0;
  logic out_valid, out_sof, out_infill;
  det_sample_t out_sample;

  cosmic_ray_rejection #(.NTONES(NT), .MA_LEN(MA)) dut (.*);

  longint hi [NT][$], hq [NT][$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ninfill = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NS; n++)
      for (int k = 0; k < NT; k++) begin
        longint i, q, ei, eq, si, sq;
        bit pulse;
        i = longint'($urandom_range(0, 2000000)) - 1000000;
        q = longint'($urandom_range(0, 2000000)) - 1000000;
        pulse = (n > 3) && ((n + 7 * k) % 40 < 6);
        if (pulse) begin
          si = 0; sq = 0;
          foreach (hi[k][j]) begin si += hi[k][j]; sq += hq[k][j]; end
          ei = si >>> 3; eq = sq >>> 3;
          i = i + 5000000;   // the hit itself, which must not come through
        end else begin
          ei = i; eq = q;
          if (hi[k].size() == 0) for (int j = 0; j < MA; j++) begin hi[k].push_back(i); hq[k].push_back(q); end
          else begin
            void'(hi[k].pop_front()); void'(hq[k].pop_front());
            hi[k].push_back(i); hq[k].push_back(q);
          end
        end
        in_valid = 1; in_sof = (k == 0); in_in_pulse = pulse; in_sample.tone = TONE_W'(k);
        in_sample.i = DW'(i); in_sample.q = DW'(q);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || out_infill != pulse || longint'(out_sample.i) != ei || longint'(out_sample.q) != eq
            || out_sample.tone != TONE_W'(k) || out_sof != (k == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d k=%0d got %0d want %0d", n, k, out_sample.i, ei);
        end
        if (out_infill) ninfill++;
      end
    checks++;
    if (ninfill == 0) begin failures++; $display("FAIL no infill"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

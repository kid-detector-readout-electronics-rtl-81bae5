// tb_vector_accumulate: three interleaved detectors with random samples; checks that a
// REC_VECTOR record leaves for every tone at the last frame of each 2^acc_log2-frame
// window, holding the window's I and Q sums >>> acc_log2, and nothing in between.
// Runs with acc_log2 = 2 and then 0 (every sample passes through).
module tb_vector_accumulate;
  import kid_pkg::*;
  localparam int NT = 3, NFR = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] acc_log2 = 4'd2;
  logic in_valid = 0, in_sof = 0;
  det_sample_t in_sample = '0;
  logic rec_valid;
  record_t rec;

  vector_accumulate #(.NTONES(NT)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int lg);
    longint si [NT], sq [NT];
    int nrec = 0;
    acc_log2 = 4'(lg);
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < NT; k++) begin
        longint i, q;
        bit last;
        i = longint'($urandom_range(0, 2000000)) - 1000000;
        q = longint'($urandom_range(0, 2000000)) - 1000000;
        if (f % (1 << lg) == 0) begin si[k] = 0; sq[k] = 0; end
        si[k] += i; sq[k] += q;
        last = (f % (1 << lg)) == (1 << lg) - 1;
        in_valid = 1; in_sof = (k == 0); in_sample.tone = TONE_W'(k);
        in_sample.i = DW'(i); in_sample.q = DW'(q);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (rec_valid != last || (last && (rec.typ != REC_VECTOR || rec.tone != TONE_W'(k)
            || rec.data != {DW'(si[k] >>> lg), DW'(sq[k] >>> lg)}))) begin
          failures++;
          $display("FAIL lg=%0d f=%0d k=%0d valid=%0d", lg, f, k, rec_valid);
        end
        if (rec_valid) nrec++;
      end
    checks++;
    if (nrec != NT * (NFR >> lg)) begin failures++; $display("FAIL records %0d", nrec); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(2);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

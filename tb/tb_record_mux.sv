// tb_record_mux: three producers push records, sometimes in the same clock, while the
// consumer accepts at random. Checks that every record comes out once, in order within
// each producer, that pulse records win over power and power over vector records when
// several wait (unless a record already offered is being held), and that records pushed into a full queue are dropped and counted.
module tb_record_mux;
  import kid_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pulse_valid = 0, power_valid = 0, vector_valid = 0, out_ready = 0;
  record_t pulse_rec = '0, power_rec = '0, vector_rec = '0;
  logic out_valid;
  record_t out_rec;
  logic [15:0] drops [3];

  record_mux #(.PULSE_DEPTH(4), .POWER_DEPTH(8), .VECTOR_DEPTH(8)) dut (.*);

  record_t exp_q [3][$];
  int sent [3], got [3], dropped [3];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic record_t mk(input int s, input int n);
    record_t r;
    r.typ = (s == 0) ? REC_PULSE : (s == 1) ? REC_POWER : REC_VECTOR;
    r.tone = TONE_W'(n);
    r.data = 48'($urandom);
    return r;
  endfunction

  // consumer side, sampled before the clock edge
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int s;
    s = (out_rec.typ == REC_PULSE) ? 0 : (out_rec.typ == REC_POWER) ? 1 : 2;
    checks++;
    if (exp_q[s].size() == 0 || out_rec != exp_q[s][0]) begin
      failures++; $display("FAIL order source %0d", s);
    end else void'(exp_q[s].pop_front());
    // priority: nothing of a higher-priority source may be waiting in its queue
    for (int h = 0; h < s; h++) if (!dut.empty[h] && !dut.holding) begin
      failures++; $display("FAIL priority %0d over %0d", s, h);
    end
    got[s]++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(posedge clk); #1;
      pulse_valid = 0; power_valid = 0; vector_valid = 0;
      out_ready = (c < 300) ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 1) == 0);
      if (c < 1500) begin
        if ($urandom_range(0, 3) == 0) begin
          pulse_valid = 1; pulse_rec = mk(0, sent[0]);
          if (dut.full[0]) dropped[0]++; else exp_q[0].push_back(pulse_rec);
          sent[0]++;
        end
        if ($urandom_range(0, 2) == 0) begin
          power_valid = 1; power_rec = mk(1, sent[1]);
          if (dut.full[1]) dropped[1]++; else exp_q[1].push_back(power_rec);
          sent[1]++;
        end
        if ($urandom_range(0, 1) == 0) begin
          vector_valid = 1; vector_rec = mk(2, sent[2]);
          if (dut.full[2]) dropped[2]++; else exp_q[2].push_back(vector_rec);
          sent[2]++;
        end
      end
    end
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (int'(drops[s]) != dropped[s] || got[s] + dropped[s] != sent[s] || exp_q[s].size() != 0) begin
        failures++; $display("FAIL source %0d sent %0d got %0d dropped %0d/%0d", s, sent[s], got[s], dropped[s], drops[s]);
      end
    end
    checks++;
    if (dropped[0] == 0 || dropped[2] == 0) begin failures++; $display("FAIL no overflow exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

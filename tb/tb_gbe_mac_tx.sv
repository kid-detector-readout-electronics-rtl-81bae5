// tb_gbe_mac_tx: offers bursts of records to the transmitter with an irregular byte
// clock and decodes every frame from txd/tx_en: preamble and start delimiter, MAC
// addresses, EtherType, incrementing sequence number, the records in order, zero
// padding to the 46-byte minimum payload, at most MAX_RECS records per frame, the
// CRC-32 frame check sequence (computed bit by bit here) and a gap of at least 12
// byte times between frames.
module tb_gbe_mac_tx;
  import kid_pkg::*;
  localparam int MAXR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic byte_en = 0, in_valid = 0, in_ready, tx_en;
  record_t in_rec = '0;
  logic [7:0] txd;
  logic [15:0] frames_sent;

  gbe_mac_tx #(.MAX_RECS(MAXR)) dut (.*);

  record_t src [$];
  record_t exp_q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record source: first-word fall-through queue
  always @(posedge clk) if (in_ready) void'(src.pop_front());
  always @(negedge clk) begin
    in_valid = src.size() > 0;
    in_rec = in_valid ? src[0] : '0;
    byte_en = $urandom_range(0, 2) != 0;
  end

  function automatic logic [31:0] crc_bits(input byte unsigned b [$]);
    logic [31:0] c = 32'hffffffff;
    foreach (b[i]) for (int k = 0; k < 8; k++) begin
      logic bit_in;
      bit_in = b[i][k] ^ c[0];
      c = c >> 1;
      if (bit_in) c = c ^ 32'hEDB88320;
    end
    return ~c;
  endfunction

  // frame decoder
  byte unsigned fb [$];
  int nframes = 0, gap = 100, seq = 0, nrec_tot = 0;
  logic prev_en = 0;
  always @(posedge clk) if (rst_n && byte_en) begin
    if (tx_en) begin
      if (!prev_en) begin
        checks++;
        if (gap < 12) begin failures++; $display("FAIL gap %0d", gap); end
      end
      fb.push_back(txd);
      gap = 0;
    end else begin
      if (prev_en) check_frame();
      gap++;
    end
    prev_en = tx_en;
  end

  task automatic check_frame();
    byte unsigned body [$];
    int nr, plen;
    logic [31:0] fcs;
    checks++;
    for (int i = 0; i < 7; i++) if (fb[i] != 8'h55) begin failures++; $display("FAIL preamble"); end
    if (fb[7] != 8'hD5) begin failures++; $display("FAIL sfd"); end
    body = fb[8:fb.size()-5];
    fcs = {fb[fb.size()-1], fb[fb.size()-2], fb[fb.size()-3], fb[fb.size()-4]};
    checks++;
    if (fcs != crc_bits(body)) begin failures++; $display("FAIL fcs %h want %h", fcs, crc_bits(body)); end
    checks++;
    if ({body[0],body[1],body[2],body[3],body[4],body[5]} != 48'h020000000001 ||
        {body[6],body[7],body[8],body[9],body[10],body[11]} != 48'h020000000002 ||
        {body[12], body[13]} != 16'h88B5 || {body[14], body[15]} != 16'(seq)) begin
      failures++; $display("FAIL header");
    end
    plen = body.size() - 14;
    checks++;
    if (plen < 46) begin failures++; $display("FAIL short payload %0d", plen); end
    nr = 0;
    for (int p = 16; p + 8 <= body.size() && body[p][7:4] != 0; p += 8) begin
      record_t r;
      r = {body[p], body[p+1], body[p+2], body[p+3], body[p+4], body[p+5], body[p+6], body[p+7]};
      checks++;
      if (exp_q.size() == 0 || r != exp_q[0]) begin failures++; $display("FAIL record %0d", nr); end
      else void'(exp_q.pop_front());
      nr++;
    end
    for (int p = 16 + 8 * nr; p < body.size(); p++) if (body[p] != 0) begin failures++; $display("FAIL pad"); break; end
    checks++;
    if (nr < 1 || nr > MAXR) begin failures++; $display("FAIL record count %0d", nr); end
    nrec_tot += nr;
    seq++; nframes++;
    fb.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int burst = 0; burst < 12; burst++) begin
      int n;
      n = (burst == 0) ? 1 : $urandom_range(1, 11);
      for (int i = 0; i < n; i++) begin
        record_t r;
        r.typ = rec_type_e'($urandom_range(1, 3));
        r.tone = TONE_W'($urandom);
        r.data = {16'($urandom), 32'($urandom)};
        src.push_back(r); exp_q.push_back(r);
      end
      repeat ($urandom_range(50, 600)) @(posedge clk);
    end
    wait (src.size() == 0);
    repeat (400) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || int'(frames_sent) != nframes) begin
      failures++; $display("FAIL left %0d frames %0d/%0d", exp_q.size(), frames_sent, nframes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

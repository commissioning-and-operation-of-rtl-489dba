// tb_adc_deser: checks the ADC deserialiser's word alignment and data path.
//
// A serial ADC model sends 14-bit frames MSB first, starting at a bit offset
// of SKEW bit clocks from the deserialiser's frame counter. First the model
// sends a fixed test pattern while the bench scans all 14 slip settings: the
// agreement counters must report full agreement for exactly the slip that
// matches the skew, (SKEW+13) mod 14, and none elsewhere. Then random samples
// are sent at that slip and every word seen at the sample-clock phase must
// reproduce the sent samples in order, with one fixed latency.
module tb_adc_deser;
  localparam int W = 14;
  localparam int SKEW = 5;
  localparam logic [W-1:0] PAT = 14'h1CB5;

  logic clk_bit = 0, rst = 1, sdata = 0, clear_stats = 0;
  logic [3:0] slip = 0;
  logic [W-1:0] word;
  logic [15:0] n_words, n_match;
  int checks = 0, failures = 0;

  adc_deser #(.W(W)) dut (.clk_bit, .rst, .sdata, .slip, .test_pattern(PAT),
                          .clear_stats, .word, .n_words, .n_match);

  always #1 clk_bit = ~clk_bit;

  // serial model: bit n of the stream (n counted from reset release)
  int unsigned n = 0;
  logic [W-1:0] frames [$];
  logic [W-1:0] cur;
  bit use_pat = 1;

  function automatic logic [W-1:0] rotl(logic [W-1:0] v, int r);
    return W'((v << r) | (v >> (W - r)));
  endfunction

  always @(negedge clk_bit) if (!rst) begin
    int pos;
    pos = (int'(n) - SKEW) % W;
    if (pos < 0) pos += W;
    if (pos == 0) begin
      cur = use_pat ? PAT : W'($urandom);
      frames.push_back(cur);
    end
    sdata = (int'(n) < SKEW) ? 1'b0 : cur[W-1-pos];
    n++;
  end

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int good;
    int lat;
    logic [W-1:0] sent [$];
    good = (SKEW + W - 1) % W;
    // the pattern must differ from all its rotations for the scan to mean anything
    for (int r = 1; r < W; r++) if (rotl(PAT, r) == PAT) $fatal(1, "periodic pattern");
    @(negedge clk_bit); @(negedge clk_bit);
    rst = 0;
    for (int s = 0; s < W; s++) begin
      slip = 4'(s);
      clear_stats = 1;
      repeat (3) @(negedge clk_bit);
      clear_stats = 0;
      repeat (W * 20) @(negedge clk_bit);
      checks++;
      if (n_words < 18) begin failures++; $display("slip %0d: only %0d words", s, n_words); end
      checks++;
      if (s == good && n_match != n_words) begin
        failures++; $display("slip %0d (aligned): %0d of %0d match", s, n_match, n_words);
      end else if (s != good && n_match != 0) begin
        failures++; $display("slip %0d: %0d unexpected matches", s, n_match);
      end
    end
    // data path at the aligned slip
    slip = 4'(good);
    use_pat = 0;
    repeat (W * 4) @(negedge clk_bit);
    frames.delete();
    // sample 'word' at the sample-clock phase (counter 0) for 60 frames
    for (int f = 0; f < 60; f++) begin
      do @(posedge clk_bit); while ((n % W) != 0);
      #0.1 sent.push_back(word);
    end
    // find the latency from the first observed word, then all must follow
    lat = -1;
    for (int k = 0; k < 10 && k < frames.size(); k++)
      if (frames[k] == sent[3]) begin lat = k - 3; break; end
    checks++;
    if (lat < -3) begin failures++; $display("no latency found"); end
    else
      for (int i = 3; i < 55; i++) begin
        checks++;
        if (i + lat >= frames.size() || sent[i] != frames[i + lat]) begin
          failures++;
          $display("word %0d: got %h", i, sent[i]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

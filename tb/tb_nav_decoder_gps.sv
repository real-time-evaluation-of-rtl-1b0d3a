// tb_nav_decoder_gps: checks bit sync, frame sync, parity and ephemeris flag.
//
// The testbench encodes eight subframes (IDs 1..5, 1..3) of random data with the
// TLM preamble and the GPS (32,26) parity, written here as a table of the
// data bits each parity bit covers, sends each data bit as 20 prompt signs
// of inverted polarity starting mid-bit, with a few isolated sign errors,
// and checks: bit sync is found; every word after frame sync equals the
// sent word (polarity corrected) and passes parity; one word corrupted on
// purpose fails parity; the subframe IDs are reported; `eph_valid` rises
// after subframe 3 and not before.
module tb_nav_decoder_gps;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, ms_valid, ip_neg, bit_sync, bit_valid, bit_val, frame_sync, word_valid, word_ok, eph_valid;
  logic [29:0] word;
  logic [3:0] word_idx;
  logic [2:0] subframe_id;

  nav_decoder_gps #(.SYNC_TH(8)) dut (.*);

  // parity coverage: for parity bit j (D25..D30), the data bits d1..d24 it
  // covers, then whether it uses D29* (1) or D30* (0)
  int cov [6][15] = '{
    '{1, 2, 3, 5, 6, 10, 11, 12, 13, 14, 17, 18, 20, 23, 0},
    '{2, 3, 4, 6, 7, 11, 12, 13, 14, 15, 18, 19, 21, 24, 0},
    '{1, 3, 4, 5, 7, 8, 12, 13, 14, 15, 16, 19, 20, 22, 0},
    '{2, 4, 5, 6, 8, 9, 13, 14, 15, 16, 17, 20, 21, 23, 0},
    '{1, 3, 5, 6, 7, 9, 10, 14, 15, 16, 17, 18, 21, 22, 24},
    '{3, 5, 6, 8, 9, 10, 11, 13, 15, 19, 22, 23, 24, 0, 0}};
  bit use29 [6] = '{1, 0, 1, 0, 0, 1};

  bit stream [2400];        // transmitted bits D1..D30 of 80 words
  bit tx_word [80][30];

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int wcount = 0, wbad = 0, wnotok = 0, sf_ids [$];
  int first_word = -1;
  int eph_at = -1;
  always @(posedge clk) begin
    if (word_valid) begin
      int k;
      bit exp_ok;
      if (first_word < 0) begin
        // the decoder starts at the first TLM it can see: find which one
        for (int t = 0; t < 80; t += 10) begin
          bit same;
          same = 1;
          for (int b = 0; b < 30; b++) if (word[29 - b] != tx_word[t][b]) same = 0;
          if (same && first_word < 0) first_word = t;
        end
        if (first_word < 0) first_word = 99;
        wcount = first_word;
      end
      k = wcount;
      for (int b = 0; b < 30; b++) if (word[29 - b] != tx_word[k][b]) begin wbad++; break; end
      exp_ok = (k != 37);
      if (word_ok != exp_ok) wnotok++;
      if (word_idx == 4'd1 && word_ok) sf_ids.push_back(int'(word[10:8] ^ {3{tx_word[k - 1][29]}}));  // d = D xor D30*
      wcount++;
    end
    if (eph_valid && eph_at < 0) eph_at = wcount;
  end

  initial begin
    bit d29s, d30s;
    int nb;
    clear = 0; ms_valid = 0; ip_neg = 0;
    d29s = 0; d30s = 0; nb = 0;
    for (int sf = 1; sf <= 8; sf++) begin
      int id;
      id = (sf - 1) % 5 + 1;
      for (int w = 0; w < 10; w++) begin
        bit d [25];
        bit D [31];
        for (int i = 1; i <= 24; i++) d[i] = bit'($urandom_range(1));
        if (w == 0) begin
          bit [7:0] pre = 8'b1000_1011;
          for (int i = 1; i <= 8; i++) d[i] = pre[8 - i];
        end
        if (w == 1) begin
          d[20] = id[2]; d[21] = id[1]; d[22] = id[0];
        end
        // words 2 and 10 of a subframe: pick d23, d24 so that D29 = D30 = 0,
        // as the signal does, so the next word is sent un-inverted
        for (int tt = 0; tt < 4; tt++) begin
          if (w == 1 || w == 9) begin d[23] = tt[1]; d[24] = tt[0]; end
          for (int i = 1; i <= 24; i++) D[i] = d[i] ^ d30s;
          for (int j = 0; j < 6; j++) begin
            bit p;
            p = use29[j] ? d29s : d30s;
            for (int t = 0; t < 15; t++) if (cov[j][t] != 0) p ^= d[cov[j][t]];
            D[25 + j] = p;
          end
          if (!(w == 1 || w == 9) || (D[29] == 0 && D[30] == 0)) break;
        end
        for (int i = 1; i <= 30; i++) begin
          tx_word[(sf - 1) * 10 + w][i - 1] = D[i];
          stream[nb++] = D[i];
        end
        d29s = D[29]; d30s = D[30];
      end
    end
    // corrupt one data bit of word 37 after parity was formed
    stream[37 * 30 + 4] ^= 1'b1;
    tx_word[37][4] ^= 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // prompt signs: inverted polarity, start 7 ms into the first bit,
    // a sign error every 97 ms
    for (int ms = 7; ms < 2400 * 20; ms++) begin
      @(negedge clk);
      ms_valid = 1;
      ip_neg = !stream[ms / 20];          // inverted: bit 1 sent as positive
      if (ms % 97 == 50) ip_neg = !ip_neg;
      @(negedge clk);
      ms_valid = 0;
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (!bit_sync) begin failures++; $display("FAIL no bit sync"); end
    checks++;
    if (first_word < 0 || first_word > 20) begin failures++; $display("FAIL frame sync late: word %0d", first_word); end
    // the decoder's word numbering starts at the first TLM it found:
    // re-index the monitor if needed
    checks++;
    if (wcount < 75) begin failures++; $display("FAIL only %0d words", wcount); end
    checks++;
    if (wbad != 0) begin failures++; $display("FAIL %0d words differ", wbad); end
    checks++;
    if (wnotok != 0) begin failures++; $display("FAIL %0d parity flags wrong", wnotok); end
    checks++;
    if (sf_ids.size() < 3 || sf_ids[0] != first_word / 10 + 1 || sf_ids[1] != first_word / 10 + 2) begin
      failures++; $display("FAIL subframe ids %p", sf_ids);
    end
    checks++;
    if (eph_at < ((first_word == 0) ? 22 : 52) || eph_at > ((first_word == 0) ? 24 : 54)) begin failures++; $display("FAIL eph_valid at word %0d", eph_at); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

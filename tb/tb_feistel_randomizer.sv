// tb_feistel_randomizer: checks the randomizer against the reference Feistel
// network, checks that the reference inverse recovers every key (so the hash is
// a bijection), and that sequential keys of one table spread evenly over 64 EAL
// banks (no bank gets under half or over twice its share).
module tb_feistel_randomizer;
  import hotline_ref_pkg::*;

  logic [39:0] key, hash;
  int checks = 0, failures = 0;
  int bank_cnt[64];

  feistel_randomizer #(.W(40), .ROUNDS(4)) dut (.key_i(key), .hash_o(hash));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (bank_cnt[i]) bank_cnt[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      if (n < 2000) key = {$urandom(), 8'($urandom_range(0, 25))};
      else          key = ref_key(8'd3, 32'(n - 2000) * 7);
      #1;
      checks++;
      if (hash !== ref_hash(key)) begin
        failures++;
        if (failures < 5) $display("hash mismatch key=%h got=%h exp=%h", key, hash, ref_hash(key));
      end
      checks++;
      if (ref_unhash(hash) !== key) failures++;
      if (n >= 2000) bank_cnt[hash[5:0]]++;
    end
    for (int b = 0; b < 64; b++) begin
      checks++;
      if (bank_cnt[b] < 1000 / 64 / 2 || bank_cnt[b] > 1000 * 2 / 64) begin
        failures++;
        $display("bank %0d got %0d of 1000 keys", b, bank_cnt[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

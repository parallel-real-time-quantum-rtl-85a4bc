// tb_accum_pcie_packer -- checks the merging of three block streams into
// 64-bit words, at the paper's block sizes (581, 548, 519 bits).
//
// Phase 1: every 48 cycles all three channels deliver a random block at once,
// as the three extractors do, while the consumer accepts words on a random
// 75 % of cycles. The word stream must be the concatenation, LSB first, of
// the blocks in channel order 1, 2, 3 per period, nothing may be dropped,
// and a held word must not change (the module's own assertion).
// Phase 2 (after a reset): the consumer stalls while three block sets
// arrive. The gearbox takes channel 1's first block, the holding registers
// keep channel 2's and 3's first blocks and channel 1's second block, and
// everything else is dropped: drop counts 0/1/1 after the second set and
// 1/2/2 after the third, with the overflow flag set. When the consumer
// resumes, the words must carry those four kept blocks in round-robin order.
module tb_accum_pcie_packer;
  localparam int NCH = 3, MMAX = 581, OW = 64;
  localparam int unsigned MLEN [NCH] = '{581, 548, 519};

  logic clk = 1'b0, rst_n = 1'b0;
  logic blk_valid [NCH];
  logic [MMAX-1:0] blk_data [NCH];
  logic out_valid, out_ready = 1'b0, overflow;
  logic [OW-1:0] out_data;
  logic [15:0] drop_cnt [NCH];

  int checks = 0, failures = 0, words = 0, stalls = 0;
  bit exp_bits[$];

  accum_pcie_packer dut (.*);  // default: 3 channels of 581, 548, 519 bits, 64-bit words

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Word checker: a word is transferred at an edge with valid && ready.
  always @(posedge clk) begin
    if (rst_n && out_valid && !out_ready) stalls++;
    if (rst_n && out_valid && out_ready) begin
      automatic bit ok = 1'b1;
      checks++;
      if (exp_bits.size() < OW) begin
        failures++;
        $display("word %0d beyond expected data", words);
      end else begin
        for (int b = 0; b < OW; b++) if (out_data[b] !== exp_bits.pop_front()) ok = 1'b0;
        if (!ok) begin failures++; $display("word %0d mismatch", words); end
      end
      words++;
    end
  end

  function automatic logic [MMAX-1:0] rand_block(int len);
    logic [MMAX-1:0] v = '0;
    for (int b = 0; b < len; b++) v[b] = 1'($urandom_range(1, 0));
    return v;
  endfunction

  task automatic send_set(input bit expect_kept [NCH], inout logic [MMAX-1:0] kept [NCH]);
    for (int c = 0; c < NCH; c++) begin
      blk_valid[c] = 1'b1;
      blk_data[c]  = rand_block(MLEN[c]);
      if (expect_kept[c]) kept[c] = blk_data[c];
    end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) blk_valid[c] = 1'b0;
  endtask

  task automatic push_block(logic [MMAX-1:0] v, int len);
    for (int b = 0; b < len; b++) exp_bits.push_back(v[b]);
  endtask

  initial begin
    logic [MMAX-1:0] k1 [NCH], k2 [NCH], k3 [NCH];
    for (int c = 0; c < NCH; c++) begin blk_valid[c] = 1'b0; blk_data[c] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---------------- phase 1: streaming with random back-pressure
    fork
      begin
        for (int p = 0; p < 12; p++) begin
          for (int c = 0; c < NCH; c++) begin
            blk_valid[c] = 1'b1;
            blk_data[c]  = rand_block(MLEN[c]);
            push_block(blk_data[c], MLEN[c]);
          end
          @(negedge clk);
          for (int c = 0; c < NCH; c++) blk_valid[c] = 1'b0;
          repeat (47) @(negedge clk);
        end
      end
      begin
        for (int t = 0; t < 12 * 48 + 40; t++) begin
          out_ready = ($urandom_range(3, 0) != 0);
          @(negedge clk);
        end
        out_ready = 1'b1;
      end
    join
    repeat (20) @(negedge clk);
    checks += 3;
    if (exp_bits.size() >= OW) begin failures++; $display("stream stopped, %0d bits left", exp_bits.size()); end
    if (overflow) begin failures++; $display("unexpected overflow"); end
    for (int c = 0; c < NCH; c++) if (drop_cnt[c] != 0) begin failures++; $display("unexpected drop ch%0d", c); end
    if (stalls == 0) begin failures++; $display("no stall happened"); end
    // ---------------- phase 2: overflow under a stalled consumer
    rst_n = 1'b0;
    out_ready = 1'b0;
    exp_bits.delete();
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    send_set('{1'b1, 1'b1, 1'b1}, k1);
    repeat (4) @(negedge clk);
    send_set('{1'b1, 1'b0, 1'b0}, k2);
    repeat (4) @(negedge clk);
    checks += 2;
    if (!(drop_cnt[0] == 0 && drop_cnt[1] == 1 && drop_cnt[2] == 1)) begin
      failures++; $display("drops after set 2: %0d %0d %0d", drop_cnt[0], drop_cnt[1], drop_cnt[2]);
    end
    if (!overflow) begin failures++; $display("overflow flag not set"); end
    send_set('{1'b0, 1'b0, 1'b0}, k3);
    repeat (4) @(negedge clk);
    checks++;
    if (!(drop_cnt[0] == 1 && drop_cnt[1] == 2 && drop_cnt[2] == 2)) begin
      failures++; $display("drops after set 3: %0d %0d %0d", drop_cnt[0], drop_cnt[1], drop_cnt[2]);
    end
    push_block(k1[0], MLEN[0]);
    push_block(k1[1], MLEN[1]);
    push_block(k1[2], MLEN[2]);
    push_block(k2[0], MLEN[0]);
    words = 0;
    out_ready = 1'b1;
    repeat (60) @(negedge clk);
    checks++;
    if (words != (MLEN[0] * 2 + MLEN[1] + MLEN[2]) / OW) begin
      failures++; $display("phase 2 words %0d", words);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// accum_pcie_packer -- merges the random blocks of the parallel extractors
// into one stream of OUT_W-bit words for the PCI-E core ("Accum/PCIE").
//
// Each channel owns a one-block holding register. A block arriving on
// blk_valid[c] is stored there; if the register still holds an earlier block
// that has not been taken, the new block is dropped, drop_cnt[c] counts it
// and the sticky overflow flag is set. A round-robin arbiter moves pending
// blocks, one per cycle, into a bit-level gearbox of BUFW = M_MAX + OUT_W
// bits, where the M_LEN[c] valid bits (LSB first) are appended right after
// the bits already queued. The gearbox offers its lowest OUT_W bits on
// out_data whenever it holds at least OUT_W bits (out_valid) and drops them
// when out_ready accepts the word (valid/ready, AXI-stream style: data is
// stable while out_valid && !out_ready). A block is appended only if it fits
// after the word leaving in the same cycle. Bits stay in order and form one
// continuous stream; blocks are not padded, so a block may straddle words.
//
// At 240 MHz a 64-bit stream carries 15.36 Gbit/s, above the 8.25 Gbit/s the
// three extractors produce, so with out_ready held high nothing is dropped.
// The merging of the three paths into one PCI-E stream is the paper's; the
// holding registers, the arbitration, the word width and the drop policy
// are this design's choices.
module accum_pcie_packer #(
  parameter int unsigned NUM_CH = 3,
  parameter int unsigned M_MAX  = 581,
  parameter int unsigned M_LEN [NUM_CH] = '{581, 548, 519},
  parameter int unsigned OUT_W  = 64,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              blk_valid [NUM_CH],
  input  logic [M_MAX-1:0]  blk_data  [NUM_CH],
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  input  logic              out_ready,
  output logic              overflow,
  output logic [CNT_W-1:0]  drop_cnt  [NUM_CH]
);
  localparam int unsigned BUFW = M_MAX + OUT_W;
  localparam int unsigned CW   = $clog2(BUFW + 1);
  localparam int unsigned SW   = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  logic [M_MAX-1:0] hold_q [NUM_CH];
  logic             pend_q [NUM_CH];
  logic [BUFW-1:0]  buf_q;
  logic [CW-1:0]    cnt_q;
  logic [SW-1:0]    rr_q;

  logic             pop, load, found;
  logic [SW-1:0]    sel;
  logic [CW-1:0]    cnt_after;
  logic [BUFW-1:0]  buf_after, blk_ext;
  int unsigned      sel_len;

  assign out_valid = (int'(cnt_q) >= OUT_W);
  assign out_data  = buf_q[OUT_W-1:0];
  assign pop       = out_valid && out_ready;

  // Round-robin choice among pending channels, starting at rr_q.
  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < NUM_CH; k++) begin
      logic [SW-1:0] c;
      c = SW'((int'(rr_q) + k) % NUM_CH);
      if (!found && pend_q[c]) begin
        found = 1'b1;
        sel   = c;
      end
    end
  end

  always_comb begin
    sel_len   = M_LEN[sel];
    cnt_after = pop ? CW'(int'(cnt_q) - OUT_W) : cnt_q;
    buf_after = pop ? (buf_q >> OUT_W) : buf_q;
    load      = found && (int'(cnt_after) + sel_len <= BUFW);
    blk_ext   = '0;
    for (int b = 0; b < M_MAX; b++)
      if (b < sel_len) blk_ext[b] = hold_q[sel][b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      cnt_q <= '0;
      rr_q  <= '0;
    end else begin
      if (load) begin
        buf_q <= buf_after | (blk_ext << cnt_after);
        cnt_q <= CW'(int'(cnt_after) + sel_len);
        rr_q  <= (int'(sel) == NUM_CH - 1) ? '0 : sel + 1'b1;
      end else begin
        buf_q <= buf_after;
        cnt_q <= cnt_after;
      end
    end
  end

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic taken;
    assign taken = load && (int'(sel) == c);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hold_q[c]   <= '0;
        pend_q[c]   <= 1'b0;
        drop_cnt[c] <= '0;
      end else begin
        if (blk_valid[c] && (!pend_q[c] || taken)) begin
          hold_q[c] <= blk_data[c];
          pend_q[c] <= 1'b1;
        end else begin
          if (taken) pend_q[c] <= 1'b0;
          if (blk_valid[c] && drop_cnt[c] != '1) drop_cnt[c] <= drop_cnt[c] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      overflow <= 1'b0;
    end else begin
      for (int c = 0; c < NUM_CH; c++)
        if (blk_valid[c] && pend_q[c] && !(load && int'(sel) == c)) overflow <= 1'b1;
    end
  end

  // Stream rule: an offered word stays offered and unchanged until taken.
  a_stream_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

// tb_output_select: drives the block in each mode against a random link-ready
// pattern and predicts every word on both links.
//   raw:      one word per sample pair, 7-bit rounded (half-to-even) fields;
//   link test: payload counting up by one;
//   beam:     per element four words per link (beams 1-4 / 5-8), vstart on
//             element 0;
//   FFT:      as beam but only bins enabled in a random bin mask, vstart on
//             the first sent bin.
// The mask is also read back through its control port; no overflow may occur.
module tb_output_select;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  mode_t mode = MODE_RAW;
  logic raw_valid = 0, bm_valid = 0, overflow, mask_we = 0;
  samp_t [1:0] raw_samp = '0; logic [9:0] raw_idx = '0; logic [2:0] raw_seq = '0;
  logic [7:0][27:0] bm_beam = '0; logic [13:0] bm_tag = '0;
  logic [1:0] link_ready = '1, link_valid; word_t [1:0] link_word;
  logic [4:0] mask_addr = '0; logic [31:0] mask_wdata = '0, mask_rdata;
  output_select dut (.*);
  word_t q [2][$];
  logic [31:0] mask [32];
  int checks = 0, failures = 0;

  function automatic logic [6:0] r7(logic signed [7:0] v);
    logic signed [7:0] h = v >>> 1;
    if (v[0] && h[0]) h++;
    if (h > 63) h = 63;
    return 7'(h);
  endfunction

  for (genvar l = 0; l < 2; l++) begin : g_mon
    always @(posedge clk) if (!rst && link_valid[l]) begin
      checks++;
      if (q[l].size() == 0 || link_word[l] != q[l][0]) begin
        failures++; if (failures < 6) $display("link %0d got %h exp %h", l, link_word[l], q[l].size() ? q[l][0] : '0);
      end
      if (q[l].size() != 0) void'(q[l].pop_front());
    end
  end

  task automatic drain();
    while (q[0].size() != 0 || q[1].size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int w = 0; w < 32; w++) begin
      @(negedge clk); mask_we = 1; mask_addr = 5'(w); mask_wdata = $urandom & $urandom; mask[w] = mask_wdata;
    end
    @(negedge clk); mask_we = 0;
    for (int w = 0; w < 32; w++) begin
      @(negedge clk); mask_addr = 5'(w); @(negedge clk);
      checks++; if (mask_rdata != mask[w]) begin failures++; $display("mask %0d", w); end
    end
    fork
      forever begin @(negedge clk); link_ready = {1'($urandom % 4 != 0), 1'($urandom % 4 != 0)}; end
    join_none
    // raw
    mode = MODE_RAW;
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk);
      raw_valid = 1; raw_idx = 10'(i); raw_seq = 3'(i / 1024);
      raw_samp = {8'($urandom), 8'($urandom), 8'($urandom), 8'($urandom)};
      for (int l = 0; l < 2; l++)
        q[l].push_back('{flag: '{seq: raw_seq, vstart: i % 1024 == 0},
                         payload: {r7(raw_samp[0].re), r7(raw_samp[0].im), r7(raw_samp[1].re), r7(raw_samp[1].im)}});
      @(negedge clk); raw_valid = 0; repeat (2) @(negedge clk);
    end
    drain();
    // link test
    mode = MODE_LINKTEST;
    for (int i = 0; i < 1500; i++) begin
      for (int l = 0; l < 2; l++)
        q[l].push_back('{flag: '{seq: 3'(i / 1024), vstart: i % 1024 == 0}, payload: 28'(i)});
      @(negedge clk); raw_valid = 1;
      @(negedge clk); raw_valid = 0; repeat (2) @(negedge clk);
    end
    drain();
    // beam and FFT
    for (int m = 0; m < 2; m++) begin
      bit first;
      mode = m ? MODE_FFT : MODE_BEAM;
      first = 1;
      for (int i = 0; i < 1024; i++) begin
        @(negedge clk);
        bm_valid = 1; bm_tag = {3'(m + 2), 1'b0, 10'(i)};
        for (int b = 0; b < 8; b++) bm_beam[b] = 28'($urandom);
        if (m == 0 || mask[i / 32][i % 32]) begin
          for (int l = 0; l < 2; l++)
            for (int b = 0; b < 4; b++)
              q[l].push_back('{flag: '{seq: 3'(m + 2), vstart: b == 0 && (i == 0 || (m == 1 && first))},
                               payload: bm_beam[4*l + b]});
          first = 0;
        end
        @(negedge clk); bm_valid = 0; repeat (10) @(negedge clk);
      end
      drain();
    end
    checks++; if (overflow) begin failures++; $display("overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

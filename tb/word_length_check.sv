// word_length_check -- testbench helper: runs one channel adaptation
// controller of word length L with S source tables through configuration and
// a burst of adapted words, and counts checks and failures.
//
// All registers get distinct values (table t: R[j] = 16 + 3j + 100t); then
// s_start is held high for BURST words and, on every clock, s_select must
// equal R[j] of the live table during bit j of a word and R[0] on the clock
// between words. With S > 1 the live table (src_sel) changes on the clock
// between words, as when the processor reads two sensors in turn. Each word
// must take exactly L + 1 clocks. Used by tb_word_lengths.
module word_length_check #(
  parameter int unsigned L     = 12,
  parameter int unsigned S     = 1,
  parameter int unsigned BURST = 6
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int unsigned N  = 8;
  localparam int unsigned IW = $clog2(L + 1);
  localparam int unsigned SW = (S > 1) ? $clog2(S) : 1;

  logic          scl = 1'b1;
  logic          rst_n;
  logic          s_start;
  logic [IW-1:0] word_len;
  logic          cfg_we;
  logic [SW-1:0] cfg_src;
  logic [SW-1:0] src_sel;
  int            src_switches;
  logic [IW-1:0] cfg_addr;
  logic [N-1:0]  cfg_data;
  logic [N-1:0]  s_select;
  logic [IW-1:0] bit_idx;
  logic          busy;

  channel_adaptation_module #(.L(L), .N(N), .S(S)) dut (.*);

  always #5 scl = ~scl;

  function automatic logic [N-1:0] entry(input int t, input int j);
    return N'(16 + 3 * j + 100 * t);
  endfunction

  task automatic expect_sel(input logic [N-1:0] want);
    checks++;
    if (s_select !== want) begin
      failures++;
      $display("FAIL L=%0d: s_select=%0d expected %0d (idx %0d)", L, s_select, want, bit_idx);
    end
  endtask

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    src_switches = 0;
    cfg_src = '0;
    src_sel = '0;
    rst_n = 1'b0;
    s_start = 1'b0;
    word_len = IW'(L);
    cfg_we = 1'b0;
    cfg_addr = '0;
    cfg_data = '0;
    repeat (2) @(negedge scl);
    @(posedge scl) rst_n = 1'b1;
    for (int t = 0; t < int'(S); t++) begin
      for (int j = 0; j <= int'(L); j++) begin
        @(posedge scl);
        cfg_we = 1'b1;
        cfg_src = SW'(t);
        cfg_addr = IW'(j);
        cfg_data = entry(t, j);
        @(negedge scl);
        #1 cfg_we = 1'b0;
      end
    end
    expect_sel(entry(0, 0));
    @(posedge scl) s_start = 1'b1;
    for (int w = 0; w < int'(BURST); w++) begin
      int t;
      t = w % int'(S);
      for (int j = 1; j <= int'(L); j++) begin
        @(negedge scl);
        #1 expect_sel(entry(t, j));
      end
      @(negedge scl);
      #1 expect_sel(entry(t, 0));
      checks++;
      if (busy) begin
        failures++;
        $display("FAIL L=%0d: word did not end after %0d bits", L, L);
      end
      if (w == int'(BURST) - 1) s_start = 1'b0;
      // Next source's table for the next word.
      if (S > 1) begin
        src_sel = SW'((w + 1) % int'(S));
        src_switches++;
        #1 expect_sel(entry((w + 1) % int'(S), 0));
      end
    end
    @(negedge scl);
    #1 expect_sel(entry(int'(src_sel), 0));
    checks++;
    if (S > 1 && src_switches == 0) begin
      failures++;
      $display("FAIL no source switch");
    end
    done = 1'b1;
  end

endmodule : word_length_check

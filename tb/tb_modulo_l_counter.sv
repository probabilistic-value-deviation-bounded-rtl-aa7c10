// tb_modulo_l_counter -- self-checking testbench of the bit-position
// synchroniser.
//
// Drives the serial clock, changes s_start and word_len only while the clock
// is high, and after every falling edge compares idx and state with a
// reference built from the expected frame: s_start seen while idle starts the
// sequence 1, 2, ..., len, 0. Covers directed words for every length 1..L
// (latency: idx = 1 on the very edge that samples s_start, back to 0 exactly
// len + 1 edges later), held-high s_start (back-to-back words, one idle edge
// between), word_len = 0 and word_len > L (both mean L), reset in the middle
// of a word, and a long random run.
module tb_modulo_l_counter;
  import chad_pkg::*;

  localparam int unsigned L  = L_DEFAULT;
  localparam int unsigned IW = $clog2(L + 1);

  logic          scl = 1'b1;
  logic          rst_n;
  logic          s_start;
  logic [IW-1:0] word_len;
  logic [IW-1:0] idx;
  sync_state_e   state;

  int checks = 0;
  int failures = 0;

  // Reference: position expected after the next falling edge.
  int exp_pos = 0;

  modulo_l_counter dut (.*);

  always #5 scl = ~scl;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int eff_len(input int wl);
    return (wl == 0 || wl > int'(L)) ? int'(L) : wl;
  endfunction

  // Advance the reference by one falling edge.
  function automatic int ref_next(input int pos, input logic start, input int wl);
    if (pos == 0) return start ? 1 : 0;
    if (pos < eff_len(wl)) return pos + 1;
    return 0;
  endfunction

  task automatic check_now(input string what);
    checks++;
    if (int'(idx) != exp_pos || (state == S1_COUNT) != (exp_pos != 0)) begin
      failures++;
      $display("FAIL %s: idx=%0d state=%0d expected pos %0d at %0t",
               what, idx, state, exp_pos, $time);
    end
  endtask

  // One clock: set inputs while scl is high, then check after the fall.
  task automatic step(input logic start, input int wl, input string what);
    @(posedge scl);
    s_start  = start;
    word_len = IW'(wl);
    @(negedge scl);
    exp_pos = ref_next(exp_pos, start, wl);
    #1 check_now(what);
  endtask

  initial begin
    rst_n = 1'b0;
    s_start = 1'b0;
    word_len = IW'(L);
    exp_pos = 0;
    repeat (3) @(negedge scl);
    #1 check_now("reset");
    @(posedge scl) rst_n = 1'b1;

    // Directed: one word of every length, checking the whole sequence by
    // position and the total number of edges.
    for (int len = 1; len <= int'(L); len++) begin
      int edges;
      step(1'b1, len, "start");
      checks++;
      if (idx != IW'(1)) begin failures++; $display("FAIL len %0d: no immediate start", len); end
      edges = 1;
      while (idx != '0) begin
        step(1'b0, len, "count");
        edges++;
        if (edges > int'(L) + 2) break;
      end
      checks++;
      if (edges != len + 1) begin
        failures++;
        $display("FAIL len %0d: word took %0d edges, expected %0d", len, edges, len + 1);
      end
      step(1'b0, len, "idle");
    end

    // word_len 0 and above L both count L bits.
    step(1'b1, 0, "len0 start");
    repeat (L + 1) step(1'b0, 0, "len0");
    step(1'b1, (1 << IW) - 1, "lenbig start");
    repeat (L + 1) step(1'b0, (1 << IW) - 1, "lenbig");

    // s_start held high: back-to-back words with one idle edge between
    // (the I2C acknowledge clock).
    begin
      int idle_edges = 0;
      repeat (4 * (L + 1)) begin
        step(1'b1, L, "burst");
        if (idx == '0) idle_edges++;
      end
      checks++;
      if (idle_edges != 4) begin
        failures++;
        $display("FAIL burst: %0d idle edges in 4 frames", idle_edges);
      end
    end
    repeat (L + 1) step(1'b0, L, "drain");

    // Asynchronous reset in the middle of a word.
    step(1'b1, L, "pre-reset start");
    step(1'b0, L, "pre-reset");
    @(posedge scl);
    #2 rst_n = 1'b0;
    #1;
    exp_pos = 0;
    check_now("async reset");
    @(posedge scl) rst_n = 1'b1;

    // Random run.
    repeat (3000) begin
      step(1'($urandom_range(0, 3) == 0), $urandom_range(0, (1 << IW) - 1), "random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_modulo_l_counter

// tb_channel_adaptation_module -- end-to-end testbench of the channel
// adaptation controller on a modelled I2C read, at the default parameters
// (L = 8 bits per word, N = 8-bit selection).
//
// The testbench plays the processor (configuration writes, s_start, the
// serial clock), the sensor (bytes on SDA, most significant bit first) and
// the analog side: dcp_model turns the selection into a pull-up resistance,
// and an RC model of SDA decides what the processor reads. For a 1 bit the
// line charges from its previous level towards the supply with time constant
// R_pu * C_bus, V_end = V_start * e^(-T/tau) + V_dd * (1 - e^(-T/tau)); a 0
// bit is pulled to ground within the bit. The bit is read as 1 when V_end is
// above V_dd / 2. Constants: V_dd = 2.5 V, C_bus = 100 pF, 200 kHz clock.
// Leakage and internal pull-ups are ignored and there is no noise, so the
// channel is deterministic.
//
// What is checked against the controller:
//   * every clock of every frame: s_select equals R[j] during the j-th bit of
//     an adapted word and R[0] during address bytes and acknowledge clocks;
//   * the first adapted bit follows the acknowledge clock in which s_start is
//     raised, and the word ends exactly len clocks later;
//   * end to end, with the four least significant bit positions on the
//     weakest pull-up: the read value never exceeds the sent one and differs
//     by less than 16, the upper nibble arrives intact, and the pull-up
//     energy of the adapted bytes is below that of the same bytes sent with
//     the nominal pull-up everywhere (which must arrive error free).
// Mechanisms counted (each must occur): configuration writes, adapted words,
// back-to-back words of a burst, default-setting clocks, induced bit errors,
// shortened words (word_len < L), reset in the middle of a word.
module tb_channel_adaptation_module;
  import chad_pkg::*;

  localparam int unsigned L  = L_DEFAULT;
  localparam int unsigned N  = N_DEFAULT;
  localparam int unsigned IW = $clog2(L + 1);

  localparam logic [N-1:0] STRONG = N'(10);   // ~3.92 kOhm
  localparam logic [N-1:0] WEAK   = N'(255);  // ~100 kOhm
  localparam real VDD   = 2.5;
  localparam real C_BUS = 100.0e-12;
  localparam real T_BIT = 5.0e-6;

  logic          scl = 1'b1;
  logic          rst_n;
  logic          s_start;
  logic [IW-1:0] word_len;
  logic          cfg_we;
  logic          cfg_src = 1'b0;   // single-source build: one table
  logic          src_sel = 1'b0;
  logic [IW-1:0] cfg_addr;
  logic [N-1:0]  cfg_data;
  logic [N-1:0]  s_select;
  logic [IW-1:0] bit_idx;
  logic          busy;
  real           r_pu;

  channel_adaptation_module dut (.*);

  dcp_model u_dcp (.code(s_select), .r_ohm(r_pu));

  always #5 scl = ~scl;

  int checks = 0;
  int failures = 0;

  // Mechanism counters.
  int n_cfg_writes = 0;
  int n_words = 0;
  int n_burst_words = 0;
  int n_default_clocks = 0;
  int n_bit_errors = 0;
  int n_short_words = 0;
  int n_mid_word_resets = 0;

  // The table as the processor wrote it.
  logic [N-1:0] table_q [L+1];

  // Analog state of SDA and accumulated pull-up energy (J).
  real v_sda = 0.0;
  real energy = 0.0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sel(input logic [N-1:0] want, input string what);
    checks++;
    if (s_select !== want) begin
      failures++;
      $display("FAIL %s: s_select=%0d expected %0d (idx %0d) at %0t",
               what, s_select, want, bit_idx, $time);
    end
  endtask

  // One bit time, entered just after a falling scl edge: the sensor puts
  // sda_bit on the line under the present pull-up, the processor samples at
  // the next falling edge. start_next is what s_start shows at that edge.
  task automatic bit_time(input logic sda_bit, input logic start_next,
                          output logic rx_bit);
    real tau;
    tau = r_pu * C_BUS;
    if (sda_bit) begin
      v_sda = v_sda * $exp(-T_BIT / tau) + VDD * (1.0 - $exp(-T_BIT / tau));
    end else begin
      v_sda = 0.0;
      energy += VDD * VDD / r_pu * T_BIT;
    end
    rx_bit = (v_sda > VDD / 2.0);
    @(posedge scl);
    s_start = start_next;
    @(negedge scl);
    #1;
  endtask

  task automatic cfg_write(input int a, input logic [N-1:0] d);
    @(posedge scl);
    cfg_we   = 1'b1;
    cfg_addr = IW'(a);
    cfg_data = d;
    @(negedge scl);
    #1;
    cfg_we = 1'b0;
    if (a <= int'(L)) table_q[a] = d;
    n_cfg_writes++;
  endtask

  task automatic load_table(input logic [N-1:0] msb_sel, input logic [N-1:0] lsb_sel);
    cfg_write(0, STRONG);
    for (int j = 1; j <= int'(L); j++)
      cfg_write(j, (j <= int'(L) / 2) ? msb_sel : lsb_sel);
  endtask

  // A frame on the default setting (address byte): 8 bits and the
  // acknowledge, with s_start raised at the end of the acknowledge if an
  // adapted word follows.
  task automatic plain_frame(input logic [7:0] b, input logic start_after);
    logic rx;
    for (int j = 1; j <= 9; j++) begin
      expect_sel(table_q[0], "address/ack clock");
      n_default_clocks++;
      bit_time((j <= 8) ? b[8-j] : 1'b0, (j == 9) ? start_after : 1'b0, rx);
    end
  endtask

  // One adapted word of len bits (msb first) and its acknowledge clock.
  task automatic adapted_word(input logic [L-1:0] x, input int len,
                              input logic more, output logic [L-1:0] w);
    logic rx;
    w = '0;
    checks++;
    if (bit_idx != IW'(1) || !busy) begin
      failures++;
      $display("FAIL word did not start on the clock after s_start (idx %0d)", bit_idx);
    end
    for (int j = 1; j <= len; j++) begin
      expect_sel(table_q[j], "adapted bit");
      bit_time(x[len-j], 1'b0, rx);
      w[len-j] = rx;
    end
    // Acknowledge clock: default setting again, counter idle.
    checks++;
    if (bit_idx != '0 || busy) begin
      failures++;
      $display("FAIL word of %0d bits did not end after bit %0d", len, len);
    end
    expect_sel(table_q[0], "acknowledge clock");
    n_default_clocks++;
    bit_time(1'b0, more, rx);
    n_words++;
    if (more) n_burst_words++;
    if (len < int'(L)) n_short_words++;
  endtask

  // A burst read of nbytes bytes; returns the pull-up energy spent on them.
  task automatic burst_read(input int nbytes, input logic adapted, output real e_bytes);
    logic [L-1:0] x, w;
    real e0;
    plain_frame(8'h3B, 1'b1);            // address + read bit, then ACK
    e0 = energy;
    for (int k = 0; k < nbytes; k++) begin
      x = L'($urandom);
      adapted_word(x, L, k < nbytes - 1, w);
      checks++;
      if (adapted) begin
        if (w > x || (x - w) >= (1 << (L / 2)) || w[L-1:L/2] != x[L-1:L/2]) begin
          failures++;
          $display("FAIL distortion out of bound: sent %0d read %0d", x, w);
        end
      end else if (w != x) begin
        failures++;
        $display("FAIL nominal channel corrupted %0d into %0d", x, w);
      end
      if (w != x) n_bit_errors++;
    end
    e_bytes = energy - e0;
  endtask

  initial begin
    real e_nominal, e_adapted;
    logic [L-1:0] w;
    logic rx;

    rst_n    = 1'b0;
    s_start  = 1'b0;
    word_len = IW'(L);
    cfg_we   = 1'b0;
    cfg_addr = '0;
    cfg_data = '0;
    for (int j = 0; j <= int'(L); j++) table_q[j] = N'(RESET_SEL_DEFAULT);
    repeat (2) @(negedge scl);
    #1 expect_sel(N'(RESET_SEL_DEFAULT), "after reset");
    @(posedge scl) rst_n = 1'b1;
    @(negedge scl) #1;

    // Reference: nominal pull-up on every bit, same random bytes.
    load_table(STRONG, STRONG);
    process::self().srandom(7);
    burst_read(64, 1'b0, e_nominal);

    // Adapted: weakest pull-up on the four least significant bits.
    load_table(STRONG, WEAK);
    process::self().srandom(7);
    burst_read(64, 1'b1, e_adapted);

    checks++;
    if (!(e_adapted < e_nominal)) begin
      failures++;
      $display("FAIL adapted energy %g J not below nominal %g J", e_adapted, e_nominal);
    end
    $display("pull-up energy over 64 bytes: nominal %g J, adapted %g J (ratio %0.3f)",
             e_nominal, e_adapted, e_adapted / e_nominal);

    // Shortened words: 4-bit words use R[1..4] only.
    word_len = IW'(4);
    plain_frame(8'h3B, 1'b1);
    for (int k = 0; k < 6; k++) adapted_word(L'($urandom_range(0, 15)), 4, k < 5, w);
    word_len = IW'(L);

    // Reset in the middle of a word: controller returns to idle with the
    // reset table, then is configured again.
    plain_frame(8'h3B, 1'b1);
    for (int j = 1; j <= 3; j++) begin
      expect_sel(table_q[j], "bit before reset");
      bit_time(1'b1, 1'b0, rx);
    end
    #2 rst_n = 1'b0;
    #1;
    checks++;
    if (bit_idx != '0 || busy || s_select != N'(RESET_SEL_DEFAULT)) begin
      failures++;
      $display("FAIL reset in mid-word: idx %0d sel %0d", bit_idx, s_select);
    end
    n_mid_word_resets++;
    for (int j = 0; j <= int'(L); j++) table_q[j] = N'(RESET_SEL_DEFAULT);
    @(posedge scl) rst_n = 1'b1;
    @(negedge scl) #1;
    load_table(STRONG, WEAK);
    burst_read(4, 1'b1, e_adapted);

    $display("mechanisms: cfg_writes=%0d words=%0d burst_words=%0d default_clocks=%0d bit_errors=%0d short_words=%0d mid_word_resets=%0d",
             n_cfg_writes, n_words, n_burst_words, n_default_clocks, n_bit_errors,
             n_short_words, n_mid_word_resets);
    if (n_cfg_writes == 0)      begin failures++; $display("FAIL no configuration write"); end
    if (n_words == 0)           begin failures++; $display("FAIL no adapted word"); end
    if (n_burst_words == 0)     begin failures++; $display("FAIL no back-to-back word"); end
    if (n_default_clocks == 0)  begin failures++; $display("FAIL no default-setting clock"); end
    if (n_bit_errors == 0)      begin failures++; $display("FAIL no induced bit error"); end
    if (n_short_words == 0)     begin failures++; $display("FAIL no shortened word"); end
    if (n_mid_word_resets == 0) begin failures++; $display("FAIL no mid-word reset"); end
    checks += 7;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_channel_adaptation_module

// tb_control_module -- self-checking testbench of the selection register
// file.
//
// Runs a two-source build (S = 2, two tables). Keeps its own copy of both
// tables and, for every source and bit position, compares s_select with it. Checks the reset value of every register, that a write
// lands on the falling scl edge (not before), that writes to addresses above
// L change nothing, that a write without cfg_we changes nothing, and a long
// random mix of writes and position changes.
module tb_control_module;

  localparam int unsigned L         = 8;
  localparam int unsigned N         = 8;
  localparam int unsigned RESET_SEL = 10;
  localparam int unsigned S         = 2;
  localparam int unsigned IW        = $clog2(L + 1);
  localparam int unsigned SW        = 1;

  logic          scl = 1'b1;
  logic          rst_n;
  logic          cfg_we;
  logic [SW-1:0] cfg_src;
  logic [SW-1:0] src_sel;
  logic [IW-1:0] cfg_addr;
  logic [N-1:0]  cfg_data;
  logic [IW-1:0] idx;
  logic [N-1:0]  s_select;

  int checks = 0;
  int failures = 0;
  logic [N-1:0] model [S][L+1];

  control_module #(.L(L), .N(N), .RESET_SEL(RESET_SEL), .S(S)) dut (.*);

  always #5 scl = ~scl;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_pos(input int t, input int p, input string what);
    src_sel = SW'(t);
    idx = IW'(p);
    #1;
    checks++;
    if (s_select !== model[t][p]) begin
      failures++;
      $display("FAIL %s: table %0d R[%0d] reads %0d, expected %0d",
               what, t, p, s_select, model[t][p]);
    end
  endtask

  task automatic check_all(input string what);
    for (int t = 0; t < int'(S); t++)
      for (int p = 0; p <= int'(L); p++) check_pos(t, p, what);
  endtask

  // Present a write while scl is high; it must take effect at the fall.
  task automatic write(input int t, input int a, input logic [N-1:0] d, input logic we);
    @(posedge scl);
    #1;
    cfg_we   = we;
    cfg_src  = SW'(t);
    cfg_addr = IW'(a);
    cfg_data = d;
    if (we && a <= int'(L)) begin
      // Not yet written while scl is still high.
      src_sel = SW'(t);
      idx = IW'(a);
      #1;
      checks++;
      if (s_select !== model[t][a]) begin
        failures++;
        $display("FAIL write to R[%0d] visible before the falling edge", a);
      end
    end
    @(negedge scl);
    #1;
    cfg_we = 1'b0;
    if (we && a <= int'(L)) model[t][a] = d;
  endtask

  initial begin
    rst_n = 1'b0;
    cfg_we = 1'b0;
    cfg_src = '0;
    src_sel = '0;
    cfg_addr = '0;
    cfg_data = '0;
    idx = '0;
    for (int t = 0; t < int'(S); t++)
      for (int p = 0; p <= int'(L); p++) model[t][p] = N'(RESET_SEL);
    repeat (2) @(negedge scl);
    check_all("reset");
    @(posedge scl) rst_n = 1'b1;

    // Load both tables with distinct values.
    for (int t = 0; t < int'(S); t++)
      for (int p = 0; p <= int'(L); p++) write(t, p, N'(8'hA0 + p * 7 + t * 64), 1'b1);
    check_all("tables");

    // Out-of-range addresses and writes without enable change nothing.
    for (int a = int'(L) + 1; a < (1 << IW); a++) write(1, a, 8'h55, 1'b1);
    for (int p = 0; p <= int'(L); p++) write(0, p, 8'h33, 1'b0);
    check_all("ignored writes");

    // Random mix.
    repeat (2000) begin
      if ($urandom_range(0, 1) == 1)
        write($urandom_range(0, S - 1), $urandom_range(0, (1 << IW) - 1), N'($urandom),
              1'($urandom_range(0, 3) != 0));
      check_pos($urandom_range(0, S - 1), $urandom_range(0, L), "random");
    end

    // Reset restores the default in every register.
    @(posedge scl);
    rst_n = 1'b0;
    for (int t = 0; t < int'(S); t++)
      for (int p = 0; p <= int'(L); p++) model[t][p] = N'(RESET_SEL);
    #1 check_all("second reset");
    rst_n = 1'b1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_control_module

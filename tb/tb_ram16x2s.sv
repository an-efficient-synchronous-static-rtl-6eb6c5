// tb_ram16x2s: self-checking testbench of the 16-word by 2-bit RAM.
//
// Two copies of the RAM share one stimulus: dut_p with the default
// rising-edge write clock, dut_n with IS_WCLK_INVERTED = 1 (falling-edge
// write clock). Each has its own non-zero INIT vectors. A reference array per
// copy is updated only on that copy's active edge while WE is high, and both
// outputs are compared with it:
//   1. initial contents of all 16 addresses against the INIT vectors;
//   2. writes with WE low must not change anything;
//   3. the inactive clock edge must not write;
//   4. write-through: right after an active edge the output equals D;
//   5. zero-latency read: a new address shows its word without any clock;
//   6. a long random mix of address, data, WE and clock changes.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_ram16x2s;
  import sram_pkg::*;

  localparam logic [DEPTH-1:0] P_INIT0 = 16'hA5C3;
  localparam logic [DEPTH-1:0] P_INIT1 = 16'h3C96;
  localparam logic [DEPTH-1:0] N_INIT0 = 16'h0FF0;
  localparam logic [DEPTH-1:0] N_INIT1 = 16'h1234;

  logic  wclk = 1'b0;
  logic  we   = 1'b0;
  addr_t a    = '0;
  word_t d    = '0;
  word_t op, on;

  int checks   = 0;
  int failures = 0;

  word_t ref_p [DEPTH];
  word_t ref_n [DEPTH];

  ram16x2s #(.INIT_00(P_INIT0), .INIT_01(P_INIT1)) dut_p (
    .WCLK(wclk), .WE(we), .A0(a[0]), .A1(a[1]), .A2(a[2]), .A3(a[3]),
    .D0(d[0]), .D1(d[1]), .O0(op[0]), .O1(op[1]));

  ram16x2s #(.INIT_00(N_INIT0), .INIT_01(N_INIT1), .IS_WCLK_INVERTED(1'b1)) dut_n (
    .WCLK(wclk), .WE(we), .A0(a[0]), .A1(a[1]), .A2(a[2]), .A3(a[3]),
    .D0(d[0]), .D1(d[1]), .O0(on[0]), .O1(on[1]));

  task automatic check(string what);
    checks += 2;
    if (op !== ref_p[a]) begin
      failures++;
      $display("FAIL %s (rising-edge RAM): addr=%0d got=%b exp=%b", what, a, op, ref_p[a]);
    end
    if (on !== ref_n[a]) begin
      failures++;
      $display("FAIL %s (falling-edge RAM): addr=%0d got=%b exp=%b", what, a, on, ref_n[a]);
    end
  endtask

  // Drive a new level on the write clock and update the reference models
  // with what the inputs held before the edge.
  task automatic set_wclk(logic v);
    if (!wclk && v && we) ref_p[a] = d;
    if (wclk && !v && we) ref_n[a] = d;
    wclk = v;
    #1;
  endtask

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("FAIL watchdog: testbench did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    automatic int unsigned sel;
    for (int i = 0; i < DEPTH; i++) begin
      ref_p[i] = {P_INIT1[i], P_INIT0[i]};
      ref_n[i] = {N_INIT1[i], N_INIT0[i]};
    end
    #1;

    // 1. Initial contents, read with no clock activity.
    for (int i = 0; i < DEPTH; i++) begin
      a = addr_t'(i);
      #1;
      check("initial contents");
    end

    // 2. WE low: clock both ways at every address with data that differs.
    we = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      a = addr_t'(i);
      d = ~ref_p[i];
      #1;
      set_wclk(1'b1);
      check("WE low, rising edge");
      set_wclk(1'b0);
      check("WE low, falling edge");
    end

    // 3./4. WE high at address 5: each copy writes only on its own edge.
    a  = 4'd5;
    we = 1'b1;
    d  = ~ref_p[5];
    #1;
    set_wclk(1'b1);
    checks++;
    if (op !== d) begin
      failures++;
      $display("FAIL write-through: rising-edge RAM shows %b, wrote %b", op, d);
    end
    check("after rising edge");
    d = ~ref_n[5];
    #1;
    check("data change while clock high");
    set_wclk(1'b0);
    checks++;
    if (on !== d) begin
      failures++;
      $display("FAIL write-through: falling-edge RAM shows %b, wrote %b", on, d);
    end
    check("after falling edge");

    // 5. Zero-latency read: change the address only, check after 1 time unit.
    we = 1'b0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      a = addr_t'(i);
      #1;
      check("zero-latency read");
    end

    // Fill every word with a known pattern through the rising-edge RAM.
    we = 1'b1;
    for (int i = 0; i < DEPTH; i++) begin
      a = addr_t'(i);
      d = word_t'(i ^ (i >> 2));
      #1;
      set_wclk(1'b1);
      check("fill, after rising edge");
      set_wclk(1'b0);
    end
    we = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      a = addr_t'(i);
      #1;
      check("fill read-back");
    end

    // 6. Random mix.
    for (int k = 0; k < 4000; k++) begin
      sel = $urandom_range(3);
      unique case (sel)
        0: a = addr_t'($urandom);
        1: d = word_t'($urandom);
        2: we = 1'($urandom);
        3: set_wclk(~wclk);
      endcase
      #1;
      check("random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

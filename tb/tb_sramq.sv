// tb_sramq: end-to-end testbench of the chip top at its default parameters
// (all-zero initial contents, rising-edge write clock).
//
// It plays the role of the processor that drives the memory pins:
//   * the pin sequence of the paper's simulation waveform: write 11 to
//     address 1 (a1 = 1) and see o1 = o2 = 1, then move to address 14 with
//     the clock low and WE low and read 00;
//   * a complete write of all 16 words followed by a read of all 16 words;
//   * a long random mix of pin changes.
// A reference array, indexed with a1 as the least significant address bit,
// is compared with o2:o1 after every step. The test counts how often each
// mechanism of the memory occurred and fails if one never did: a write on a
// rising edge, a rising edge ignored because WE was low, a falling edge with
// WE high that must not write, a write-through (output equal to the new data
// right after the write edge) and a zero-latency read of a changed address.
module tb_sramq;
  import sram_pkg::*;

  logic a1 = 1'b0, a2 = 1'b0, a3 = 1'b0, a4 = 1'b0;
  logic d1 = 1'b0, d2 = 1'b0;
  logic wclk = 1'b0, we = 1'b0;
  logic o1, o2;

  int checks   = 0;
  int failures = 0;

  int n_write       = 0;
  int n_we_low_edge = 0;
  int n_fall_edge   = 0;
  int n_wthrough    = 0;
  int n_addr_read   = 0;

  word_t model [DEPTH];

  sramq dut (
    .a1(a1), .a2(a2), .a3(a3), .a4(a4), .d1(d1), .d2(d2),
    .wclk(wclk), .we(we), .o1(o1), .o2(o2));

  function automatic addr_t pin_addr();
    return {a4, a3, a2, a1};
  endfunction

  task automatic check(string what);
    checks++;
    if ({o2, o1} !== model[pin_addr()]) begin
      failures++;
      $display("FAIL %s: addr=%0d o2o1=%b%b exp=%b", what, pin_addr(), o2, o1,
               model[pin_addr()]);
    end
  endtask

  task automatic set_addr(addr_t v);
    {a4, a3, a2, a1} = v;
    #1;
    n_addr_read++;
    check("read after address change");
  endtask

  task automatic set_wclk(logic v);
    if (!wclk && v) begin
      if (we) begin
        model[pin_addr()] = {d2, d1};
        n_write++;
      end else begin
        n_we_low_edge++;
      end
    end
    if (wclk && !v && we) n_fall_edge++;
    wclk = v;
    #1;
    if (v && we) begin
      checks++;
      if ({o2, o1} !== {d2, d1}) begin
        failures++;
        $display("FAIL write-through: o2o1=%b%b d2d1=%b%b", o2, o1, d2, d1);
      end else begin
        n_wthrough++;
      end
    end
    check("after clock edge");
  endtask

  task automatic expect_count(string name, int n);
    checks++;
    $display("  %-28s %0d", name, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end
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
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    #1;
    check("initial contents");

    // Pin sequence of the paper's waveform.
    a1 = 1'b1; d1 = 1'b1; d2 = 1'b1; we = 1'b1;
    #1;
    set_wclk(1'b1);
    checks++;
    if ({o2, o1} !== 2'b11) begin
      failures++;
      $display("FAIL waveform step 1: o2o1=%b%b exp 11", o2, o1);
    end
    a1 = 1'b0; a2 = 1'b1; a3 = 1'b1; a4 = 1'b1; d1 = 1'b0;
    #1;
    set_wclk(1'b0);
    we = 1'b0;
    #1;
    checks++;
    if ({o2, o1} !== 2'b00 || pin_addr() != 4'd14) begin
      failures++;
      $display("FAIL waveform step 2: addr=%0d o2o1=%b%b exp 00", pin_addr(), o2, o1);
    end
    set_addr(4'd1);

    // One complete operation: write all words, then read all words.
    we = 1'b1;
    for (int i = 0; i < DEPTH; i++) begin
      {a4, a3, a2, a1} = addr_t'(i);
      {d2, d1} = word_t'(3 - (i % 4));
      #1;
      set_wclk(1'b1);
      set_wclk(1'b0);
    end
    we = 1'b0;
    for (int i = 0; i < DEPTH; i++) set_addr(addr_t'(i));
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (model[i] !== word_t'(3 - (i % 4))) begin
        failures++;
        $display("FAIL write pattern at %0d", i);
      end
    end

    // Random pin activity.
    for (int k = 0; k < 5000; k++) begin
      sel = $urandom_range(3);
      unique case (sel)
        0: set_addr(addr_t'($urandom));
        1: begin {d2, d1} = word_t'($urandom); #1; check("data change"); end
        2: begin we = 1'($urandom); #1; check("WE change"); end
        3: set_wclk(~wclk);
      endcase
    end

    $display("Mechanisms exercised:");
    expect_count("write on rising edge", n_write);
    expect_count("rising edge with WE low", n_we_low_edge);
    expect_count("falling edge with WE high", n_fall_edge);
    expect_count("write-through", n_wthrough);
    expect_count("zero-latency read", n_addr_read);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

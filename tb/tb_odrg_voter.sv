// tb_odrg_voter: checks the bit-wise majority voter and its fault detectors.
// Random bundles with zero, one or (rarely) several corrupted bits in one
// core; the expected vote is computed bit by bit in the testbench, and the
// expected mismatch flags follow from which core was corrupted.
module tb_odrg_voter;
  localparam int unsigned W = odrg_pkg::CoreOutW;
  logic [W-1:0] a, b, c, v;
  logic [2:0]   mm;
  int checks = 0, failures = 0;

  odrg_voter #(.WIDTH(W)) dut (.in_a_i(a), .in_b_i(b), .in_c_i(c), .voted_o(v), .mismatch_o(mm));

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = 1'($urandom_range(0, 1));
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] base, exp_v;
    logic [2:0]   exp_mm;
    int           victim, bit_i;
    for (int t = 0; t < 2000; t++) begin
      base = rnd();
      a = base; b = base; c = base;
      victim = $urandom_range(0, 3);      // 3 = no fault
      exp_mm = 3'b000;
      if (victim < 3) begin
        bit_i = $urandom_range(0, W - 1);
        case (victim)
          0: a[bit_i] = ~a[bit_i];
          1: b[bit_i] = ~b[bit_i];
          default: c[bit_i] = ~c[bit_i];
        endcase
        exp_mm[victim] = 1'b1;
      end
      #1;
      checks++;
      if (v !== base || mm !== exp_mm) begin
        failures++;
        if (failures < 5) $display("single-fault case %0d: victim %0d mm=%b exp %b", t, victim, mm, exp_mm);
      end
      // three independent values: compare against a per-bit count
      a = rnd(); b = rnd(); c = rnd();
      #1;
      for (int i = 0; i < W; i++) exp_v[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
      exp_mm = {c != exp_v, b != exp_v, a != exp_v};
      checks++;
      if (v !== exp_v || mm !== exp_mm) begin
        failures++;
        if (failures < 5) $display("random case %0d: mismatch", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

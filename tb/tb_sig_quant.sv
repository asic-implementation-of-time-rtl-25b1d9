// tb_sig_quant: checks the requantizer against the reference rounding
// (add half an output LSB, floor, clip) for every shift and for random and
// corner-case inputs, including exact halves of both signs and both clip
// limits.
module tb_sig_quant;
  import tddbp_ref_pkg::*;
  localparam int unsigned IN_W = 12, OUT_W = 6, SHIFT_W = 4;

  logic signed [IN_W-1:0]  din;
  logic [SHIFT_W-1:0]      shift;
  logic signed [OUT_W-1:0] dout;
  logic                    clipped;
  int checks = 0, failures = 0;
  int n_clip_seen = 0, n_half_seen = 0;

  sig_quant #(.IN_W(IN_W), .OUT_W(OUT_W), .SHIFT_W(SHIFT_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint v, int sh);
    longint exp_v;
    bit exp_c;
    int unsigned h0;
    h0 = n_round_half;
    din   = IN_W'(v);
    shift = SHIFT_W'(sh);
    #1;
    exp_v = ref_rq(v, sh, OUT_W, exp_c);
    if (n_round_half != h0) n_half_seen++;
    if (exp_c) n_clip_seen++;
    checks++;
    if (longint'(dout) != exp_v || clipped != exp_c) begin
      failures++;
      if (failures < 10)
        $display("FAIL din=%0d shift=%0d dout=%0d/%0d clipped=%0b/%0b",
                 v, sh, dout, exp_v, clipped, exp_c);
    end
  endtask

  initial begin
    // Hand-checked corner cases (shift 2: LSB weight 4)
    din = 12'sd6;  shift = 4'd2; #1; checks++; if (dout !== 6'sd2) failures++;   // 1.5 -> 2
    din = -12'sd6; shift = 4'd2; #1; checks++; if (dout !== -6'sd1) failures++;  // -1.5 -> -1
    din = -12'sd7; shift = 4'd2; #1; checks++; if (dout !== -6'sd2) failures++;  // -1.75 -> -2
    din = 12'sd5;  shift = 4'd2; #1; checks++; if (dout !== 6'sd1) failures++;   // 1.25 -> 1
    din = 12'sd200; shift = 4'd2; #1; checks++; if (dout !== 6'sd31 || !clipped) failures++;
    din = -12'sd200; shift = 4'd2; #1; checks++; if (dout !== -6'sd32 || !clipped) failures++;
    din = 12'sd126; shift = 4'd2; #1; checks++; if (dout !== 6'sd31 || !clipped) failures++; // 31.5 -> 32 -> clip
    for (int sh = 0; sh <= 7; sh++) begin
      check(-(1 << (IN_W - 1)), sh);
      check((1 << (IN_W - 1)) - 1, sh);
      for (int v = -64; v <= 64; v++) check(v, sh);
      for (int r = 0; r < 300; r++) check(longint'($signed(IN_W'($urandom))), sh);
    end
    if (n_clip_seen == 0) begin failures++; $display("no clipping exercised"); end
    if (n_half_seen == 0) begin failures++; $display("no halfway rounding exercised"); end
    $display("clip cases %0d, halfway cases %0d", n_clip_seen, n_half_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

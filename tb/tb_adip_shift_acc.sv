// tb_adip_shift_acc: self-checking test of the shared column shift/accumulate
// unit. Random psum lanes are streamed with random valid and stall patterns in
// each mode. Expected results, computed here from integers:
//   8b x 8b : res[0] = l0 + 4 l1 + 16 l2 + 64 l3, two enabled cycles later;
//   8b x 4b : res[0] = l0 + 4 l1, res[1] = l2 + 4 l3, one enabled cycle later;
//   8b x 2b : res[g] = l[g], in the same cycle.
// Unused result slots must be zero and valid_o must follow the same delay.
module tb_adip_shift_acc;
  import adip_pkg::*;
  localparam int unsigned PSUM_W = 14;
  localparam int unsigned OUT_W  = PSUM_W + 6;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic en, valid_i, valid_o;
  logic signed [PSUM_W-1:0] lane_i [GROUPS];
  logic signed [OUT_W-1:0]  res_o  [GROUPS];
  int checks = 0, failures = 0;

  adip_shift_acc #(.PSUM_W(PSUM_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { bit v; int r [GROUPS]; } exp_t;
  exp_t hist [3]; // hist[k]: input presented k enabled edges ago

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    en = 0; valid_i = 0; mode = MODE_8X8;
    foreach (lane_i[g]) lane_i[g] = 0;
    foreach (hist[k]) hist[k].v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = mode_e'(m);
      foreach (hist[k]) hist[k].v = 0;
      for (int cyc = 0; cyc < 400; cyc++) begin
        int l [GROUPS];
        int d;
        @(negedge clk);
        en = ($urandom_range(0, 7) != 0) || (cyc >= 395);
        valid_i = ($urandom_range(0, 3) != 0) && (cyc < 395);
        foreach (l[g]) begin
          l[g] = int'($urandom_range(0, (1 << (PSUM_W - 2)) - 1)) - (1 << (PSUM_W - 3));
          lane_i[g] = PSUM_W'(l[g]);
        end
        // expected result of the current input, stored in hist[0]
        hist[0].v = valid_i;
        foreach (hist[0].r[g]) hist[0].r[g] = 0;
        case (mode)
          MODE_8X8: hist[0].r[0] = l[0] + 4 * l[1] + 16 * l[2] + 64 * l[3];
          MODE_8X4: begin hist[0].r[0] = l[0] + 4 * l[1]; hist[0].r[1] = l[2] + 4 * l[3]; end
          default:  foreach (l[g]) hist[0].r[g] = l[g];
        endcase
        #1;
        d = ext_stages(mode);
        check(valid_o == hist[d].v, $sformatf("valid mode %0d", m));
        if (hist[d].v)
          foreach (res_o[g])
            check(int'(res_o[g]) == hist[d].r[g],
                  $sformatf("mode %0d res[%0d] got %0d exp %0d", m, g, res_o[g], hist[d].r[g]));
        @(posedge clk);
        if (en) begin
          hist[2] = hist[1];
          hist[1] = hist[0];
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adip_pe: self-checking test of one reconfigurable PE.
// For random activations, weights and incoming psums in all three precision
// modes it checks that psum lane g becomes psum_in[g] + x * digit_g(w), with
// the digit signed according to the mode, that the activation and weight are
// passed on registered, and that en / w_load hold the registers.
module tb_adip_pe;
  import adip_pkg::*;
  localparam int unsigned PSUM_W = 16;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic en, w_load;
  logic [7:0] in_i, in_o, w_i, w_o;
  logic signed [PSUM_W-1:0] psum_i [GROUPS];
  logic signed [PSUM_W-1:0] psum_o [GROUPS];
  int checks = 0, failures = 0;

  adip_pe #(.PSUM_W(PSUM_W)) dut (.*);

  always #5 clk = ~clk;

  function automatic int digit(logic [7:0] w, int g, mode_e m);
    logic [1:0] d = w[2*g +: 2];
    logic s = (m == MODE_8X8) ? (g == 3) : (m == MODE_8X4) ? (g % 2 == 1) : 1'b1;
    return (s && d[1]) ? int'(d) - 4 : int'(d);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    en = 0; w_load = 0; in_i = 0; w_i = 0; mode = MODE_8X8;
    for (int g = 0; g < GROUPS; g++) psum_i[g] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      logic [7:0] x, w;
      int pin [GROUPS];
      x = 8'($urandom); w = 8'($urandom);
      mode = mode_e'(it % 3);
      // load the weight
      @(negedge clk); w_i = w; w_load = 1; en = 0;
      @(negedge clk); w_load = 0;
      check(w_o == w, "weight register");
      // present activation, capture in input register
      in_i = x; en = 1;
      @(negedge clk);
      check(in_o == x, "input register");
      for (int g = 0; g < GROUPS; g++) begin
        pin[g] = int'($urandom_range(0, 2000)) - 1000;
        psum_i[g] = PSUM_W'(pin[g]);
      end
      in_i = 8'($urandom); // next activation must not disturb this check
      en = 1;
      @(negedge clk);
      en = 0;
      // psum now holds psum_i + product of x (the old in_q) ... check
      for (int g = 0; g < GROUPS; g++)
        check(int'(psum_o[g]) == pin[g] + int'($signed(x)) * digit(w, g, mode),
              $sformatf("psum lane %0d mode %0d x=%0d w=%h", g, mode, $signed(x), w));
      // with en low, the registers hold
      psum_i[0] = 16'sd1234;
      @(negedge clk);
      check(int'(psum_o[1]) == pin[1] + int'($signed(x)) * digit(w, 1, mode), "hold with en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

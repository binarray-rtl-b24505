// pe_tb: self-checking test of the processing element.
// Streams back-to-back vectors of random length and sign, raises next_calc
// two cycles after each vector's last element and checks res_out against a
// sum computed in the testbench, plus the one-cycle forwarding of data and
// next_calc.
module pe_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [7:0]  data_in, data_out;
  logic               bin_weight, next_calc, next_calc_out;
  logic signed [19:0] res_out;
  int checks = 0, failures = 0;

  pe dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N = 400;
  logic signed [7:0] xs [N];
  logic              ws [N];
  logic              lastf [N];
  int                vexp [N];   // expected sum, indexed by last element

  initial begin
    int len, acc, i, nv;
    logic signed [7:0] pd; logic pn;
    i = 0; nv = 0;
    while (i < N) begin
      len = 1 + ($urandom % 12);
      acc = 0;
      for (int e = 0; e < len && i < N; e++) begin
        xs[i] = 8'($urandom); ws[i] = 1'($urandom);
        acc += ws[i] ? int'(xs[i]) : -int'(xs[i]);
        lastf[i] = (e == len - 1) || (i == N - 1);
        vexp[i] = acc;
        i++;
      end
    end
    data_in = 0; bin_weight = 0; next_calc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int c = 0; c < N + 3; c++) begin
      data_in    = (c < N) ? xs[c] : '0;
      bin_weight = (c < N) ? ws[c] : 1'b0;
      next_calc  = (c >= 2 && c - 2 < N) ? lastf[c-2] : 1'b0;
      pd = data_in; pn = next_calc;
      @(posedge clk); #1;
      checks++;
      if (data_out !== pd || next_calc_out !== pn) begin
        failures++; $display("forward mismatch at %0d", c);
      end
      if (pn) begin
        checks++;
        if (res_out !== 20'(vexp[c-2])) begin
          failures++;
          $display("cycle %0d: res_out=%0d expected %0d", c, res_out, vexp[c-2]);
        end
        nv++;
      end
    end
    checks++;
    if (nv < 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fx_divider: back-to-back random signed divisions (one per cycle), with
// tags; checks quotients against integer division (toward zero) with
// saturation, division by zero, and the NUM_W+2 cycle latency.
module tb_fx_divider;
  localparam int NUM_W = 48, DEN_W = 32, OUT_W = 32, TAG_W = 8;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic signed [NUM_W-1:0] num;
  logic signed [DEN_W-1:0] den;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic signed [OUT_W-1:0] quot;
  int checks = 0, failures = 0;
  longint exp_q [256];
  int issue_cycle [256];
  int cycle = 0;
  int received = 0;
  localparam int N = 200;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  fx_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .OUT_W(OUT_W), .TAG_W(TAG_W)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic longint sat(longint q);
    if (q > 64'sd2147483647) return 64'sd2147483647;
    if (q < -64'sd2147483647) return -64'sd2147483647;
    return q;
  endfunction
  always @(posedge clk) begin
    if (!rst && in_valid) issue_cycle[in_tag] = cycle;
    if (!rst && out_valid) begin
      checks += 2;
      received++;
      if (longint'(quot) != exp_q[out_tag]) begin
        failures++;
        $display("tag %0d got %0d exp %0d", out_tag, quot, exp_q[out_tag]);
      end
      if (cycle - issue_cycle[out_tag] != NUM_W + 2) begin
        failures++;
        $display("tag %0d latency %0d", out_tag, cycle - issue_cycle[out_tag]);
      end
    end
  end
  initial begin
    num = '0; den = '0; in_tag = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < N; k++) begin
      longint n, d;
      int kind;
      kind = int'($urandom % 4);
      n = longint'($signed({$urandom, $urandom})) >>> (16 + $urandom % 20);
      case (kind)
        0: d = longint'(int'($urandom));
        1: d = longint'(int'($urandom)) >>> (8 + $urandom % 20);
        2: d = (k % 20 == 2) ? 0 : longint'(int'($urandom_range(1, 100)));
        default: d = -(longint'($urandom_range(1, 1 << 20)));
      endcase
      if (d == 0) exp_q[k] = (n < 0) ? -64'sd2147483647 : 64'sd2147483647;
      else        exp_q[k] = sat(n / d);
      num <= NUM_W'(n);
      den <= DEN_W'(d);
      in_tag <= TAG_W'(k);
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (NUM_W + 5) @(posedge clk);
    checks++;
    if (received != N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

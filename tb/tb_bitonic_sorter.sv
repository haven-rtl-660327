// tb_bitonic_sorter: feeds the 256-point sorter 200 random sets back to back
// (one per cycle, with gaps), plus sets with many equal keys, and checks that
// every output is sorted by key, is a permutation of its input (checked by
// sorting a copy in the testbench) and leaves exactly 36 cycles after entry.
module tb_bitonic_sorter;
  localparam int N = 256, KEY_W = 33, PAY_W = 8, W = KEY_W + PAY_W;
  localparam int LAT = 36;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [W-1:0] in_data [N];
  logic [W-1:0] out_data [N];

  bitonic_sorter #(.N(N), .KEY_W(KEY_W), .PAY_W(PAY_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  typedef logic [N*W-1:0] set_t;
  set_t exp_q[$];
  longint in_time[$];
  longint cyc = 0;
  int nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid) begin
    logic [W-1:0] s [$];
    set_t e;
    s.delete();
    for (int i = 0; i < N; i++) s.push_back(in_data[i]);
    s.sort();   // full-element order also orders the keys
    for (int i = 0; i < N; i++) e[i*W +: W] = s[i];
    exp_q.push_back(e);
    in_time.push_back(cyc);
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    set_t e;
    bit sorted, perm;
    sorted = 1; perm = 1;
    e = exp_q.pop_front();
    check(cyc - in_time.pop_front() == LAT, "latency of 36 stages");
    for (int i = 0; i < N; i++) begin
      if (i > 0 && out_data[i-1][W-1 -: KEY_W] > out_data[i][W-1 -: KEY_W]) sorted = 0;
      if (out_data[i][W-1 -: KEY_W] != e[i*W+W-1 -: KEY_W]) begin if (perm) $display("mismatch at %0d: %h vs %h", i, out_data[i], e[i*W +: W]); perm = 0; end
    end
    check(sorted, "output ascending");
    check(perm, "output keys are the input keys");
    // payloads: same multiset
    begin
      logic [W-1:0] a [$], b [$];
      a.delete(); b.delete();
      for (int i = 0; i < N; i++) begin a.push_back(out_data[i]); b.push_back(e[i*W +: W]); end
      a.sort(); b.sort();
      check(a == b, "elements preserved with payload");
    end
    nout++;
  end

  initial begin
    in_valid = 0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      for (int i = 0; i < N; i++) begin
        logic [KEY_W-1:0] k;
        case (t % 4)
          0: k = {1'($urandom), $urandom};
          1: k = KEY_W'($urandom_range(7));        // many equal keys
          2: k = KEY_W'(N - i);                    // reversed
          default: k = {1'b0, $urandom};
        endcase
        in_data[i] = {k, PAY_W'(i + 1000 * t)};
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    check(exp_q.size() == 0 && nout > 100, "all sets came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

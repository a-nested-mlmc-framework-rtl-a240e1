// tb_mlmc_accumulator -- feeds random samples with random gaps and checks
// count, sum and sum of squares after every cycle against totals kept in
// 128-bit integers; also checks clear and that clear wins over a sample.
module tb_mlmc_accumulator;
  localparam int IN_W = 19, CNT_W = 32;
  localparam int SUM_W = IN_W + CNT_W, SQ_W = 2 * IN_W + CNT_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                    rst_n = 0, clear = 0, in_valid = 0;
  logic signed [IN_W-1:0]  in_val = '0;
  logic [CNT_W-1:0]        count;
  logic signed [SUM_W-1:0] sum;
  logic [SQ_W-1:0]         sumsq;

  mlmc_accumulator #(.IN_W(IN_W), .CNT_W(CNT_W)) dut (
    .clk, .rst_n, .clear, .in_valid, .in_val, .count, .sum, .sumsq
  );

  int checks = 0, failures = 0;
  longint       e_cnt;
  logic signed [127:0] e_sum;
  logic [127:0]        e_sq;

  task automatic compare(input string where);
    checks += 3;
    if (longint'(count) != e_cnt) begin failures++; $display("FAIL %s count %0d vs %0d", where, count, e_cnt); end
    if (128'(sum) != e_sum)       begin failures++; $display("FAIL %s sum %0d vs %0d", where, sum, e_sum); end
    if (128'(sumsq) != e_sq)      begin failures++; $display("FAIL %s sumsq %0d vs %0d", where, sumsq, e_sq); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v;
    e_cnt = 0; e_sum = 0; e_sq = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("after reset");
    for (int i = 0; i < 3000; i++) begin
      v = longint'($urandom_range(2 ** IN_W - 1, 0)) - 2 ** (IN_W - 1);
      in_val   = IN_W'(v);
      in_valid = 1'($urandom_range(3, 0) != 0);
      clear    = (i == 1500);
      @(negedge clk);
      if (clear) begin
        e_cnt = 0; e_sum = 0; e_sq = 0;
      end else if (in_valid) begin
        e_cnt++;
        e_sum += 128'(v);
        e_sq  += 128'(v * v);
      end
      compare("stream");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

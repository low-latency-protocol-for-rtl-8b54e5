// tb_command_processor -- self-checking test of exactly-once command execution.
// Sends START, STOP, user commands and repeats of the last command with the
// same command sequence number (CSN). A repeat must return the stored
// response without reaching the user interface; a new CSN must execute once.
// The user logic model answers ret = {arg, ~arg} xor code after a random delay.
module tb_command_processor;
  import fade_pkg::*;
  logic clk = 0, rst = 1;
  logic cmd_valid = 0, cmd_ready, resp_valid, resp_ready = 0;
  cmd_t cmd = '0;
  resp_t resp;
  logic user_req, user_ack = 0;
  logic [15:0] user_code;
  logic [31:0] user_arg;
  logic [63:0] user_ret = '0;
  logic [15:0] n_executed, n_duplicates;
  int checks = 0, failures = 0;
  int user_calls = 0;

  command_processor dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] model(input logic [15:0] c, input logic [31:0] a);
    return {a, ~a} ^ 64'(c);
  endfunction

  // user logic
  initial forever begin
    @(posedge clk);
    if (!rst && user_req && !user_ack) begin
      repeat ($urandom_range(0, 5)) @(posedge clk);
      user_calls++;
      user_ack <= 1; user_ret <= model(user_code, user_arg);
      @(posedge clk);
      user_ack <= 0;
    end
  end

  task automatic run_cmd(input logic [15:0] code, input logic [15:0] csn, input logic [31:0] arg,
                         input logic [63:0] exp_ret, input int exp_calls);
    int t;
    @(negedge clk);
    cmd_valid = 1; cmd = '{code: code, csn: csn, arg: arg};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    t = 0;
    while (!resp_valid && t < 100) begin @(negedge clk); t++; end
    repeat ($urandom_range(0, 3)) @(negedge clk);   // response held while not taken
    checks++;
    if (!resp_valid || resp.code !== code || resp.csn !== csn || resp.ret !== exp_ret) begin
      failures++;
      $display("cmd %h csn %0d: got %h/%0d/%h expected ret %h", code, csn, resp.code, resp.csn, resp.ret, exp_ret);
    end
    resp_ready = 1; @(negedge clk); resp_ready = 0;
    checks++;
    if (user_calls != exp_calls) begin failures++; $display("user calls %0d expected %0d", user_calls, exp_calls); end
  endtask

  initial begin
    int calls;
    repeat (3) @(posedge clk);
    rst = 0;
    calls = 0;
    run_cmd(CODE_START, 16'd1, 32'd0, 64'd0, calls);
    run_cmd(CODE_START, 16'd1, 32'd0, 64'd0, calls);          // duplicate
    for (int i = 0; i < 30; i++) begin
      logic [15:0] c; logic [31:0] a;
      c = 16'h0100 + 16'($urandom_range(0, 255)); a = $urandom;
      calls++;
      run_cmd(c, 16'(2 + i), a, model(c, a), calls);
      if (i % 3 == 0) run_cmd(c, 16'(2 + i), 32'hdead_beef, model(c, a), calls);  // resent: old result
    end
    run_cmd(CODE_STOP, 16'd100, 32'd0, 64'd0, calls);
    checks++;
    if (n_executed != 16'd32 || n_duplicates != 16'd11) begin
      failures++; $display("executed %0d duplicates %0d", n_executed, n_duplicates);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cute_cmd_if: self-checking testbench of the command interface.
//
// Plays the host (configuration commands, ISSUE, CHECK, STATUS) and the task
// controller (task_ready, task_done).  Checks that an issued task carries
// every interface register, that the queue holds QDEPTH tasks and then
// back-pressures ISSUE, that CHECK waits for the oldest unchecked task and
// returns its number, that a CHECK with nothing outstanding returns at once
// with bit 63 set, and the STATUS counts.
module tb_cute_cmd_if;
  import cute_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        cmd_valid, cmd_ready, resp_valid, resp_ready;
  logic [6:0]  cmd_funct;
  logic [63:0] cmd_rs1, cmd_rs2, resp_data;
  logic        task_valid, task_ready, task_done;
  task_t       task_o;

  cute_cmd_if #(.QDEPTH(4)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [6:0] f, input logic [63:0] a, input logic [63:0] b, input int max_wait,
                      output bit took);
    int w = 0;
    @(negedge clk);
    cmd_valid = 1'b1; cmd_funct = f; cmd_rs1 = a; cmd_rs2 = b;
    #2;
    while (!cmd_ready && w < max_wait) begin
      @(negedge clk);
      #2;
      w++;
    end
    took = cmd_ready;
    if (took) @(posedge clk);
    #1;
    cmd_valid = 1'b0;
  endtask

  task automatic get_resp(input int max_wait, output logic [63:0] d, output bit got);
    int w = 0;
    @(negedge clk);
    #2;
    while (!resp_valid && w < max_wait) begin
      @(negedge clk);
      #2;
      w++;
    end
    got = resp_valid;
    d = resp_data;
    resp_ready = 1'b1;
    @(posedge clk);
    #1;
    resp_ready = 1'b0;
  endtask

  task automatic done_pulse();
    @(negedge clk);
    task_done = 1'b1;
    @(negedge clk);
    task_done = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok, got;
    logic [63:0] d;
    task_t tk;
    time t_resp, t_done;
    cmd_valid = 0; cmd_funct = 0; cmd_rs1 = 0; cmd_rs2 = 0; resp_ready = 0;
    task_ready = 0; task_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // empty CHECK answers at once
    send(7'd7, 0, 0, 5, ok);
    get_resp(5, d, got);
    chk(got && d[63], "empty CHECK");

    // configure and issue 4 tasks that differ in M
    send(7'd1, 64'h1111_0000_0000_0040, 64'd192, 5, ok);
    send(7'd2, 64'h2222_0000_0000_0080, 64'd256, 5, ok);
    send(7'd3, 64'h3333_0000_0000_00C0, 64'd320, 5, ok);
    send(7'd4, 64'h4444_0000_0000_0100, 64'd384, 5, ok);
    send(7'd5, {55'd0, 1'b1, 2'd0, 2'd2, 1'b0, 3'd3}, 64'd0, 5, ok);
    for (int i = 0; i < 4; i++) begin
      send(7'd0, {32'd70 + 32'(i), 32'd10 + 32'(i)}, 64'd300, 5, ok);
      send(7'd6, 0, 0, 5, ok);
      chk(ok, "ISSUE accepted");
    end
    // queue full: the fifth ISSUE is held off
    send(7'd6, 0, 0, 10, ok);
    chk(!ok, "ISSUE back-pressured when the queue is full");
    send(7'd8, 0, 0, 5, ok);
    get_resp(5, d, got);
    chk(got && d[15:0] == 0 && d[23:16] == 4 && d[31:24] == 4, $sformatf("status %h", d));

    // the task controller takes them in order
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      chk(task_valid, "task valid");
      tk = task_o;
      chk(tk.m == 32'(10 + i) && tk.n == 32'(70 + i) && tk.k == 300, "M N K");
      chk(tk.base_a == 64'h1111_0000_0000_0040 && tk.stride_a == 192, "A regs");
      chk(tk.base_b == 64'h2222_0000_0000_0080 && tk.stride_b == 256, "B regs");
      chk(tk.base_bias == 64'h3333_0000_0000_00C0 && tk.stride_bias == 320, "bias regs");
      chk(tk.base_c == 64'h4444_0000_0000_0100 && tk.stride_c == 384, "C regs");
      chk(tk.dtype == DT_BF16 && tk.bias_type == BIAS_FULL && tk.transpose, "mode regs");
      task_ready = 1'b1;
      @(negedge clk);
      task_ready = 1'b0;
    end
    @(negedge clk);
    chk(!task_valid, "queue empty");

    // CHECK waits for task 0
    fork
      begin
        send(7'd7, 0, 0, 5, ok);
        get_resp(200, d, got);
        t_resp = $time;
      end
      begin
        repeat (40) @(posedge clk);
        chk(!resp_valid, "CHECK still waiting");
        t_done = $time;
        done_pulse();
      end
    join
    chk(t_resp > t_done, "CHECK answered only after the task completed");
    chk(got && !d[63] && d[31:0] == 0, $sformatf("CHECK returns task 0: %h", d));
    // tasks 1 and 2 done before their CHECK
    done_pulse();
    done_pulse();
    for (int i = 1; i <= 2; i++) begin
      send(7'd7, 0, 0, 5, ok);
      get_resp(20, d, got);
      chk(got && d[31:0] == 32'(i), $sformatf("CHECK returns task %0d", i));
    end
    send(7'd8, 0, 0, 5, ok);
    get_resp(5, d, got);
    chk(got && d[15:0] == 3 && d[23:16] == 1 && d[31:24] == 1, $sformatf("status %h", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

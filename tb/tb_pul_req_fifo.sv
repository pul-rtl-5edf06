// tb_pul_req_fifo: self-checking test of the PUL request queue at its full
// depth of 64. Pushes random requests against a queue reference model with
// random push/pop activity, fills it to the brim to see it refuse the 65th
// request, drains it, and checks order, data, count and full/empty flags.
module tb_pul_req_fifo;
  import pul_pkg::*;
  localparam int DEPTH = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, pop_valid, pop_ready;
  pul_req_t push_data, pop_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  pul_req_fifo #(.T(pul_req_t), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  pul_req_t model[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic pul_req_t rnd_req();
    pul_req_t q;
    q.mem_addr = {$urandom, $urandom};
    q.spm_addr = SPM_ADDR_W'($urandom);
    q.nbytes   = SIZE_W'($urandom);
    return q;
  endfunction

  // one cycle of random traffic; compares head and count before the edge
  task automatic step(input int push_pct, input int pop_pct);
    push_valid = ($urandom_range(99) < push_pct);
    pop_ready  = ($urandom_range(99) < pop_pct);
    push_data  = rnd_req();
    #1;
    check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
    check(push_ready == (model.size() < DEPTH), "push_ready");
    check(pop_valid == (model.size() > 0), "pop_valid");
    if (model.size() > 0) check(pop_data == model[0], "head data");
    @(posedge clk);
    if (pop_valid && pop_ready) void'(model.pop_front());
    if (push_valid && push_ready) model.push_back(push_data);
    #1;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    repeat (500) step(60, 50);
    repeat (200) step(100, 0);       // fill up; later pushes are refused
    check(int'(count) == DEPTH, "full after 200 pushes");
    check(!push_ready, "refuses when full");
    repeat (50) step(100, 100);      // push and pop together when full
    repeat (200) step(0, 100);       // drain
    check(count == 0 && !pop_valid, "empty after drain");
    repeat (500) step(50, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_param_memory -- checks the parameter memory against an array model:
// writes to every word, reads with the one-cycle read latency, XOR flips
// through the injection port, and a write and a flip to the same word in
// one cycle (the write must win). Uses a small depth.
module tb_param_memory;
  localparam int DEPTH = 37, WIDTH = 22, AW = $clog2(DEPTH);

  logic             clk = 0;
  logic             we = 0, flip_en = 0;
  logic [AW-1:0]    waddr = '0, raddr = '0, flip_addr = '0;
  logic [WIDTH-1:0] wdata = '0, flip_mask = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0, cycles = 0;

  param_memory #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 100000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic read_check(int a);
    @(negedge clk) raddr = AW'(a); we = 0; flip_en = 0;
    @(negedge clk);                       // data available one clock later
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      if (failures < 10) $display("FAIL addr=%0d rdata=%h exp=%h", a, rdata, model[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) we = 1; waddr = AW'(a); wdata = WIDTH'($urandom);
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int a = 0; a < DEPTH; a++) read_check(a);
    for (int i = 0; i < 500; i++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1, 0));
      case ($urandom_range(2, 0))
        0: begin
          @(negedge clk) flip_en = 1; flip_addr = AW'(a); flip_mask = WIDTH'(1) << $urandom_range(WIDTH - 1, 0);
          model[a] = model[a] ^ flip_mask;
        end
        1: begin
          @(negedge clk) we = 1; waddr = AW'(a); wdata = WIDTH'($urandom);
          model[a] = wdata;
        end
        default: begin   // write and flip on the same word: write wins
          @(negedge clk) we = 1; waddr = AW'(a); wdata = WIDTH'($urandom);
          flip_en = 1; flip_addr = AW'(a); flip_mask = WIDTH'($urandom);
          model[a] = wdata;
        end
      endcase
      read_check(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

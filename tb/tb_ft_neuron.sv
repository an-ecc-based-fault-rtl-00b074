// tb_ft_neuron -- end-to-end test of the fault-tolerant neuron at a reduced
// fan-in (24). Parameters are loaded through the encoding write port,
// soft errors are injected into the stored words through the flip port
// (single flips in data and check bits, flips of the overall parity bit
// alone, double flips), and evaluations are run with and without input
// stalls. Each result is compared with an integer model fed by an
// independent SECDED reference decode, the fault class of every parameter
// is checked as it enters the arithmetic, and the start-to-result latency
// (fan-in + 3 cycles without stalls) is checked. Every mechanism (correction,
// p-only fault, masking, stall, ReLU clamp, saturation) must occur.
module tb_ft_neuron;
  import tb_secded_ref_pkg::*;

  localparam int N  = 24;                 // fan-in of the neuron under test
  localparam int AW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  logic par_we = 0, flip_en = 0, start = 0, x_valid = 0;
  logic [AW-1:0] par_waddr = '0, flip_addr = '0;
  logic [15:0]   par_wdata = '0;
  logic [21:0]   flip_mask = '0;
  logic signed [15:0] x_data = '0, y;
  logic busy, x_ready, y_valid, spw_valid;
  spw_pkg::fault_type_e spw_fault;

  int checks = 0, failures = 0, cycles = 0;

  // stimulus / expectation state
  logic [15:0] w     [N + 1];     // parameters as written (bias at N)
  logic [21:0] flips [N + 1];     // bit flips injected into each stored word
  int          cls   [N + 1];     // expected fault class per parameter
  logic signed [15:0] xs [N];     // inputs of the next evaluation
  int  mon_k = 0, y_seen = 0, y_cycle = 0, start_cycle = 0;
  logic signed [15:0] y_got = '0;

  // mechanism counters
  int n_single = 0, n_p_only = 0, n_masked = 0, n_stall = 0;
  int n_relu0 = 0, n_sat = 0, n_lat = 0;

  ft_neuron #(.FAN_IN(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      failures++;
      $display("FAIL watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // monitor: fault class of every parameter entering the arithmetic, result
  always @(posedge clk) if (rst_n) begin
    if (spw_valid) begin
      checks++;
      if (mon_k > N || int'(spw_fault) != cls[mon_k]) begin
        failures++;
        if (failures < 10) $display("FAIL param %0d class %0d exp %0d", mon_k, spw_fault, cls[mon_k]);
      end
      case (spw_fault)
        spw_pkg::FT_SINGLE: n_single++;
        spw_pkg::FT_P_ONLY: n_p_only++;
        spw_pkg::FT_DOUBLE: n_masked++;
        default: ;
      endcase
      mon_k++;
    end
    if (y_valid) begin
      y_seen++;
      y_got   = y;
      y_cycle = cycles;
    end
  end

  // load fresh random parameters in [-scale, scale]
  task automatic load_params(int scale);
    for (int a = 0; a <= N; a++) begin
      @(negedge clk);
      par_we = 1; par_waddr = AW'(a);
      par_wdata = 16'($signed($urandom_range(2 * scale, 0)) - scale);
      w[a] = par_wdata; flips[a] = '0;
    end
    @(negedge clk) par_we = 0;
  endtask

  task automatic new_inputs(int scale);
    for (int k = 0; k < N; k++) xs[k] = 16'($signed($urandom_range(2 * scale, 0)) - scale);
  endtask

  task automatic inject(int a, logic [21:0] m);
    @(negedge clk) flip_en = 1; flip_addr = AW'(a); flip_mask = m;
    flips[a] = flips[a] ^ m;
    @(negedge clk) flip_en = 0;
  endtask

  // Bernoulli bit flips with probability p on every stored bit; with
  // limit2 at most two flips per word.
  task automatic inject_rate(real p, bit limit2);
    for (int a = 0; a <= N; a++) begin
      logic [21:0] m;
      m = '0;
      for (int b = 0; b < 22; b++) begin
        int unsigned u;
        u = $urandom;               // one fresh draw per bit
        if (real'(u) / 4294967296.0 < p) m[b] = 1'b1;
      end
      if (limit2) while ($countones(m) > 2) m[$urandom_range(21, 0)] = 1'b0;
      if (m != 0) begin
        @(negedge clk) flip_en = 1; flip_addr = AW'(a); flip_mask = m;
        flips[a] = flips[a] ^ m;
      end
    end
    @(negedge clk) flip_en = 0;
  endtask

  // expected result from the reference decode of every stored word
  function automatic logic signed [15:0] model_y(output bit clamped, output bit sat);
    longint acc, r;
    logic [15:0] cp, sec;
    int c;
    acc = 0;
    for (int a = 0; a <= N; a++) begin
      ref_decode(ref_encode(w[a]) ^ flips[a], cp, c, sec);
      cls[a] = c;
      if (a < N) acc += longint'($signed(cp)) * longint'(xs[a]);
      else       acc += longint'($signed(cp)) * 256;
    end
    r = acc >>> 8;
    clamped = (r <= 0);
    sat = (r > 32767);
    if (r <= 0) return 16'sd0;
    if (r > 32767) return 16'sd32767;
    return 16'(r);
  endfunction

  // one evaluation on xs; stall = randomly withhold x_valid
  task automatic evaluate(bit stall, output logic signed [15:0] y_out);
    logic signed [15:0] exp_y;
    bit clamped, sat;
    int i, wait_cyc;
    exp_y = model_y(clamped, sat);
    mon_k = 0; y_seen = 0;
    @(negedge clk) start = 1;
    start_cycle = cycles + 1;   // the edge that samples start
    @(negedge clk) start = 0;
    i = 0;
    while (i < N) begin
      logic rdy;
      rdy = x_ready;
      x_valid = stall ? ($urandom_range(3, 0) != 0) : 1'b1;
      x_data  = xs[i];
      if (!x_valid) n_stall++;
      @(negedge clk);
      if (x_valid && rdy) i++;
    end
    x_valid = 0;
    wait_cyc = 0;
    while (y_seen == 0 && wait_cyc < 20) begin @(negedge clk); wait_cyc++; end
    checks++;
    if (y_seen != 1 || y_got !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL y=%0d exp=%0d seen=%0d", y_got, exp_y, y_seen);
    end
    checks++;
    if (mon_k != N + 1) begin
      failures++;
      $display("FAIL %0d parameters consumed, expected %0d", mon_k, N + 1);
    end
    if (!stall) begin
      checks++;
      n_lat++;
      if (y_cycle - start_cycle != N + 3) begin
        failures++;
        $display("FAIL latency %0d cycles, expected %0d", y_cycle - start_cycle, N + 3);
      end
    end
    if (clamped) n_relu0++;
    if (sat) n_sat++;
    y_out = y_got;
  endtask

  task automatic require(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    logic signed [15:0] yy;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fault-free evaluations, with and without input stalls
    for (int t = 0; t < 6; t++) begin
      load_params(600);
      new_inputs(600);
      evaluate(t[0], yy);
    end
    // targeted faults: single flips in data/check bits, p alone, doubles
    for (int t = 0; t < 30; t++) begin
      load_params(600);
      for (int a = 0; a <= N; a++) begin
        case ($urandom_range(3, 0))
          0: ;
          1: inject(a, 22'(1) << $urandom_range(20, 0));
          2: inject(a, 22'(1) << 21);
          default: inject(a, rand_flips(2));
        endcase
      end
      new_inputs(600);
      evaluate(t[0], yy);
    end
    // large values: output saturation
    for (int t = 0; t < 6; t++) begin
      load_params(32000);
      new_inputs(32000);
      evaluate(1'b0, yy);
    end
    $display("mechanisms:");
    require("single fault corrected", n_single);
    require("p-bit fault ignored", n_p_only);
    require("double fault masked", n_masked);
    require("input stall cycles", n_stall);
    require("ReLU clamp to zero", n_relu0);
    require("output saturation", n_sat);
    require("latency checks", n_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

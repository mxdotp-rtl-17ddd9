// tb_mxdotp_unit: self-checking testbench of the MXDOTP datapath.
//
// Directed cases (known products, scales, cancellation, rounding ties,
// overflow, subnormals, special values) and random cases in both FP8 formats
// are streamed back to back, one per cycle. Every result is compared with the
// bit-exact reference in mxdotp_ref_pkg, and each result must appear exactly
// three cycles after its operation entered (the paper's three pipeline
// stages) at a rate of one per cycle. A second instance with five pipeline
// levels runs on the same inputs; its outputs must equal the first
// instance's outputs delayed by two cycles.
module tb_mxdotp_unit;
  import mxdotp_pkg::*;
  import mxdotp_ref_pkg::*;

  localparam int NRAND = 6000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        valid_i = 1'b0;
  fp8_fmt_e    fmt = FMT_E5M2;
  logic [63:0] opa = '0, opb = '0, opc = '0;
  logic [4:0]  tag = '0;
  logic        valid_o;
  logic [31:0] res;
  logic [4:0]  tag_o;

  int checks = 0, failures = 0, skipped = 0;
  int cycle = 0;

  mxdotp_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i, .fmt_i(fmt), .opa_i(opa), .opb_i(opb),
    .opc_i(opc), .tag_i(tag), .valid_o, .res_o(res), .tag_o
  );

  // deeper instance: same results two cycles later
  logic        valid5;
  logic [31:0] res5;
  logic [4:0]  tag5;
  logic        v_d [2];
  logic [31:0] r_d [2];
  logic [4:0]  t_d [2];
  int          n_deep = 0, checks_issued = 0;
  mxdotp_unit #(.TAG_W(5), .NUM_PIPE_REGS(5)) dut5 (
    .clk_i(clk), .rst_ni(rst_n), .valid_i, .fmt_i(fmt), .opa_i(opa), .opb_i(opb),
    .opc_i(opc), .tag_i(tag), .valid_o(valid5), .res_o(res5), .tag_o(tag5)
  );
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (valid5 !== v_d[1] || (v_d[1] && (res5 !== r_d[1] || tag5 !== t_d[1]))) begin
        failures++;
        $display("FAIL deep pipeline: %b %h vs %b %h", valid5, res5, v_d[1], r_d[1]);
      end
      if (valid5) n_deep++;
    end
    v_d[1] <= v_d[0]; r_d[1] <= r_d[0]; t_d[1] <= t_d[0];
    v_d[0] <= valid_o; r_d[0] <= res; t_d[0] <= tag_o;
  end
  initial begin
    v_d[0] = 0; v_d[1] = 0; r_d[0] = 0; r_d[1] = 0; t_d[0] = 0; t_d[1] = 0;
  end

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [31:0] exp_res;
    logic        skip;
    int          issue_cycle;
    logic [4:0]  tag;
    logic [63:0] a, b, c;
    logic        f;
  } exp_t;
  exp_t q[$];

  // check outputs
  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++; $display("FAIL: unexpected result");
      end else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.issue_cycle != 3) begin
          failures++;
          $display("FAIL latency %0d", cycle - e.issue_cycle);
        end
        checks++;
        if (tag_o != e.tag) begin failures++; $display("FAIL tag"); end
        if (e.skip) skipped++;
        else begin
          checks++;
          if (res !== e.exp_res) begin
            failures++;
            if (failures < 20)
              $display("FAIL fmt=%0d a=%h b=%h c=%h got %h exp %h", e.f, e.a, e.b, e.c, res, e.exp_res);
          end
        end
      end
    end
  end

  task automatic issue(input logic f, input logic [63:0] a, input logic [63:0] b,
                       input logic [63:0] c);
    exp_t e;
    logic sk;
    e.exp_res     = mxdotp_ref_pkg::mxdotp(f, a, b, c, sk);
    e.skip        = sk;
    e.issue_cycle = cycle + 1;
    checks_issued++;
    e.tag         = 5'($urandom);
    e.a = a; e.b = b; e.c = c; e.f = f;
    valid_i <= 1'b1;
    fmt     <= fp8_fmt_e'(f);
    opa <= a; opb <= b; opc <= c; tag <= e.tag;
    q.push_back(e);
    @(posedge clk);
  endtask

  function automatic logic [63:0] opc_of(input logic [7:0] xa, input logic [7:0] xb,
                                         input logic [31:0] c);
    return {16'h0, xa, xb, c};
  endfunction

  function automatic logic [7:0] rnd_fp8();
    return 8'($urandom);
  endfunction

  function automatic logic [31:0] rnd_c(input int sc);
    int r, e;
    r = int'($urandom_range(0, 9));
    if (r == 0) return 32'($urandom);
    if (r == 1) return 32'h0;
    e = 127 + sc + int'($urandom_range(0, 80)) - 60;
    if (e < 1) e = 0;
    if (e > 254) e = 254;
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] a, b;
    logic [7:0]  xa, xb;
    logic        f;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // 1.0 x 1.0 in all lanes, unit scales: 8.0 (E4M3 1.0 = 0x38)
    issue(1'b1, {8{8'h38}}, {8{8'h38}}, opc_of(8'd127, 8'd127, 32'h0));
    // same with X^A = 2: 16.0, plus C = 1.0: 17.0
    issue(1'b1, {8{8'h38}}, {8{8'h38}}, opc_of(8'd128, 8'd127, 32'h3F80_0000));
    // E5M2 1.0 = 0x3C; products cancel exactly -> C
    issue(1'b0, {4{8'h3C, 8'h3C}}, {4{8'h3C, 8'hBC}}, opc_of(8'd127, 8'd127, 32'h4040_0000));
    // exact cancellation with C: 8 - 8 = +0
    issue(1'b1, {8{8'h38}}, {8{8'h38}}, opc_of(8'd127, 8'd127, 32'hC100_0000));
    // huge scales: overflow to Inf
    issue(1'b0, {8{8'h7B}}, {8{8'h7B}}, opc_of(8'd254, 8'd254, 32'h0));
    // tiny scales: subnormal result
    issue(1'b1, {8{8'h01}}, {8{8'h38}}, opc_of(8'd0, 8'd100, 32'h0));
    // NaN scale
    issue(1'b1, {8{8'h38}}, {8{8'h38}}, opc_of(8'hFF, 8'd127, 32'h0));
    // E5M2 Inf x 0 -> NaN
    issue(1'b0, {7'h0, 8'h7C} , 64'h0, opc_of(8'd127, 8'd127, 32'h0));
    // E5M2 Inf x 1 -> +Inf
    issue(1'b0, {56'h0, 8'h7C}, {56'h0, 8'h3C}, opc_of(8'd127, 8'd127, 32'h3F80_0000));
    // C huge, products small: C unchanged
    issue(1'b1, {8{8'h38}}, {8{8'h38}}, opc_of(8'd127, 8'd127, 32'h7E00_0001));
    // rounding tie: 2^24 + 1 -> ties to even 2^24
    issue(1'b1, {56'h0, 8'h38}, {56'h0, 8'h38}, opc_of(8'd127, 8'd127, 32'h4B80_0000));
    // all products zero, C = -0 -> -0
    issue(1'b1, {8{8'h80}}, {8{8'h00}}, opc_of(8'd127, 8'd127, 32'h8000_0000));

    for (int n = 0; n < NRAND; n++) begin
      f  = 1'($urandom);
      for (int i = 0; i < 8; i++) begin a[8*i +: 8] = rnd_fp8(); b[8*i +: 8] = rnd_fp8(); end
      if ($urandom_range(0, 3) == 0) begin
        xa = 8'($urandom); xb = 8'($urandom);
      end else begin
        xa = 8'(127 + int'($urandom_range(0, 40)) - 20);
        xb = 8'(127 + int'($urandom_range(0, 40)) - 20);
      end
      issue(f, a, b, opc_of(xa, xb, rnd_c(int'(xa) + int'(xb) - 254)));
    end
    valid_i <= 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
    checks++;
    if (n_deep != checks_issued) begin failures++; $display("FAIL: deep instance gave %0d of %0d results", n_deep, checks_issued); end
    $display("skipped (frame-limited) cases: %0d", skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

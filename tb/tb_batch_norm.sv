// tb_batch_norm: random sums, scales, biases and shifts (including values
// that saturate), compared two cycles later with
// clamp((x * scale + bias) >>> shift, -128, 127) computed here in 64 bits.
module tb_batch_norm;
  import cnn_pkg::*;
  localparam int N = 500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [ACC_W-1:0] in_data [NCH];
  logic [1:0] in_tag = 0;
  logic signed [BNS_W-1:0] scale [NCH];
  logic signed [BNB_W-1:0] bias [NCH];
  logic [4:0] shift = 0;
  logic out_valid;
  pix_t out_pix [NCH];
  logic [1:0] out_tag;
  int checks = 0, failures = 0, nsat = 0, n = 0;

  batch_norm #(.TAG_W(2)) dut (.*);

  typedef struct packed { logic [1:0] tag; logic [NCH*8-1:0] p; } exp_t;
  exp_t exp_q [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // scale, bias and shift change only while the pipeline is empty
  always_ff @(posedge clk) begin
    in_valid <= 1'b0;
    if (rst_n && n < N) begin
      if (n % 10 == 0 && exp_q.size() == 0 && !out_valid) begin
        for (int o = 0; o < NCH; o++) begin
          scale[o] <= BNS_W'($urandom);
          bias[o]  <= BNB_W'($urandom);
        end
        shift <= 5'($urandom % 32);
        n <= n + 1;
      end else if (n % 10 != 0) begin
        logic signed [ACC_W-1:0] d [NCH];
        logic [1:0] t;  exp_t e;
        t = 2'($urandom);
        for (int o = 0; o < NCH; o++) begin
          longint y;
          d[o] = (n % 3 == 0) ? $signed($urandom) : $signed(32'($urandom % 20001) - 32'd10000);
          y = (longint'(d[o]) * longint'(scale[o]) + longint'(bias[o])) >>> shift;
          if (y > 127) begin y = 127; nsat++; end
          else if (y < -128) begin y = -128; nsat++; end
          e.p[o*8 +: 8] = 8'(y);
        end
        e.tag = t;
        exp_q.push_back(e);
        in_valid <= 1'b1; in_data <= d; in_tag <= t;
        n <= n + 1;
      end
    end
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      check(out_tag == e.tag, "tag");
      for (int o = 0; o < NCH; o++)
        check(out_pix[o] == e.p[o*8 +: 8], $sformatf("ch %0d: %0d vs %0d", o, out_pix[o], $signed(e.p[o*8 +: 8])));
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NCH; o++) begin in_data[o] = '0; scale[o] = '0; bias[o] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    while (n < N) @(posedge clk);
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    check(nsat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

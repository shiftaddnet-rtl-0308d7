// tb_add_conv: runs the add-layer engine on small random layers (stride 1, padding
// 1) and compares every result -sum|x - w|, its
// address, the exported operand stream and the start-to-done cycle count (N + 2)
// with an independent model. Padded positions must contribute -|w|.
module tb_add_conv;
  import shiftadd_pkg::*;

  localparam int C_I = 3, H = 4, W = 5, C_O = 2, R = 3, S = 3, PAD = 1;
  localparam int E = H + 2*PAD - R + 1, F = W + 2*PAD - S + 1;
  localparam int XD = C_I*H*W, WD = C_O*C_I*R*S, OD = C_O*E*F;
  localparam int N = OD * C_I * R * S;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, o_we, op_valid;
  logic [$clog2(XD)-1:0] x_raddr;
  logic [$clog2(WD)-1:0] w_raddr, op_w_addr;
  logic [$clog2(OD)-1:0] o_waddr;
  logic signed [DATA_W-1:0] x_rdata, w_rdata, op_x, op_w;
  logic signed [ACC_W-1:0]  o_wdata;

  logic signed [DATA_W-1:0] xmem [XD];
  logic signed [DATA_W-1:0] wmem [WD];
  int expv [OD];
  int checks = 0, failures = 0, n_ops = 0, n_pad_ops = 0;

  add_conv #(.C_I(C_I), .H(H), .W(W), .C_O(C_O), .R(R), .S(S), .PAD(PAD)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    x_rdata <= xmem[x_raddr];
    w_rdata <= wmem[w_raddr];
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run(int xmax);
    int sum, y, xx, xv, cyc, writes, ops;
    for (int i = 0; i < XD; i++) xmem[i] = DATA_W'($urandom_range(2*xmax) - xmax);
    for (int i = 0; i < WD; i++) wmem[i] = DATA_W'($urandom);
    for (int co = 0; co < C_O; co++)
      for (int e = 0; e < E; e++)
        for (int f = 0; f < F; f++) begin
          sum = 0;
          for (int ci = 0; ci < C_I; ci++)
            for (int r = 0; r < R; r++)
              for (int s = 0; s < S; s++) begin
                y  = e + r - PAD;
                xx = f + s - PAD;
                xv = (y >= 0 && y < H && xx >= 0 && xx < W) ? int'(xmem[(ci*H + y)*W + xx]) : 0;
                sum -= (xv > wmem[((co*C_I + ci)*R + r)*S + s]) ?
                       xv - wmem[((co*C_I + ci)*R + r)*S + s] : wmem[((co*C_I + ci)*R + r)*S + s] - xv;
              end
          expv[(co*E + e)*F + f] = sum;
        end
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    cyc = 0; writes = 0; ops = 0;
    @(negedge clk);
    start = 1'b0;
    forever begin
      @(posedge clk);
      cyc++;
      if (op_valid) begin
        ops++;
        // operand weight must be the one stored at the reported index
        check("op_w matches op_w_addr", op_w, wmem[op_w_addr]);
        if (op_x == 0) n_pad_ops++;
      end
      if (o_we) begin
        writes++;
        check($sformatf("O[%0d]", o_waddr), o_wdata, expv[o_waddr]);
      end
      if (done) break;
      if (cyc > N + 100) break;
    end
    n_ops += ops;
    check("latency start->done", cyc, N + 2);
    check("writes", writes, OD);
    check("operand pairs", ops, N);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(127);
    run(5);
    run(127);
    checks++;
    if (n_pad_ops == 0) failures++;
    $display("operand pairs=%0d zero-x pairs=%0d", n_ops, n_pad_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

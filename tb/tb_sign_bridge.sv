// tb_sign_bridge: self-checking testbench of the PE-to-IMAC sign bridge.
//
// With oe high every IMAC line j*N+i must carry the inverted sign bit of PE(i,j).
// With oe low the bridge must release the lines: a second tri-state driver in the
// testbench then sets their value alone.
module tb_sign_bridge;
  localparam int N = 4;
  logic oe = 1'b0, tb_oe = 1'b0;
  logic [N-1:0][N-1:0][31:0] acc = '0;
  logic [N*N-1:0] tb_val = '0;
  wire  [N*N-1:0] imac_in;
  int checks = 0, failures = 0;

  sign_bridge #(.N(N)) dut (.oe, .acc, .imac_in);
  assign imac_in = tb_oe ? tb_val : 'z;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) acc[i][j] = $urandom;
      oe = 1; tb_oe = 0; tb_val = '0;
      #1;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          check(imac_in[j*N + i] == !acc[i][j][31], $sformatf("line %0d", j*N + i));
      oe = 0; tb_oe = 1; tb_val = {$urandom, $urandom};
      #1;
      check(imac_in == tb_val, "released with oe low");
    end
    // the boundary values: +0.0 -> 1, -0.0 -> 0, -tiny -> 0
    acc = '0; acc[0][0] = 32'h8000_0000; acc[1][0] = 32'h8000_0001; acc[0][1] = 32'h7F80_0000;
    oe = 1; tb_oe = 0; #1;
    check(imac_in[0] == 1'b0 && imac_in[1] == 1'b0 && imac_in[N] == 1'b1 && imac_in[5] == 1'b1,
          "sign cases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

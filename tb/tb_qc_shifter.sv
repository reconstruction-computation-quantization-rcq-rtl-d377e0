// tb_qc_shifter: checks the circulant rotation, forward
// out[j] = in[(j + i) mod S] and inverse out[(j + i) mod S] = in[j], for
// every shift of a 128-lane vector and for a non-power-of-two size (S = 96).
module tb_qc_shifter;
  localparam int S = 128, W = 8, S2 = 96;
  logic [S-1:0][W-1:0]  din, fwd, back;
  logic [6:0]           shift;
  logic [S2-1:0][W-1:0] din2, fwd2, back2;
  logic [6:0]           shift2;
  int checks = 0, failures = 0;

  qc_shifter #(.S(S), .W(W)) u_f (.din(din), .shift(shift), .inv(1'b0), .dout(fwd));
  qc_shifter #(.S(S), .W(W)) u_i (.din(fwd), .shift(shift), .inv(1'b1), .dout(back));
  qc_shifter #(.S(S2), .W(W)) u_f2 (.din(din2), .shift(shift2), .inv(1'b0), .dout(fwd2));
  qc_shifter #(.S(S2), .W(W)) u_i2 (.din(din2), .shift(shift2), .inv(1'b1), .dout(back2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < S; j++) din[j] = W'($urandom);
    for (int j = 0; j < S2; j++) din2[j] = W'($urandom);
    for (int i = 0; i < S; i++) begin
      automatic int bad = 0;
      shift = 7'(i);
      #1;
      for (int j = 0; j < S; j++) begin
        if (fwd[j] != din[(j + i) % S]) bad++;
        if (back[j] != din[j]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("S=128 shift %0d: %0d lanes wrong", i, bad); end
    end
    for (int i = 0; i < S2; i++) begin
      automatic int bad = 0;
      shift2 = 7'(i);
      #1;
      for (int j = 0; j < S2; j++) begin
        if (fwd2[j] != din2[(j + i) % S2]) bad++;
        if (back2[(j + i) % S2] != din2[j]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("S=96 shift %0d: %0d lanes wrong", i, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_shuffler: self-checking testbench of the lane-rotation shuffler.
// Drives random vectors, rotation amounts and enables; checks every output
// lane against the rotation rule (lane 4g+l -> 4g+((l+rot) mod 4)) and that
// a dot product of two vectors shuffled alike is unchanged.
module tb_shuffler;
  localparam int unsigned K0 = 16;
  int checks = 0, failures = 0;
  logic             en;
  logic [1:0]       rot;
  logic [K0-1:0][7:0] din, dout, din2, dout2;

  shuffler #(.K0(K0), .W(8)) dut  (.en, .rot, .din, .dout);
  shuffler #(.K0(K0), .W(8)) dut2 (.en, .rot, .din(din2), .dout(dout2));

  initial begin
    for (int it = 0; it < 500; it++) begin
      automatic longint d0 = 0, d1 = 0;
      en = 1'($urandom_range(1)); rot = 2'($urandom_range(3));
      for (int k = 0; k < K0; k++) begin din[k] = 8'($urandom); din2[k] = 8'($urandom); end
      #1;
      for (int k = 0; k < K0; k++) begin
        automatic int dst = en ? (k / 4) * 4 + (k % 4 + int'(rot)) % 4 : k;
        checks++;
        if (dout[dst] !== din[k]) begin
          failures++;
          if (failures < 5) $display("lane %0d rot %0d en %0d: got %h want %h", k, rot, en, dout[dst], din[k]);
        end
        d0 += longint'($signed(din[k])) * longint'($signed(din2[k]));
        d1 += longint'($signed(dout[k])) * longint'($signed(dout2[k]));
      end
      checks++;
      if (d0 != d1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_prbs_generator: checks the BCID header code against a bit-serial
// reference of the two PRBSs, over several orbits-worth of frames with BCR
// pulses at irregular intervals, and checks that the state holds when
// frame_en is low. Also checks the claim behind the code: the pair of
// sequences does not repeat within 3564 bunch crossings.
module tb_prbs_generator;
  import locic_ref_pkg::*;
  logic clk = 0, rst_n = 1, frame_en = 0, bcr = 0;
  logic [3:0] code;
  int checks = 0, failures = 0;
  int bcid;

  prbs_generator dut (.clk, .rst_n, .frame_en, .bcr, .code);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] ref_codes [0:3999];
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bcid = 0;
    for (int f = 0; f < 1200; f++) begin
      @(negedge clk);
      // idle cycles between frames: code must not advance
      bcr      = (f == 0) || (f == 437) || (f == 1000);
      frame_en = 1;
      if (bcr) bcid = 0;
      #1;
      checks++;
      if (code !== bcid_code_ref(bcid)) begin
        failures++;
        if (failures < 4 || f < 4) $display("frame %0d bcid %0d: code %h expected %h", f, bcid, code, bcid_code_ref(bcid));
      end
      @(negedge clk);
      frame_en = 0; bcr = 0;
      repeat (f % 3) @(negedge clk);
      bcid++;
    end
    // Uniqueness of the code sequence over one orbit: 4 consecutive codes
    // (16 bits) identify the bunch crossing. Uses the reference only.
    for (int b = 0; b < 3564 + 4; b++) ref_codes[b] = bcid_code_ref(b);
    begin
      int dup = 0;
      for (int b = 0; b < 3564; b += 97)
        for (int c = 0; c < 3564; c++)
          if (c != b && {ref_codes[b], ref_codes[b+1], ref_codes[b+2], ref_codes[b+3]} ==
                        {ref_codes[c], ref_codes[c+1], ref_codes[c+2], ref_codes[c+3]}) dup++;
      checks++;
      if (dup != 0) begin failures++; $display("%0d repeated 4-code windows", dup); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

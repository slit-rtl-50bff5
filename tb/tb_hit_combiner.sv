// tb_hit_combiner: self-checking test of the per-channel hit logic.
//
// Drives random discriminator outputs and enables on 128 channels and checks
// every channel against a reference written as a case table: both enabled ->
// AND of the two discriminators; only the differentiator enabled -> its
// output; only the CR-RC discriminator enabled -> its output; neither -> 0.
// The logic is combinational; each vector is checked 1 ns after it is applied.
module tb_hit_combiner;
  localparam int unsigned N = 128;

  logic [N-1:0] disc_diff, disc_crrc, enb_comp1, enb_comp2, hit;
  int checks = 0, failures = 0;

  hit_combiner #(.NUM_CH(N)) dut (.*);

  function automatic logic ref_hit(logic d, logic c, logic e1, logic e2);
    case ({e1, e2})
      2'b11:   return d & c;
      2'b10:   return d;
      2'b01:   return c;
      default: return 1'b0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen [4];   // how often each enable combination was exercised with a hit

  initial begin
    for (int v = 0; v < 400; v++) begin
      for (int w = 0; w < N / 32; w++) begin
        disc_diff[w*32 +: 32] = $urandom;
        disc_crrc[w*32 +: 32] = $urandom;
        enb_comp1[w*32 +: 32] = $urandom;
        enb_comp2[w*32 +: 32] = $urandom;
      end
      #1;
      for (int c = 0; c < N; c++) begin
        logic exp_hit;
        exp_hit = ref_hit(disc_diff[c], disc_crrc[c], enb_comp1[c], enb_comp2[c]);
        if (exp_hit) seen[{enb_comp1[c], enb_comp2[c]}]++;
        checks++;
        if (hit[c] !== exp_hit) begin
          failures++;
          if (failures < 10)
            $display("mismatch ch %0d: diff=%b crrc=%b e1=%b e2=%b hit=%b exp=%b",
                     c, disc_diff[c], disc_crrc[c], enb_comp1[c], enb_comp2[c], hit[c], exp_hit);
        end
      end
    end
    // every enabling mode must have produced hits
    for (int m = 1; m < 4; m++) begin
      checks++;
      if (seen[m] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

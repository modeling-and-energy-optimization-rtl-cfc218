// oms_processor_tb: the processing unit in both of its configurations.
//  * dec : default parameters, DC = 30 full VNPs (the processor of the complete decoder).
//  * tst : NB = 1, one full VNP and 29 VNP fronts (the test circuit).
// Phase 1 streams random check nodes into both, with random idle cycles, and checks
// that every result appears exactly 3 clock edges after its inputs, with out_valid,
// and equals the reference: mu = Lambda' - lambda, check node update, Lambda = mu + lambda.
// Phase 2 runs the test circuit as in the Monte-Carlo characterisation: three
// computation trees are evaluated in interleaved fashion to keep the 3-stage pipeline
// full. For each tree the head VN starts with Lambda' = 0 and lambda = 0, and its
// belief output is fed back as its Lambda' for the next of DV-1 = 2 layers; the other
// inputs are drawn as mu + lambda from Gaussian beliefs. The final Lambda of each tree
// is compared with the reference.
module oms_processor_tb;
  import oms_ref_pkg::*;
  localparam int W = 6, DC = 30, C = 1, LAT = 3;
  localparam int NCYC = 5000;
  localparam int NTREE = 3000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                in_valid;
  logic signed [W:0]   bin [DC];
  logic signed [W-1:0] cin [DC];
  logic                dv, tv;
  logic signed [W:0]   db [DC], tb_ [1];
  logic signed [W-1:0] dc_ [DC], tc [1];
  logic                dh [DC], th [1];

  oms_processor dec (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .belief_in(bin), .cmsg_in(cin),
                     .out_valid(dv), .belief_out(db), .cmsg_out(dc_), .hard_out(dh));
  oms_processor #(.W(W), .DC(DC), .C(C), .NB(1)) tst (
                     .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .belief_in(bin), .cmsg_in(cin),
                     .out_valid(tv), .belief_out(tb_), .cmsg_out(tc), .hard_out(th));

  int checks = 0, failures = 0;

  // expected results, indexed by the cycle the inputs were driven in
  logic exp_v [8];
  int   exp_b [8][DC];
  int   exp_c [8][DC];

  task automatic fail(string what);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, what);
  endtask

  function automatic void reference(input int bl[DC], input int cl[DC], output int ob[DC], output int oc[DC]);
    vec_t mu, lam;
    for (int i = 0; i < MAXN; i++) mu[i] = 0;
    for (int i = 0; i < DC; i++) mu[i] = sat(bl[i] - cl[i], W);
    lam = cn_update(mu, DC, C);
    for (int i = 0; i < DC; i++) begin
      oc[i] = lam[i];
      ob[i] = mu[i] + lam[i];
    end
  endfunction

  initial begin
    repeat (NCYC + NTREE * 8 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bl[DC], cl[DC], ob[DC], oc[DC];

  initial begin
    int slot, old;
    rst_n = 1'b0;
    in_valid = 1'b0;
    for (int i = 0; i < 8; i++) exp_v[i] = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: random stream
    for (int t = 0; t < NCYC + LAT; t++) begin
      @(negedge clk);
      slot = t % 8;
      old  = (t + 8 - LAT) % 8;
      checks++;
      if (dv !== exp_v[old] || tv !== exp_v[old]) fail("out_valid not 3 cycles after in_valid");
      if (exp_v[old]) begin
        for (int i = 0; i < DC; i++) begin
          checks++;
          if (int'(db[i]) != exp_b[old][i] || int'(dc_[i]) != exp_c[old][i] ||
              dh[i] != (exp_b[old][i] < 0))
            fail($sformatf("decoder processor VN %0d: %0d/%0d expected %0d/%0d", i, db[i], dc_[i],
                           exp_b[old][i], exp_c[old][i]));
        end
        checks++;
        if (int'(tb_[0]) != exp_b[old][0] || int'(tc[0]) != exp_c[old][0] || th[0] != (exp_b[old][0] < 0))
          fail("test circuit output");
      end
      in_valid = (t < NCYC) && ($urandom % 5 != 0);
      exp_v[slot] = in_valid;
      for (int i = 0; i < DC; i++) begin
        bl[i] = int'($urandom % 127) - 63;
        cl[i] = ($urandom % 3 == 0) ? int'($urandom % 7) - 3 : int'($urandom % 63) - 31;
        bin[i] = (W+1)'(bl[i]);
        cin[i] = W'(cl[i]);
      end
      reference(bl, cl, ob, oc);
      for (int i = 0; i < DC; i++) begin
        exp_b[slot][i] = ob[i];
        exp_c[slot][i] = oc[i];
      end
    end
    // phase 2: interleaved computation trees on the test circuit. Drive number d works
    // on tree d % 3 and layer (d / 3) % 2. The result of a drive comes out 3 cycles
    // later, exactly when the same tree's next layer is driven, so the head VN's output
    // is fed straight back as its Lambda' and the pipeline never idles.
    begin
      int nd, done_trees;
      int exp_head [];
      nd = NTREE * 2;
      exp_head = new[nd];
      done_trees = 0;
      for (int d = 0; d < nd + LAT; d++) begin
        @(negedge clk);
        if (d >= LAT) begin
          checks++;
          if (!tv || int'(tb_[0]) != exp_head[d-LAT])
            fail($sformatf("drive %0d: head belief %0d expected %0d", d - LAT, tb_[0], exp_head[d-LAT]));
          if ((d - LAT) / 3 % 2 == 1) done_trees++;
        end
        if (d >= nd) begin
          in_valid = 1'b0;
          continue;
        end
        in_valid = 1'b1;
        cl[0] = 0;
        bl[0] = ((d / 3) % 2 == 1) ? exp_head[d-LAT] : 0;
        for (int i = 1; i < DC; i++) begin
          int m, l;
          m = channel_llr(4.0, 0.6, W);
          l = channel_llr(4.0, 0.9, W);
          cl[i] = l;
          bl[i] = m + l;
        end
        for (int i = 0; i < DC; i++) begin
          bin[i] = (W+1)'(bl[i]);
          cin[i] = W'(cl[i]);
        end
        // second layer: the head VN's belief total is the circuit's own previous output
        if ((d / 3) % 2 == 1) bin[0] = tb_[0];
        reference(bl, cl, ob, oc);
        exp_head[d] = ob[0];
      end
      $display("computation trees evaluated: %0d", done_trees);
      if (done_trees != NTREE) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

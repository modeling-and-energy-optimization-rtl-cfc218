// min12_tree: the MIN1,2 unit, first and second minimum of N magnitudes.
//
// Level 0 sorts the inputs in pairs with Sort blocks, giving N/2 sorted pairs. If N is
// odd, the input that cannot be paired goes with the last pair into a 3-input Merge
// block. Each following level merges neighbouring pairs with 4-input Merge blocks; a
// pair left over at a level with an odd count passes unchanged to the next level. For
// N = 30 this gives 15 Sort and 14 Merge blocks in 5 levels. The Sort / Merge / 3-input
// Merge structure follows the paper; the order in which pairs are merged is this
// design's choice. Purely combinational. N must be at least 2.
module min12_tree #(
  parameter int W = 5,
  parameter int N = 30
) (
  input  logic [N-1:0][W-1:0] x,
  output logic [W-1:0]        min1,
  output logic [W-1:0]        min2
);
  // number of sorted pairs at level lv (level 0 = after the Sort blocks)
  function automatic int count_at(int lv);
    int c = N / 2;
    for (int i = 0; i < lv; i++) c = (c + 1) / 2;
    return c;
  endfunction

  function automatic int levels();
    int c = N / 2, l = 0;
    while (c > 1) begin
      c = (c + 1) / 2;
      l++;
    end
    return l;
  endfunction

  localparam int NLEV = levels();

  for (genvar lv = 0; lv <= NLEV; lv++) begin : g_lv
    localparam int CNT = count_at(lv);
    logic [W-1:0] m1 [CNT];
    logic [W-1:0] m2 [CNT];

    if (lv == 0) begin : g_sort
      for (genvar j = 0; j < CNT; j++) begin : g_pair
        if (N % 2 == 1 && j == CNT - 1) begin : g_odd
          logic [W-1:0] s1, s2;
          sort2  #(.W(W)) u_sort  (.x0(x[2*j]), .x1(x[2*j+1]), .min1(s1), .min2(s2));
          merge3 #(.W(W)) u_merge (.min1a(s1), .min1b(x[N-1]), .min2a(s2),
                                   .min1(m1[j]), .min2(m2[j]));
        end else begin : g_even
          sort2 #(.W(W)) u_sort (.x0(x[2*j]), .x1(x[2*j+1]), .min1(m1[j]), .min2(m2[j]));
        end
      end
    end else begin : g_merge
      localparam int PREV = count_at(lv - 1);
      for (genvar j = 0; j < CNT; j++) begin : g_node
        if (2 * j + 1 < PREV) begin : g_m4
          merge4 #(.W(W)) u_merge (
            .min1a(g_lv[lv-1].m1[2*j]), .min1b(g_lv[lv-1].m1[2*j+1]),
            .min2a(g_lv[lv-1].m2[2*j]), .min2b(g_lv[lv-1].m2[2*j+1]),
            .min1(m1[j]), .min2(m2[j]));
        end else begin : g_pass
          assign m1[j] = g_lv[lv-1].m1[2*j];
          assign m2[j] = g_lv[lv-1].m2[2*j];
        end
      end
    end
  end

  assign min1 = g_lv[NLEV].m1[0];
  assign min2 = g_lv[NLEV].m2[0];

  if (N < 2) begin : g_bad
    $error("min12_tree needs N >= 2");
  end
endmodule

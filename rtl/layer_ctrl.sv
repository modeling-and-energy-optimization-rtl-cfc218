// layer_ctrl: sequencer of the row-layered schedule.
//
// After start it runs n_iter iterations; each iteration walks through the DV layers and
// each layer through its Z rows (check nodes), issuing one row per clock cycle to the
// processor. For row r of layer l it gives every bank k the read address
// (r + shift(l,k)) mod Z of the quasi-cyclic code (shift(l,k) = l*k mod Z, see
// ldpc_pkg), and the CN-to-VN message row l*Z + r. first_iter tells the decoder to feed
// lambda = 0 instead of the message memory during iteration 1.
//
// Layer stall: a layer may only start once the previous layer's belief totals are back
// in memory. The processor's latency is LAT cycles and the write takes place on the
// edge that ends the result's cycle, so after the last row of a layer the controller
// idles for LAT cycles (stall = 1) before issuing the next layer. The stall is this
// design's choice; the paper does not say how layers follow each other in the pipeline.
//
// The read addresses and message row of every issued row are delayed by LAT cycles and
// come out as wb_addr / wb_row, aligned with the processor's out_valid.
//
// Timing: start is sampled in IDLE; the first row is issued in the next cycle. A decode
// takes n_iter * DV * (Z + LAT) cycles of busy, after which done is high for one cycle.
module layer_ctrl #(
  parameter int DC  = ldpc_pkg::CODE_DC,
  parameter int DV  = ldpc_pkg::CODE_DV,
  parameter int Z   = ldpc_pkg::CODE_Z,
  parameter int LAT = ldpc_pkg::PROC_LAT,
  parameter int IW  = 8,
  localparam int AW = $clog2(Z),
  localparam int RW = $clog2(Z * DV)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] n_iter,       // number of iterations T (0 is taken as 1)
  output logic          busy,
  output logic          done,         // one-cycle pulse at the end of the decode
  output logic          issue,        // a row is issued this cycle
  output logic          stall,        // waiting for the pipeline to drain
  output logic          first_iter,   // current iteration is the first one
  output logic [AW-1:0] rd_addr [DC],
  output logic [RW-1:0] rd_row,
  output logic [AW-1:0] wb_addr [DC],
  output logic [RW-1:0] wb_row,
  output logic [IW-1:0] iter          // current iteration, counted from 1
);
  typedef enum logic [1:0] {S_IDLE, S_ROW, S_DRAIN} state_e;

  // circulant shift of bank k in layer l, computed at elaboration
  function automatic logic [AW-1:0] shift_of(int l, int k);
    return AW'(ldpc_pkg::qc_shift(l, k, Z));
  endfunction

  state_e           state;
  logic [AW-1:0]    row;
  logic [$clog2(DV+1)-1:0] layer;
  logic [$clog2(LAT+1)-1:0] wait_cnt;
  logic [IW-1:0]    iter_max;

  // issued-row information delayed until write-back
  logic [AW-1:0]    dly_addr [LAT][DC];
  logic [RW-1:0]    dly_row  [LAT];

  assign busy       = state != S_IDLE;
  assign issue      = state == S_ROW;
  assign stall      = state == S_DRAIN;
  assign first_iter = iter == IW'(1);

  always_comb begin
    logic [AW:0] a;
    for (int k = 0; k < DC; k++) begin
      a = {1'b0, row};
      for (int l = 0; l < DV; l++)
        if (int'(layer) == l) a = {1'b0, row} + {1'b0, shift_of(l, k)};
      if (a >= (AW+1)'(Z)) a = a - (AW+1)'(Z);
      rd_addr[k] = a[AW-1:0];
    end
    rd_row = RW'(layer) * RW'(Z) + RW'(row);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      row      <= '0;
      layer    <= '0;
      wait_cnt <= '0;
      iter     <= '0;
      iter_max <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_ROW;
          row      <= '0;
          layer    <= '0;
          iter     <= IW'(1);
          iter_max <= (n_iter == '0) ? IW'(1) : n_iter;
        end
        S_ROW: begin
          if (row == AW'(Z - 1)) begin
            row      <= '0;
            state    <= S_DRAIN;
            wait_cnt <= '0;
          end else begin
            row <= row + 1'b1;
          end
        end
        S_DRAIN: begin
          if (wait_cnt == ($clog2(LAT+1))'(LAT - 1)) begin
            if (int'(layer) == DV - 1) begin
              layer <= '0;
              if (iter == iter_max) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                iter  <= iter + 1'b1;
                state <= S_ROW;
              end
            end else begin
              layer <= layer + 1'b1;
              state <= S_ROW;
            end
          end else begin
            wait_cnt <= wait_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    dly_addr[0] <= rd_addr;
    dly_row[0]  <= rd_row;
    for (int s = 1; s < LAT; s++) begin
      dly_addr[s] <= dly_addr[s-1];
      dly_row[s]  <= dly_row[s-1];
    end
  end

  assign wb_addr = dly_addr[LAT-1];
  assign wb_row  = dly_row[LAT-1];

  if (LAT < 1) begin : g_bad
    $error("layer_ctrl needs LAT >= 1");
  end
endmodule

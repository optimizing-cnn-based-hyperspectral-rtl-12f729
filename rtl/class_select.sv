// class_select: final classification decision.
//
// On start it reads the n class scores (the last FC layer's outputs, stored
// at addresses 0..n-1 of a feature bank) one per cycle through a read port
// with one cycle of latency, keeps a copy of each in `scores`, and outputs
// the index of the largest (the first one on a tie) as `label`. Softmax is
// monotonic, so this is the class the network's K-way softmax would pick;
// the probabilities themselves are not computed. done pulses n+3 cycles
// after start. The scores sit at addresses below MAX_CLASSES, so the upper
// bits of raddr are always 0.
module class_select
  import hsi_pkg::*;
#(
  parameter int MAX_CLASSES = 16,
  parameter int FAW = 13
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [4:0]     n,
  output logic [FAW-1:0] raddr,
  input  data_t          rdata,
  output logic           done,
  output logic [4:0]     label,
  output data_t          best,
  output data_t          scores [MAX_CLASSES]
);
  logic       active, rv;
  logic [4:0] ia, id;        // address issued, index of returning data

  assign raddr = FAW'(ia);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; rv <= 1'b0; ia <= '0; id <= '0; done <= 1'b0;
      label <= '0; best <= '0;
      for (int i = 0; i < MAX_CLASSES; i++) scores[i] <= '0;
    end else begin
      done <= 1'b0;
      rv   <= active && (ia < n);
      id   <= ia;
      if (start) begin
        active <= 1'b1; ia <= '0; label <= '0; best <= data_t'(16'sh8000);
      end else if (active) begin
        if (ia < n) ia <= ia + 5'd1;
        if (rv) begin
          if (int'(id) < MAX_CLASSES) scores[id[$clog2(MAX_CLASSES)-1:0]] <= rdata;
          if (id == 5'd0 || rdata > best) begin best <= rdata; label <= id; end
        end
        if (ia >= n && !rv) begin active <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule

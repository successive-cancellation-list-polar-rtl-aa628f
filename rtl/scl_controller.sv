// scl_controller: schedule of the LLR-SCL decoder.
//
// For each bit i = 0..N-1 the component decoders first walk down the SC
// tree, one layer per COMPUTE cycle:
//   i = 0: f at layers log2(N)-1, ..., 0
//   i > 0: g at layer t = ctz(i) (the node whose left half just finished),
//          then f at layers t-1, ..., 0
// and then spend one DECIDE cycle in which the metric units, the sorter and
// the three memory banks extend, prune and copy the list for bit i.
// In total 2N-2 COMPUTE and N DECIDE cycles: 3N-2 cycles per codeword.
// Interface: `start` (one cycle, while idle) begins a codeword and raises
// `init` in that same cycle so the banks clear; `busy` is high for exactly
// the 3N-2 working cycles; `done` pulses for one cycle after the last one.
module scl_controller
  import llrscl_pkg::*;
#(
  parameter int unsigned N = llrscl_pkg::N_DEF,
  localparam int unsigned LGN = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output phase_e         phase,
  output logic [LGN-1:0] lam,       // layer computed in a COMPUTE cycle
  output logic           op_g,      // COMPUTE cycle runs g (1) or f (0)
  output logic [LGN-1:0] bit_idx,   // bit being decoded
  output logic           init,
  output logic           busy,
  output logic           done
);
  // Count trailing zeros of a non-zero bit index.
  function automatic logic [LGN-1:0] ctz(logic [LGN-1:0] v);
    for (int b = LGN - 1; b >= 0; b--) begin
      if (v[b]) ctz = LGN'(b);
    end
    if (v == '0) ctz = '0;
  endfunction

  logic [LGN-1:0] next_idx;
  assign next_idx = bit_idx + 1'b1;
  assign init     = start && (phase == ST_IDLE);
  assign busy     = (phase != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= ST_IDLE;
      lam     <= '0;
      op_g    <= 1'b0;
      bit_idx <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        ST_IDLE: if (start) begin
          phase   <= ST_COMPUTE;
          lam     <= LGN'(LGN - 1);
          op_g    <= 1'b0;
          bit_idx <= '0;
        end
        ST_COMPUTE: begin
          if (lam == '0) begin
            phase <= ST_DECIDE;
          end else begin
            lam  <= lam - 1'b1;
            op_g <= 1'b0;
          end
        end
        ST_DECIDE: begin
          if (bit_idx == LGN'(N - 1)) begin
            phase <= ST_IDLE;
            done  <= 1'b1;
          end else begin
            phase   <= ST_COMPUTE;
            bit_idx <= next_idx;
            lam     <= ctz(next_idx);
            op_g    <= 1'b1;
          end
        end
        default: phase <= ST_IDLE;
      endcase
    end
  end
endmodule

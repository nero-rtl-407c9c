// bypass_switch: the per-PE stream switch that routes data between the host
// stream, the PE's HBM port and the PE's compute pipeline, and that lets small
// grids bypass the HBM.
//
// Sources: host_in (512-bit, from the cache-line buffer), hbm_rd (512-bit, read
// from the HBM port after width conversion) and pe_out (512-bit results).
// Sinks: pe_in (to the fields stream splitter), hbm_wr (to the HBM port after
// width conversion) and host_out (results towards the host). The job phase
// selects the routes:
//   PH_LOAD     host_in -> hbm_wr                    (window data into HBM)
//   PH_COMPUTE  hbm_rd  -> pe_in,  pe_out -> hbm_wr  (compute from HBM)
//   PH_UNLOAD   hbm_rd  -> host_out                  (results back to host)
//   PH_BYPASS   host_in -> pe_in,  pe_out -> host_out (HBM bypassed)
// Unrouted sources see ready low, unrouted sinks valid low. The switch is
// combinational; the phase may change only between transfers. The HBM bypass
// and the host->HBM->PE->HBM->host order follow the paper; folding both into
// one four-way switch is this design's own choice.
module bypass_switch
  import nero_pkg::*;
#(
  parameter int unsigned W = 512
) (
  input  phase_e       phase,
  input  logic         host_in_valid,
  output logic         host_in_ready,
  input  logic [W-1:0] host_in_data,
  input  logic         hbm_rd_valid,
  output logic         hbm_rd_ready,
  input  logic [W-1:0] hbm_rd_data,
  input  logic         pe_out_valid,
  output logic         pe_out_ready,
  input  logic [W-1:0] pe_out_data,
  output logic         pe_in_valid,
  input  logic         pe_in_ready,
  output logic [W-1:0] pe_in_data,
  output logic         hbm_wr_valid,
  input  logic         hbm_wr_ready,
  output logic [W-1:0] hbm_wr_data,
  output logic         host_out_valid,
  input  logic         host_out_ready,
  output logic [W-1:0] host_out_data
);

  always_comb begin
    host_in_ready = 1'b0; hbm_rd_ready = 1'b0; pe_out_ready = 1'b0;
    pe_in_valid = 1'b0; hbm_wr_valid = 1'b0; host_out_valid = 1'b0;
    pe_in_data    = hbm_rd_data;
    hbm_wr_data   = pe_out_data;
    host_out_data = pe_out_data;
    unique case (phase)
      PH_LOAD: begin
        hbm_wr_valid  = host_in_valid;
        hbm_wr_data   = host_in_data;
        host_in_ready = hbm_wr_ready;
      end
      PH_COMPUTE: begin
        pe_in_valid  = hbm_rd_valid;
        hbm_rd_ready = pe_in_ready;
        hbm_wr_valid = pe_out_valid;
        pe_out_ready = hbm_wr_ready;
      end
      PH_UNLOAD: begin
        host_out_valid = hbm_rd_valid;
        host_out_data  = hbm_rd_data;
        hbm_rd_ready   = host_out_ready;
      end
      PH_BYPASS: begin
        pe_in_valid    = host_in_valid;
        pe_in_data     = host_in_data;
        host_in_ready  = pe_in_ready;
        host_out_valid = pe_out_valid;
        pe_out_ready   = host_out_ready;
      end
      default: ;
    endcase
  end

endmodule

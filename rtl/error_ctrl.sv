// error_ctrl: timing error control unit, one supply setting per FPGA partition.
//
// Each partition k of the floorplan runs from its own Vccint rail. Its setting
// vccint_mv[k] starts at the value of the offline voltage calibration (VINIT, by
// default computed at elaboration from the critical paths and the K-Means partition
// map through rlwe_pkg::calib_mv) and is raised by one step, VSTEP_MV, in every clock
// in which a Razor register of that partition flags an error, saturating at VMAX_MV.
// `boost[k]` pulses with each step; it and vccint_mv drive the external voltage
// booster. err_count counts the error flags seen (partitions times clocks).
// The paper gives the calibration formula, the 0.95-1.05 V range and the rule "raise
// the partition voltage by one step on an error"; the 10 mV step and the mV encoding
// are this design's choice.
module error_ctrl
  import rlwe_pkg::*;
#(
  parameter int        NPART    = 5,
  parameter int        VMIN_MV  = 950,
  parameter int        VMAX_MV  = 1050,
  parameter int        VSTEP_MV = 10,
  parameter part_vec_t VINIT    = calib_mv('{2217, 2217, 1900, 1900, 2394, 2101, 8603,
                                             3332, 3654, 5327, 1170, 1725, 1323, 1412},
                                           '{0, 0, 0, 0, 0, 0, 1, 2, 2, 3, 4, 4, 4, 4},
                                           5, 950, 1050)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NPART-1:0] err,
  output logic [10:0]      vccint_mv [NPART],
  output logic [NPART-1:0] boost,
  output logic [15:0]      err_count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NPART; k++) vccint_mv[k] <= 11'(VINIT[k]);
      boost     <= '0;
      err_count <= '0;
    end else begin
      boost <= '0;
      for (int k = 0; k < NPART; k++) begin
        if (err[k] && int'(vccint_mv[k]) < VMAX_MV) begin
          vccint_mv[k] <= (int'(vccint_mv[k]) + VSTEP_MV > VMAX_MV) ? 11'(VMAX_MV)
                                                                    : vccint_mv[k] + 11'(VSTEP_MV);
          boost[k]     <= 1'b1;
        end
      end
      err_count <= err_count + 16'($countones(err));
    end
  end

  initial assert (VMIN_MV <= VMAX_MV && VSTEP_MV > 0);
endmodule

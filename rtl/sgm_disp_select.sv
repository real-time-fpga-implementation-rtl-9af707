// sgm_disp_select: disparity selection, D(p) = argmin_d S(p,d), for the
// four pixels of a word. Each pixel uses a balanced tree of
// compare-and-select nodes carrying (cost, index); on equal costs the
// smaller disparity wins (a choice of this design; the paper only asks
// for the minimum). Registered: out_* follow in_* by one cycle.
// No sub-pixel refinement and no post-processing (the paper evaluates the
// design without median filter or left-right check).
module sgm_disp_select
  import sgm_pkg::*;
#(
  parameter int DISP = sgm_pkg::DEF_DISP,
  localparam int DW  = $clog2(DISP)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_sof,
  input  scost_t [PPC-1:0][DISP-1:0]  in_s,
  output logic                        out_valid,
  output logic                        out_sof,
  output logic   [PPC-1:0][DW-1:0]    out_disp
);
  localparam int NP = 1 << DW;

  logic [PPC-1:0][DW-1:0] disp;

  for (genvar j = 0; j < PPC; j++) begin : g_pix
    scost_t          val [2*NP-1];
    logic [DW-1:0]   idx [2*NP-1];
    always_comb begin
      for (int i = 0; i < NP; i++) begin
        val[NP-1+i] = (i < DISP) ? in_s[j][i] : '1;
        idx[NP-1+i] = DW'(i);
      end
      for (int i = NP-2; i >= 0; i--) begin
        if (val[2*i+2] < val[2*i+1]) begin
          val[i] = val[2*i+2];
          idx[i] = idx[2*i+2];
        end else begin
          val[i] = val[2*i+1];
          idx[i] = idx[2*i+1];
        end
      end
      disp[j] = idx[0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_disp  <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_sof & in_valid;
      if (in_valid) out_disp <= disp;
    end
  end
endmodule

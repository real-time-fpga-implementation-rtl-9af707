// sgm_sum: S(p,d) = sum over the four paths of L_r(p,d), for the four
// pixels of a word and all disparities in parallel. Registered: out_*
// follow in_* by one cycle. SW = LW+2 bits hold the sum without overflow.
// The sum over paths is the paper's; widths and the register are chosen here.
module sgm_sum
  import sgm_pkg::*;
#(
  parameter int DISP = sgm_pkg::DEF_DISP
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic                                   in_sof,
  input  lcost_t [NPATH-1:0][PPC-1:0][DISP-1:0]  in_l,
  output logic                                   out_valid,
  output logic                                   out_sof,
  output scost_t [PPC-1:0][DISP-1:0]             out_s
);
  scost_t [PPC-1:0][DISP-1:0] s;

  always_comb begin
    for (int j = 0; j < PPC; j++)
      for (int d = 0; d < DISP; d++) begin
        s[j][d] = '0;
        for (int r = 0; r < NPATH; r++) s[j][d] = s[j][d] + SW'(in_l[r][j][d]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_s     <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_sof & in_valid;
      if (in_valid) out_s <= s;
    end
  end
endmodule

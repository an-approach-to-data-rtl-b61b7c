// degree_select: the two-dimensional selection matrix. Maps the usage metric
// (common / uncommon) and the miss metric (low / high miss rate) to one of
// three prefetch degrees, as in the paper's table:
//
//                 low miss rate   high miss rate
//     common      standard        high
//     uncommon    low             standard
//
// and gives the degree as a number of lines: DEG_LOW = 1, DEG_STD = 4,
// DEG_HIGH = 8 by default, the values the paper found best. Combinational.
module degree_select
  import umbp_pkg::*;
#(
  parameter int unsigned DEG_LOW  = 1,
  parameter int unsigned DEG_STD  = 4,
  parameter int unsigned DEG_HIGH = 8
) (
  input  logic             common,
  input  logic             low_miss,
  output degree_e          degree,
  output logic [DEG_W-1:0] lines
);

  always_comb begin
    unique case ({common, low_miss})
      2'b11:   degree = DEG_CLASS_STANDARD;
      2'b10:   degree = DEG_CLASS_HIGH;
      2'b01:   degree = DEG_CLASS_LOW;
      default: degree = DEG_CLASS_STANDARD;
    endcase
    unique case (degree)
      DEG_CLASS_LOW:  lines = DEG_W'(DEG_LOW);
      DEG_CLASS_HIGH: lines = DEG_W'(DEG_HIGH);
      default:        lines = DEG_W'(DEG_STD);
    endcase
  end

endmodule

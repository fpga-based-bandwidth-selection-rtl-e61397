// math_model: behavioural stand-in for the shared arithmetic resource
// (reciprocal, ln, exp) in unit testbenches. It answers each request after
// LAT clocks with the value computed in double precision and rounded to
// Q32.32, and counts the requests of each kind.
module math_model
  import plugin_pkg::*;
#(
  parameter int LAT = 3
) (
  input  logic      clk,
  input  math_req_t mreq,
  output math_rsp_t mrsp
);
  int n_rcp = 0, n_ln = 0, n_exp = 0;

  initial begin
    mrsp = '0;
    forever begin
      @(posedge clk);
      if (mreq.valid) begin
        real a, r;
        a = real'(mreq.a) / 4294967296.0;
        unique case (mreq.fn)
          MF_RCP:  begin r = 1.0 / a;  n_rcp++; end
          MF_LN:   begin r = $ln(a);   n_ln++;  end
          default: begin r = $exp(a);  n_exp++; end
        endcase
        repeat (LAT) @(posedge clk);
        mrsp.y    <= fix_t'(r * 4294967296.0);
        mrsp.done <= 1'b1;
        @(posedge clk);
        mrsp.done <= 1'b0;
      end
    end
  end
endmodule

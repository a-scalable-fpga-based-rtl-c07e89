// depth_integration: merges the outcome of the search into the map point.
//  - accepted observation, no prior: new hypothesis (id_obs, var_obs),
//    validity = VAL_INIT, point becomes valid;
//  - accepted observation, valid prior: product of the two Gaussians,
//      id  = (id*var_obs + id_obs*var) / (var + var_obs)
//      var = var*var_obs / (var + var_obs),
//    validity += VAL_INC (saturating at VAL_MAX);
//  - failed match (error, ambiguity, triangulation): a valid point loses
//    VAL_DEC validity and is invalidated and blacklisted below zero; an
//    invalid point gets its blacklist counter decremented;
//  - skipped or out-of-frame points are left as they are.
// Output is the map point with its coordinates, one per cycle, one cycle
// latency. Counter constants are this design's choice.
module depth_integration
  import slam_pkg::*;
#(
  parameter int VAL_INIT = 5,
  parameter int VAL_INC  = 5,
  parameter int VAL_DEC  = 5,
  parameter int VAL_MAX  = 50
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  job_t    in_job,
  output logic    out_valid,
  input  logic    out_ready,
  output job_t    out_job,
  output logic    fused,       // statistics pulses
  output logic    created
);
  job_t r;
  logic fu, cr;
  always_comb begin
    map_point_t p;
    logic signed [63:0] n, s;
    logic signed [16:0] v;
    p  = in_job.pt;
    fu = 1'b0;
    cr = 1'b0;
    s  = 64'(p.idepth_var) + 64'(in_job.var_obs);
    n  = '0;
    v  = '0;
    case (in_job.st)
      ST_SCAN: begin
        if (p.is_valid && s > 0) begin
          fu = 1'b1;
          n  = 64'(p.idepth) * 64'(in_job.var_obs) + 64'(in_job.id_obs) * 64'(p.idepth_var);
          p.idepth     = fix_t'(n / s);
          p.idepth_var = fix_t'((64'(p.idepth_var) * 64'(in_job.var_obs)) / s);
          v = 17'(p.validity) + 17'(VAL_INC);
          p.validity = (v > 17'(VAL_MAX)) ? 16'(VAL_MAX) : 16'(v);
        end else if (!p.is_valid) begin
          cr = 1'b1;
          p.idepth     = in_job.id_obs;
          p.idepth_var = in_job.var_obs;
          p.validity   = 16'(VAL_INIT);
          p.is_valid   = 1'b1;
        end
      end
      ST_FAIL_ERR, ST_FAIL_UNIQ, ST_FAIL_DEPTH: begin
        if (p.is_valid) begin
          v = 17'(p.validity) - 17'(VAL_DEC);
          if (v < 0) begin
            p.validity    = '0;
            p.is_valid    = 1'b0;
            p.blacklisted = p.blacklisted - 1'b1;
          end else p.validity = 16'(v);
        end else p.blacklisted = p.blacklisted - 1'b1;
      end
      default: ;
    endcase
    r    = in_job;
    r.pt = p;
  end

  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_job <= '0; fused <= 1'b0; created <= 1'b0;
    end else begin
      fused <= 1'b0; created <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_job <= r;
          fused   <= fu;
          created <= cr;
        end
      end
    end
endmodule

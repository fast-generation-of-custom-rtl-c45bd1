// tb_fp_spatial_filters_full -- one full 1920x1080 frame through the
// fp_spatial_filters top with every parameter at its default, checked pixel by
// pixel for all five filters.  All checking is in fp_spatial_filters_bench.
module tb_fp_spatial_filters_full;
  fp_spatial_filters_bench #(.IW(1920), .IH(1080), .NF(1), .FULL(1'b1)) bench ();
endmodule

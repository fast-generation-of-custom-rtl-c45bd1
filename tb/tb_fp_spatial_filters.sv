// tb_fp_spatial_filters -- end-to-end test of the fp_spatial_filters top on a
// 12x8 image (IMG_W/IMG_H overridden), three frames with blanking, vsync and
// kernel changes.  All checking is in fp_spatial_filters_bench.
module tb_fp_spatial_filters;
  fp_spatial_filters_bench #(.IW(12), .IH(8), .NF(3), .FULL(1'b0)) bench ();
endmodule

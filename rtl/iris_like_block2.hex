2f717
00071
27f73
2773f
00031
13737
13311
00070
00070
13330
11330
27f01
2ff33
2f717
00070
000f0
2f703
11331
13333
27f7f
11737
00030
000f0
2f73f
13337
17733
11713
00010
2ff3f
2f707

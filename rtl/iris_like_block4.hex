27737
13333
00071
2ff07
000f0
13300
2f777
13700
11313
11131
13f01
2f7f7
1133f
000f0
00011
13330
00031
000f0
27f13
2f77f
11377
27711
13331
2ff73
27713
27f33
13370
000f0
000f1
000f0

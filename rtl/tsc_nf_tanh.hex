300
300
300
300
301
301
301
301
301
302
302
303
304
305
306
308
30a
30d
311
316
31b
323
32c
337
344
354
367
37d
397
3b3
3d1
3f0
010
02f
04d
069
083
099
0ac
0bc
0c9
0d4
0dd
0e5
0ea
0ef
0f3
0f6
0f8
0fa
0fb
0fc
0fd
0fe
0fe
0ff
0ff
0ff
0ff
0ff
100
100
100
100

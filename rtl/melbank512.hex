000000
00d6d4
01ada8
02847b
035b4f
043223
0508f7
05dfcb
06b69e
078d72
086446
093b1a
0a11ee
0ae8c1
0bbf95
0c9669
0d6d3d
0e4411
0f1ae4
0ff1b8
10c88c
119f60
127634
134d07
1423db
14faaf
15d183
16a856
177f2a
1855fe
192cd2
1a03a1
1ad963
1ba67c
1c6d64
1d2f15
1deb41
1ea11d
1f52f2
200128
20a8d9
214d81
21eee1
228ad1
2324ac
23ba1e
244c90
24dc60
25681c
25f281
267831
26fd5f
277da2
27fdcc
287936
28f48c
296baa
29e25a
2a55af
2ac7e6
2b37ed
2ba5d6
2c1301
2c7cc7
2ce68c
2d4d4b
2db314
2e17ee
2e79e1
2edbd5
2f3b74
2f99b7
2ff7fa
3052fd
30adb2
310817
315f62
31b6ac
320d70
326171
32b572
330918
3359ee
33aac5
33fb9b
344991
34975c
34e526
353106
357be3
35c6bf
3610f2
3658fd
36a107
36e912
372f42
377496
37b9ea
37ff3e
3841fc
3884b3
38c76a
3909bf
3949f3
398a27
39ca5a
3a0a28
3a47f0
3a85b9
3ac381
3b013d
3b3cb1
3b7826
3bb39a
3bef0f
3c28e9
3c6220
3c9b57
3cd48e
3d0d41
3d4450
3d7b5f
3db26e
3de97d
3e1f52
3e544f
3e894b
3ebe47
3ef343
3f26bb
3f59b8
3f8cb5
3fbfb2
3ff2af
402441
405552
408664
40b775
40e886
4118a1
4147d9
417711
41a649
41d581
42048b
4231fc
425f6d
428cdd
42ba4e
42e7bf
431463
43401d
436bd8
439792
43c34c
43ef07
4419bf
4443d3
446de8
4497fd
44c211
44ec26
451564
453de3
456662
458ee0
45b75f
45dfde
46080c
462f04
4655fc
467cf4
46a3ec
46cae5
46f1dd
4717e5
473d66
4762e6
478866
47ade7
47d367
47f8e7
481d42
484159
48656f
488986
48ad9d
48d1b3
48f5ca
4918e7
493ba1
495e5c
498116
49a3d1
49c68b
49e946
4a0b8d
4a2cf8
4a4e64
4a6fcf
4a913b
4ab2a6
4ad412
4af57e
4b160c
4b3635
4b565f
4b7688
4b96b1
4bb6da
4bd704
4bf72d
4c1675
4c3568
4c545b
4c734e
4c9241
4cb134
4cd027
4cef1a
4d0d86
4d2b4e
4d4917
4d66df
4d84a8
4da270
4dc039
4dde01
4dfbca
4e189c
4e3545
4e51ee
4e6e97
4e8b41
4ea7ea
4ec493
4ee13d
4efde6
4f198f
4f3524
4f50b9
4f6c4d
4f87e2
4fa377
4fbf0c
4fdaa1
4ff636
50111f
502baa
504634
5060bf
507b4a
5095d5
50b060
50caea
50e575
ff0000
